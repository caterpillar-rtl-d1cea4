// ring_link: the systolic link from one core to the next core of the ring.
//
// The paper connects the cores in a unidirectional ring in which passing data
// from one core to the next takes one cycle per hop. This link is a register
// stage with valid/ready flow control, built as a two-entry skid buffer: data
// accepted in one cycle is offered to the downstream core in the next, and
// the upstream side sees ready from a register, so a long ring has no
// combinational ready path around it. Full throughput (one beat per cycle)
// when the downstream core keeps ready high.
module ring_link #(
  parameter int unsigned W = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  logic [W-1:0] main_q, skid_q;
  logic         main_v, skid_v;

  assign out_valid = main_v;
  assign out_data  = main_q;
  assign in_ready  = !skid_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      main_v <= 1'b0;
      skid_v <= 1'b0;
    end else begin
      if (!main_v || out_ready) begin
        // main register is free (or drains) this cycle
        if (skid_v) begin
          main_v <= 1'b1;
          skid_v <= 1'b0;
        end else begin
          main_v <= in_valid;
        end
      end else if (in_valid && in_ready) begin
        skid_v <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!main_v || out_ready) begin
      main_q <= skid_v ? skid_q : in_data;
    end
    if (main_v && !out_ready && in_valid && in_ready) begin
      skid_q <= in_data;
    end
  end

endmodule
