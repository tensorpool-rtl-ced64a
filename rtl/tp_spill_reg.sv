// Spill register: a two-entry elastic buffer on a valid/ready channel.
//
// The paper places spill registers at the Tile, SubGroup and Group
// boundaries to ease timing closure. This one registers both the forward
// path (data and valid) and the backward path (ready): the output is always
// driven from a flip-flop and `ready_o` depends only on the fill state. It
// adds one cycle of latency and sustains one transfer per cycle. The
// two-entry organisation is the usual way to get full throughput with a
// registered ready; it is this design's choice.
module tp_spill_reg #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  output logic             ready_o,
  input  logic [WIDTH-1:0] data_i,
  output logic             valid_o,
  input  logic             ready_i,
  output logic [WIDTH-1:0] data_o
);
  logic [WIDTH-1:0] a_q, b_q;   // a: output stage, b: spill stage
  logic             a_v, b_v;

  assign valid_o = a_v;
  assign data_o  = a_q;
  assign ready_o = !b_v;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_v <= 1'b0;
      b_v <= 1'b0;
    end else begin
      if (!a_v || ready_i) begin
        // output stage drains or is empty: refill from spill or input
        if (b_v) begin
          a_v <= 1'b1;
          b_v <= 1'b0;                 // no input taken: ready_o is low when b_v
        end else begin
          a_v <= valid_i;
        end
      end else if (valid_i && ready_o) begin
        // output stalled: park the new beat in the spill stage
        b_v <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (!a_v || ready_i) begin
      if (b_v) a_q <= b_q;
      else if (valid_i) a_q <= data_i;
    end
    if (a_v && !ready_i && valid_i && ready_o) b_q <= data_i;
  end
endmodule
