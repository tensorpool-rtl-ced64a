// Synchronous first-in first-out buffer, used as the 32-entry Z FIFO of the
// tensor engine streamer and as the small W line buffer of the engine.
//
// A circular array with read and write pointers and an occupancy counter.
// The head entry is visible on `data_o` whenever `empty_o` is low
// (fall-through read); `pop_i` removes it at the clock edge. Pushing into a
// full FIFO or popping an empty one is an error, flagged by assertions. A
// push and a pop in the same cycle are allowed at any fill level except a
// push into a full FIFO. Depth 32 for the Z stream is from the paper; the
// fall-through organisation is this design's choice.
module tp_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         data_i,
  input  logic                     pop_i,
  output logic [WIDTH-1:0]         data_o,
  output logic                     full_o,
  output logic                     empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  assign full_o  = (cnt_q == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty_o = (cnt_q == '0);
  assign count_o = cnt_q;
  assign data_o  = mem[rd_q];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i) wr_q <= incr(wr_q);
      if (pop_i)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + CW'(push_i) - CW'(pop_i);
    end
  end

  always_ff @(posedge clk_i) if (push_i) mem[wr_q] <= data_i;

  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> !full_o || pop_i)
    else $error("push into full FIFO");
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o)
    else $error("pop from empty FIFO");
endmodule
