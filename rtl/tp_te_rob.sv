// Reorder buffer of one tensor-engine load stream (X, W or Y).
//
// The paper gives each stream a 16-entry ROB so that many 512-bit reads can
// be in flight through an interconnect whose latency depends on where the
// data lives (1 cycle in the own Tile, up to 9 cycles in another Group).
// Slots are allocated in request order at the tail (`alloc_i`, index on
// `alloc_idx_o`); completed lines are written into their slot in any order
// through two commit ports (a complete local line and a line completed by
// the transactions table can arrive in the same cycle); the head slot is
// released to the engine in order once its line is present. `full_o` blocks
// new requests. Organisation (circular buffer with a per-slot done flag) is
// this design's choice.
module tp_te_rob
  import tp_pkg::*;
#(
  parameter int unsigned DEPTH = ROB_DEPTH,
  parameter int unsigned WIDTH = LINE_W
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // allocation
  input  logic                     alloc_i,
  output logic [$clog2(DEPTH)-1:0] alloc_idx_o,
  output logic                     full_o,
  // commits
  input  logic                     c0_valid_i,
  input  logic [$clog2(DEPTH)-1:0] c0_idx_i,
  input  logic [WIDTH-1:0]         c0_data_i,
  input  logic                     c1_valid_i,
  input  logic [$clog2(DEPTH)-1:0] c1_idx_i,
  input  logic [WIDTH-1:0]         c1_data_i,
  // in-order release
  output logic                     valid_o,
  input  logic                     ready_i,
  output logic [WIDTH-1:0]         data_o,
  output logic                     empty_o
);
  localparam int unsigned IW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [DEPTH-1:0] done_q;
  logic [IW-1:0]    head_q, tail_q;
  logic [IW:0]      cnt_q;
  logic             pop;

  assign full_o      = (cnt_q == (IW+1)'(DEPTH));
  assign empty_o     = (cnt_q == '0);
  assign alloc_idx_o = tail_q;
  assign valid_o     = !empty_o && done_q[head_q];
  assign data_o      = mem[head_q];
  assign pop         = valid_o && ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      head_q <= '0;
      tail_q <= '0;
      cnt_q  <= '0;
      done_q <= '0;
    end else begin
      if (alloc_i) tail_q <= tail_q + 1'b1;
      if (pop) begin
        head_q <= head_q + 1'b1;
        done_q[head_q] <= 1'b0;
      end
      if (c0_valid_i) done_q[c0_idx_i] <= 1'b1;
      if (c1_valid_i) done_q[c1_idx_i] <= 1'b1;
      cnt_q <= cnt_q + (IW+1)'(alloc_i) - (IW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (c0_valid_i) mem[c0_idx_i] <= c0_data_i;
    if (c1_valid_i) mem[c1_idx_i] <= c1_data_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) alloc_i |-> !full_o)
    else $error("ROB allocation while full");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   c0_valid_i && c1_valid_i |-> c0_idx_i != c1_idx_i)
    else $error("two commits to one ROB slot");
endmodule
