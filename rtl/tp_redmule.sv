// Tensor engine (TE) of a TensorPool Tile: RedMulE-style GEMM accelerator
// with a latency-tolerant memory interface.
//
// It joins the controller (configuration registers, job FSM, interrupt) and
// the streamer, which holds the engine (32 x 8 FP16 FMA array and its
// buffers), the per-stream reorder buffers, the transactions table and the
// Z FIFO. One 512-bit request per cycle leaves on the wide port; the Tile
// routes it to its own banks or, through the Burst-Grouper, to other Tiles.
// Peak rate 256 FP16 MACs per cycle (paper). `mac_cycles_o` counts the
// cycles in which the FMA array issued work, for utilisation measurements.
module tp_redmule
  import tp_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [TILE_SEL_W-1:0] tile_id_i,
  // configuration from a core of the Tile
  input  cfg_req_t              cfg_i,
  output logic [31:0]           cfg_rdata_o,
  output logic                  irq_o,
  output logic                  busy_o,
  output logic [31:0]           mac_cycles_o,
  output logic [31:0]           stall_cycles_o,
  // wide memory port
  output logic                  req_valid_o,
  input  logic                  req_ready_i,
  output wreq_t                 req_o,
  input  logic                  lrsp_valid_i,
  input  wrsp_t                 lrsp_i,
  input  logic                  rrsp_valid_i,
  input  rrsp_t                 rrsp_i
);
  logic              start, done;
  logic [ADDR_W-1:0] xa, wa, ya, za;
  logic [15:0]       m, n, k, ws;

  tp_te_ctrl i_ctrl (
    .clk_i, .rst_ni,
    .cfg_i, .cfg_rdata_o, .irq_o,
    .start_o(start),
    .x_addr_o(xa), .w_addr_o(wa), .y_addr_o(ya), .z_addr_o(za),
    .m_o(m), .n_o(n), .k_o(k), .w_start_o(ws),
    .done_i(done),
    .busy_o
  );

  tp_te_streamer i_streamer (
    .clk_i, .rst_ni, .tile_id_i,
    .start_i(start),
    .x_addr_i(xa), .w_addr_i(wa), .y_addr_i(ya), .z_addr_i(za),
    .m_i(m), .n_i(n), .k_i(k), .w_start_i(ws),
    .done_o(done),
    .mac_cycles_o, .stall_cycles_o,
    .req_valid_o, .req_ready_i, .req_o,
    .lrsp_valid_i, .lrsp_i, .rrsp_valid_i, .rrsp_i
  );
endmodule
