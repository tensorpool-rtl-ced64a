// TensorPool Tile.
//
// A Tile holds 32 L1 banks of 2 KiB behind a local crossbar, the memory ports
// of its four cores (the cores themselves are outside this RTL: their load/
// store ports are ports of the Tile), optionally one tensor engine, and the
// Tile's share of the hierarchical interconnect:
//
//   * PE and TE accesses to the own Tile go straight to the local crossbar
//     and take one cycle.
//   * Accesses to other Tiles go through the remote request arbiter to one of
//     seven outbound ports (4 towards the SubGroups of the own Group, 3
//     towards the other Groups), each behind a spill register at the Tile
//     boundary. Wide TE accesses first pass the Burst-Grouper.
//   * Requests from other Tiles enter on seven inbound ports, each with a
//     Burst-Distributor that drives the local crossbar and returns the data
//     K words per beat.
//   * Responses on the outbound ports are routed back to PEs and the TE by
//     the remote response arbiter.
//
// This follows the Tile of the paper's Fig. 2a. Instruction caches and the
// shared divide/square-root unit belong to the cores and are not part of
// this RTL. A TE's configuration port is a Tile port (in the chip a core of
// the Tile writes it).
module tp_tile
  import tp_pkg::*;
#(
  parameter bit          HAS_TE    = 1'b1,
  parameter int unsigned NUM_PE    = PES_PER_TILE,
  parameter int unsigned NUM_BANKS = BANKS_PER_TILE
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [TILE_SEL_W-1:0] tile_id_i,
  // core memory ports
  input  logic [NUM_PE-1:0]     pe_req_valid_i,
  output logic [NUM_PE-1:0]     pe_req_ready_o,
  input  pe_req_t               pe_req_i [NUM_PE],
  output logic [NUM_PE-1:0]     pe_rsp_valid_o,
  output pe_rsp_t               pe_rsp_o [NUM_PE],
  // tensor engine configuration
  input  cfg_req_t              te_cfg_i,
  output logic [31:0]           te_cfg_rdata_o,
  output logic                  te_irq_o,
  output logic                  te_busy_o,
  output logic [31:0]           te_mac_cycles_o,
  output logic [31:0]           te_stall_cycles_o,
  // outbound remote ports (this Tile initiates)
  output logic [NUM_REMOTE-1:0] out_req_valid_o,
  input  logic [NUM_REMOTE-1:0] out_req_ready_i,
  output rreq_t                 out_req_o [NUM_REMOTE],
  input  logic [NUM_REMOTE-1:0] out_rsp_valid_i,
  output logic [NUM_REMOTE-1:0] out_rsp_ready_o,
  input  rrsp_t                 out_rsp_i [NUM_REMOTE],
  // inbound remote ports (other Tiles access this one)
  input  logic [NUM_REMOTE-1:0] in_req_valid_i,
  output logic [NUM_REMOTE-1:0] in_req_ready_o,
  input  rreq_t                 in_req_i [NUM_REMOTE],
  output logic [NUM_REMOTE-1:0] in_rsp_valid_o,
  input  logic [NUM_REMOTE-1:0] in_rsp_ready_i,
  output rrsp_t                 in_rsp_o [NUM_REMOTE]
);
  localparam int unsigned M_TE  = NUM_PE;
  localparam int unsigned M_IN  = NUM_PE + 1;
  localparam int unsigned NM    = NUM_PE + 1 + NUM_REMOTE;
  localparam int unsigned NSRC  = NUM_PE + 1;

  // ---------------------------------------------------------------- local crossbar
  logic [NM-1:0]     x_req, x_gnt, x_rvalid;
  lreq_t             x_lreq  [NM];
  logic [LINE_W-1:0] x_rdata [NM];

  tp_local_xbar #(.NM(NM), .NB(NUM_BANKS)) i_local_xbar (
    .clk_i, .rst_ni,
    .req_i(x_req), .lreq_i(x_lreq), .gnt_o(x_gnt),
    .rsp_valid_o(x_rvalid), .rsp_rdata_o(x_rdata)
  );

  // ---------------------------------------------------------------- remote request side
  logic [NSRC-1:0] a_valid, a_ready;
  rreq_t           a_req [NSRC];
  logic [NUM_REMOTE-1:0] s_valid, s_ready;
  rreq_t           s_req [NUM_REMOTE];

  tp_remote_req_arbiter #(.NS(NSRC)) i_req_arb (
    .clk_i, .rst_ni, .tile_id_i,
    .in_valid_i(a_valid), .in_ready_o(a_ready), .in_req_i(a_req),
    .out_valid_o(s_valid), .out_ready_i(s_ready), .out_req_o(s_req)
  );

  for (genvar p = 0; p < NUM_REMOTE; p++) begin : g_out_spill
    logic [RREQ_W-1:0] d;
    tp_spill_reg #(.WIDTH(RREQ_W)) i_spill (
      .clk_i, .rst_ni,
      .valid_i(s_valid[p]), .ready_o(s_ready[p]), .data_i(s_req[p]),
      .valid_o(out_req_valid_o[p]), .ready_i(out_req_ready_i[p]), .data_o(d)
    );
    assign out_req_o[p] = rreq_t'(d);
  end

  // ---------------------------------------------------------------- remote response side
  logic [NSRC-1:0] r_valid, r_block;
  rrsp_t           r_rsp [NSRC];

  tp_remote_rsp_arbiter #(.ND(NSRC)) i_rsp_arb (
    .clk_i, .rst_ni,
    .in_valid_i(out_rsp_valid_i), .in_ready_o(out_rsp_ready_o), .in_rsp_i(out_rsp_i),
    .block_i(r_block), .out_valid_o(r_valid), .out_rsp_o(r_rsp)
  );

  // ---------------------------------------------------------------- core ports
  logic [NUM_PE-1:0] pe_we_q;
  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic local_acc;
    assign local_acc = addr_tile(pe_req_i[p].addr) == tile_id_i;
    assign x_req[p]  = pe_req_valid_i[p] && local_acc;
    always_comb begin
      x_lreq[p]          = '0;
      x_lreq[p].row      = addr_row(pe_req_i[p].addr);
      x_lreq[p].bank     = addr_bank(pe_req_i[p].addr);
      x_lreq[p].we       = pe_req_i[p].we;
      x_lreq[p].be[3:0]  = pe_req_i[p].be;
      x_lreq[p].wdata[31:0] = pe_req_i[p].wdata;
      a_req[p]           = '0;
      a_req[p].addr      = pe_req_i[p].addr;
      a_req[p].we        = pe_req_i[p].we;
      a_req[p].be[3:0]   = pe_req_i[p].be;
      a_req[p].wdata[31:0] = pe_req_i[p].wdata;
      a_req[p].src_tile  = tile_id_i;
      a_req[p].src_port  = PORT_W'(p);
    end
    assign a_valid[p]        = pe_req_valid_i[p] && !local_acc;
    assign pe_req_ready_o[p] = local_acc ? x_gnt[p] : a_ready[p];
    always_ff @(posedge clk_i) if (x_gnt[p]) pe_we_q[p] <= pe_req_i[p].we;
    // a local bank response has priority over a remote one
    assign r_block[p]        = x_rvalid[p];
    assign pe_rsp_valid_o[p] = x_rvalid[p] || r_valid[p];
    assign pe_rsp_o[p].rdata = x_rvalid[p] ? x_rdata[p][31:0] : r_rsp[p].rdata[31:0];
    assign pe_rsp_o[p].we    = x_rvalid[p] ? pe_we_q[p] : r_rsp[p].we;
  end
  assign r_block[M_TE] = 1'b0;

  // ---------------------------------------------------------------- tensor engine
  if (HAS_TE) begin : g_te
    logic  t_valid, t_ready, t_local;
    wreq_t t_req;
    logic  g_ready;
    logic  lrsp_valid;
    wrsp_t lrsp;
    logic  [TAG_W-1:0] tag_q;
    logic  we_q;

    tp_redmule i_redmule (
      .clk_i, .rst_ni, .tile_id_i,
      .cfg_i(te_cfg_i), .cfg_rdata_o(te_cfg_rdata_o), .irq_o(te_irq_o), .busy_o(te_busy_o),
      .mac_cycles_o(te_mac_cycles_o), .stall_cycles_o(te_stall_cycles_o),
      .req_valid_o(t_valid), .req_ready_i(t_ready), .req_o(t_req),
      .lrsp_valid_i(lrsp_valid), .lrsp_i(lrsp),
      .rrsp_valid_i(r_valid[M_TE]), .rrsp_i(r_rsp[M_TE])
    );

    assign t_local     = addr_tile(t_req.addr) == tile_id_i;
    assign x_req[M_TE] = t_valid && t_local;
    always_comb begin
      x_lreq[M_TE]       = '0;
      x_lreq[M_TE].row   = addr_row(t_req.addr);
      x_lreq[M_TE].bank  = addr_bank(t_req.addr);
      x_lreq[M_TE].len   = 4'(LINE_WORDS - 1);
      x_lreq[M_TE].we    = t_req.we;
      x_lreq[M_TE].be    = '1;
      x_lreq[M_TE].wdata = t_req.wdata;
    end

    tp_burst_grouper i_grouper (
      .clk_i, .rst_ni, .tile_id_i,
      .in_valid_i(t_valid && !t_local), .in_ready_o(g_ready), .in_req_i(t_req),
      .out_valid_o(a_valid[M_TE]), .out_ready_i(a_ready[M_TE]), .out_req_o(a_req[M_TE])
    );
    assign t_ready = t_local ? x_gnt[M_TE] : g_ready;

    always_ff @(posedge clk_i) if (x_gnt[M_TE]) begin
      tag_q <= t_req.tag;
      we_q  <= t_req.we;
    end
    assign lrsp_valid = x_rvalid[M_TE];
    assign lrsp.rdata = x_rdata[M_TE];
    assign lrsp.tag   = tag_q;
    assign lrsp.we    = we_q;
  end else begin : g_no_te
    assign x_req[M_TE]       = 1'b0;
    assign x_lreq[M_TE]      = '0;
    assign a_valid[M_TE]     = 1'b0;
    assign a_req[M_TE]       = '0;
    assign te_cfg_rdata_o    = '0;
    assign te_irq_o          = 1'b0;
    assign te_busy_o         = 1'b0;
    assign te_mac_cycles_o   = '0;
    assign te_stall_cycles_o = '0;
  end

  // ---------------------------------------------------------------- inbound ports
  for (genvar p = 0; p < NUM_REMOTE; p++) begin : g_in
    tp_burst_distributor i_dist (
      .clk_i, .rst_ni,
      .in_valid_i(in_req_valid_i[p]), .in_ready_o(in_req_ready_o[p]), .in_req_i(in_req_i[p]),
      .rsp_valid_o(in_rsp_valid_o[p]), .rsp_ready_i(in_rsp_ready_i[p]), .rsp_o(in_rsp_o[p]),
      .x_req_o(x_req[M_IN + p]), .x_lreq_o(x_lreq[M_IN + p]), .x_gnt_i(x_gnt[M_IN + p]),
      .x_rsp_valid_i(x_rvalid[M_IN + p]), .x_rsp_rdata_i(x_rdata[M_IN + p])
    );
  end
endmodule
