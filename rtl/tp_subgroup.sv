// TensorPool SubGroup: four Tiles, the first of which holds a tensor engine,
// joined by a 4x4 crossbar for accesses between Tiles of the same SubGroup.
//
// Outbound ports 1..6 of every Tile (towards the other SubGroups of the
// Group and towards the other Groups) leave the SubGroup through a spill
// register on the request path and one on the response path; inbound ports
// 1..6 enter unregistered (the initiator side already holds the registers).
// With the Tile boundary register and the distributor's response register
// this gives a load latency of 3 cycles inside the SubGroup and 5 inside the
// Group, the paper's numbers. Exported port arrays are indexed
// [tile * 6 + (port - 1)]. Which Tile carries the TE is this design's
// choice (the paper: "a Tile per SubGroup contains a TE").
module tp_subgroup
  import tp_pkg::*;
#(
  parameter int unsigned NT = TILES_PER_SG,
  parameter int unsigned NX = TILES_PER_SG * (NUM_REMOTE - 1)
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic [TILE_SEL_W-3:0]     sg_id_i,       // {group, subgroup}
  // core ports, index tile * 4 + pe
  input  logic [NT*PES_PER_TILE-1:0] pe_req_valid_i,
  output logic [NT*PES_PER_TILE-1:0] pe_req_ready_o,
  input  pe_req_t                   pe_req_i [NT*PES_PER_TILE],
  output logic [NT*PES_PER_TILE-1:0] pe_rsp_valid_o,
  output pe_rsp_t                   pe_rsp_o [NT*PES_PER_TILE],
  // tensor engine
  input  cfg_req_t                  te_cfg_i,
  output logic [31:0]               te_cfg_rdata_o,
  output logic                      te_irq_o,
  output logic                      te_busy_o,
  output logic [31:0]               te_mac_cycles_o,
  output logic [31:0]               te_stall_cycles_o,
  // outbound ports 1..6 of the Tiles
  output logic [NX-1:0]             out_req_valid_o,
  input  logic [NX-1:0]             out_req_ready_i,
  output rreq_t                     out_req_o [NX],
  input  logic [NX-1:0]             out_rsp_valid_i,
  output logic [NX-1:0]             out_rsp_ready_o,
  input  rrsp_t                     out_rsp_i [NX],
  // inbound ports 1..6 of the Tiles
  input  logic [NX-1:0]             in_req_valid_i,
  output logic [NX-1:0]             in_req_ready_o,
  input  rreq_t                     in_req_i [NX],
  output logic [NX-1:0]             in_rsp_valid_o,
  input  logic [NX-1:0]             in_rsp_ready_i,
  output rrsp_t                     in_rsp_o [NX]
);
  localparam int unsigned NR = NUM_REMOTE;

  // per-Tile port bundles
  logic [NR-1:0] o_qv [NT], o_qr [NT], o_pv [NT], o_pr [NT];
  rreq_t         o_q  [NT][NR];
  rrsp_t         o_p  [NT][NR];
  logic [NR-1:0] i_qv [NT], i_qr [NT], i_pv [NT], i_pr [NT];
  rreq_t         i_q  [NT][NR];
  rrsp_t         i_p  [NT][NR];

  for (genvar t = 0; t < NT; t++) begin : g_tile
    pe_req_t pq [PES_PER_TILE];
    pe_rsp_t pp [PES_PER_TILE];
    cfg_req_t cfg;
    for (genvar p = 0; p < PES_PER_TILE; p++) begin : g_pe
      assign pq[p] = pe_req_i[t*PES_PER_TILE + p];
      assign pe_rsp_o[t*PES_PER_TILE + p] = pp[p];
    end
    assign cfg = (t == 0) ? te_cfg_i : '0;
    if (t == 0) begin : g_te
      tp_tile #(.HAS_TE(1'b1)) i_tile (
        .clk_i, .rst_ni, .tile_id_i({sg_id_i, 2'(t)}),
        .pe_req_valid_i(pe_req_valid_i[t*PES_PER_TILE +: PES_PER_TILE]),
        .pe_req_ready_o(pe_req_ready_o[t*PES_PER_TILE +: PES_PER_TILE]),
        .pe_req_i(pq),
        .pe_rsp_valid_o(pe_rsp_valid_o[t*PES_PER_TILE +: PES_PER_TILE]),
        .pe_rsp_o(pp),
        .te_cfg_i(cfg), .te_cfg_rdata_o(te_cfg_rdata_o), .te_irq_o(te_irq_o),
        .te_busy_o(te_busy_o), .te_mac_cycles_o(te_mac_cycles_o),
        .te_stall_cycles_o(te_stall_cycles_o),
        .out_req_valid_o(o_qv[t]), .out_req_ready_i(o_qr[t]), .out_req_o(o_q[t]),
        .out_rsp_valid_i(o_pv[t]), .out_rsp_ready_o(o_pr[t]), .out_rsp_i(o_p[t]),
        .in_req_valid_i(i_qv[t]), .in_req_ready_o(i_qr[t]), .in_req_i(i_q[t]),
        .in_rsp_valid_o(i_pv[t]), .in_rsp_ready_i(i_pr[t]), .in_rsp_o(i_p[t])
      );
    end else begin : g_pe_only
      tp_tile #(.HAS_TE(1'b0)) i_tile (
        .clk_i, .rst_ni, .tile_id_i({sg_id_i, 2'(t)}),
        .pe_req_valid_i(pe_req_valid_i[t*PES_PER_TILE +: PES_PER_TILE]),
        .pe_req_ready_o(pe_req_ready_o[t*PES_PER_TILE +: PES_PER_TILE]),
        .pe_req_i(pq),
        .pe_rsp_valid_o(pe_rsp_valid_o[t*PES_PER_TILE +: PES_PER_TILE]),
        .pe_rsp_o(pp),
        .te_cfg_i(cfg), .te_cfg_rdata_o(), .te_irq_o(),
        .te_busy_o(), .te_mac_cycles_o(), .te_stall_cycles_o(),
        .out_req_valid_o(o_qv[t]), .out_req_ready_i(o_qr[t]), .out_req_o(o_q[t]),
        .out_rsp_valid_i(o_pv[t]), .out_rsp_ready_o(o_pr[t]), .out_rsp_i(o_p[t]),
        .in_req_valid_i(i_qv[t]), .in_req_ready_o(i_qr[t]), .in_req_i(i_q[t]),
        .in_rsp_valid_o(i_pv[t]), .in_rsp_ready_i(i_pr[t]), .in_rsp_o(i_p[t])
      );
    end
  end

  // ---------------------------------------------------------------- port 0: 4x4 crossbar inside the SubGroup
  logic [NT-1:0] x_qv, x_qr, x_pv, x_pr, y_qv, y_qr, y_pv, y_pr;
  rreq_t x_q [NT], y_q [NT];
  rrsp_t x_p [NT], y_p [NT];
  for (genvar t = 0; t < NT; t++) begin : g_x0
    assign x_qv[t]    = o_qv[t][0];
    assign o_qr[t][0] = x_qr[t];
    assign x_q[t]     = o_q[t][0];
    assign o_pv[t][0] = x_pv[t];
    assign x_pr[t]    = o_pr[t][0];
    assign o_p[t][0]  = x_p[t];
    assign i_qv[t][0] = y_qv[t];
    assign y_qr[t]    = i_qr[t][0];
    assign i_q[t][0]  = y_q[t];
    assign y_pv[t]    = i_pv[t][0];
    assign i_pr[t][0] = y_pr[t];
    assign y_p[t]     = i_p[t][0];
  end

  tp_xbar #(.NI(NT), .NO(NT)) i_xbar_local (
    .clk_i, .rst_ni,
    .req_valid_i(x_qv), .req_ready_o(x_qr), .req_i(x_q),
    .rsp_valid_o(x_pv), .rsp_ready_i(x_pr), .rsp_o(x_p),
    .req_valid_o(y_qv), .req_ready_i(y_qr), .req_o(y_q),
    .rsp_valid_i(y_pv), .rsp_ready_o(y_pr), .rsp_i(y_p)
  );

  // ---------------------------------------------------------------- ports 1..6: SubGroup boundary
  for (genvar t = 0; t < NT; t++) begin : g_bnd
    for (genvar p = 1; p < NR; p++) begin : g_port
      localparam int unsigned X = t * (NR - 1) + (p - 1);
      logic [RREQ_W-1:0] qd;
      logic [RRSP_W-1:0] pd;
      tp_spill_reg #(.WIDTH(RREQ_W)) i_req_spill (
        .clk_i, .rst_ni,
        .valid_i(o_qv[t][p]), .ready_o(o_qr[t][p]), .data_i(o_q[t][p]),
        .valid_o(out_req_valid_o[X]), .ready_i(out_req_ready_i[X]), .data_o(qd)
      );
      assign out_req_o[X] = rreq_t'(qd);
      tp_spill_reg #(.WIDTH(RRSP_W)) i_rsp_spill (
        .clk_i, .rst_ni,
        .valid_i(out_rsp_valid_i[X]), .ready_o(out_rsp_ready_o[X]), .data_i(out_rsp_i[X]),
        .valid_o(o_pv[t][p]), .ready_i(o_pr[t][p]), .data_o(pd)
      );
      assign o_p[t][p] = rrsp_t'(pd);
      // inbound
      assign i_qv[t][p]        = in_req_valid_i[X];
      assign in_req_ready_o[X] = i_qr[t][p];
      assign i_q[t][p]         = in_req_i[X];
      assign in_rsp_valid_o[X] = i_pv[t][p];
      assign i_pr[t][p]        = in_rsp_ready_i[X];
      assign in_rsp_o[X]       = i_p[t][p];
    end
  end
endmodule
