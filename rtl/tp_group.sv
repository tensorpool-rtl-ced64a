// TensorPool Group: four SubGroups and, for every SubGroup s and distance
// d = 1..3, a 4x4 crossbar from the Tiles of SubGroup s to the Tiles of
// SubGroup (s + d) mod 4 (the "4x4 XBAR to SGd" blocks of the paper's
// Fig. 2b). Tile ports 4..6, towards the other Groups, leave the Group
// through two further spill registers on the request path and two on the
// response path, which brings the load latency to another Group to the
// paper's 9 cycles. Exported port arrays are indexed
// [(subgroup * 4 + tile) * 3 + (port - 4)]; the PE port arrays
// [(subgroup * 4 + tile) * 4 + pe].
module tp_group
  import tp_pkg::*;
#(
  parameter int unsigned NS  = SG_PER_GROUP,
  parameter int unsigned NTG = SG_PER_GROUP * TILES_PER_SG,
  parameter int unsigned NP  = NTG * PES_PER_TILE,
  parameter int unsigned NX  = NTG * 3
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [1:0]            group_id_i,
  input  logic [NP-1:0]         pe_req_valid_i,
  output logic [NP-1:0]         pe_req_ready_o,
  input  pe_req_t               pe_req_i [NP],
  output logic [NP-1:0]         pe_rsp_valid_o,
  output pe_rsp_t               pe_rsp_o [NP],
  input  cfg_req_t              te_cfg_i [NS],
  output logic [31:0]           te_cfg_rdata_o [NS],
  output logic [NS-1:0]         te_irq_o,
  output logic [NS-1:0]         te_busy_o,
  output logic [31:0]           te_mac_cycles_o [NS],
  output logic [31:0]           te_stall_cycles_o [NS],
  output logic [NX-1:0]         out_req_valid_o,
  input  logic [NX-1:0]         out_req_ready_i,
  output rreq_t                 out_req_o [NX],
  input  logic [NX-1:0]         out_rsp_valid_i,
  output logic [NX-1:0]         out_rsp_ready_o,
  input  rrsp_t                 out_rsp_i [NX],
  input  logic [NX-1:0]         in_req_valid_i,
  output logic [NX-1:0]         in_req_ready_o,
  input  rreq_t                 in_req_i [NX],
  output logic [NX-1:0]         in_rsp_valid_o,
  input  logic [NX-1:0]         in_rsp_ready_i,
  output rrsp_t                 in_rsp_o [NX]
);
  localparam int unsigned NT  = TILES_PER_SG;
  localparam int unsigned NSX = NT * (NUM_REMOTE - 1);   // 24 per SubGroup
  localparam int unsigned PPS = NT * PES_PER_TILE;

  logic [NSX-1:0] o_qv [NS], o_qr [NS], o_pv [NS], o_pr [NS];
  rreq_t          o_q  [NS][NSX];
  rrsp_t          o_p  [NS][NSX];
  logic [NSX-1:0] i_qv [NS], i_qr [NS], i_pv [NS], i_pr [NS];
  rreq_t          i_q  [NS][NSX];
  rrsp_t          i_p  [NS][NSX];

  for (genvar s = 0; s < NS; s++) begin : g_sg
    pe_req_t pq [PPS];
    pe_rsp_t pp [PPS];
    for (genvar k = 0; k < PPS; k++) begin : g_pe
      assign pq[k] = pe_req_i[s*PPS + k];
      assign pe_rsp_o[s*PPS + k] = pp[k];
    end
    tp_subgroup i_sg (
      .clk_i, .rst_ni, .sg_id_i({group_id_i, 2'(s)}),
      .pe_req_valid_i(pe_req_valid_i[s*PPS +: PPS]),
      .pe_req_ready_o(pe_req_ready_o[s*PPS +: PPS]),
      .pe_req_i(pq),
      .pe_rsp_valid_o(pe_rsp_valid_o[s*PPS +: PPS]),
      .pe_rsp_o(pp),
      .te_cfg_i(te_cfg_i[s]), .te_cfg_rdata_o(te_cfg_rdata_o[s]), .te_irq_o(te_irq_o[s]),
      .te_busy_o(te_busy_o[s]), .te_mac_cycles_o(te_mac_cycles_o[s]),
      .te_stall_cycles_o(te_stall_cycles_o[s]),
      .out_req_valid_o(o_qv[s]), .out_req_ready_i(o_qr[s]), .out_req_o(o_q[s]),
      .out_rsp_valid_i(o_pv[s]), .out_rsp_ready_o(o_pr[s]), .out_rsp_i(o_p[s]),
      .in_req_valid_i(i_qv[s]), .in_req_ready_o(i_qr[s]), .in_req_i(i_q[s]),
      .in_rsp_valid_o(i_pv[s]), .in_rsp_ready_i(i_pr[s]), .in_rsp_o(i_p[s])
    );
  end

  // ---------------------------------------------------------------- SubGroup-to-SubGroup crossbars
  for (genvar s = 0; s < NS; s++) begin : g_src
    for (genvar d = 1; d < 4; d++) begin : g_dist
      localparam int unsigned TS = (s + d) % NS;   // target SubGroup
      logic [NT-1:0] a_qv, a_qr, a_pv, a_pr, b_qv, b_qr, b_pv, b_pr;
      rreq_t a_q [NT], b_q [NT];
      rrsp_t a_p [NT], b_p [NT];
      for (genvar t = 0; t < NT; t++) begin : g_t
        localparam int unsigned X = t * (NUM_REMOTE - 1) + (d - 1);
        assign a_qv[t]     = o_qv[s][X];
        assign o_qr[s][X]  = a_qr[t];
        assign a_q[t]      = o_q[s][X];
        assign o_pv[s][X]  = a_pv[t];
        assign a_pr[t]     = o_pr[s][X];
        assign o_p[s][X]   = a_p[t];
        assign i_qv[TS][X] = b_qv[t];
        assign b_qr[t]     = i_qr[TS][X];
        assign i_q[TS][X]  = b_q[t];
        assign b_pv[t]     = i_pv[TS][X];
        assign i_pr[TS][X] = b_pr[t];
        assign b_p[t]      = i_p[TS][X];
      end
      tp_xbar #(.NI(NT), .NO(NT)) i_xbar (
        .clk_i, .rst_ni,
        .req_valid_i(a_qv), .req_ready_o(a_qr), .req_i(a_q),
        .rsp_valid_o(a_pv), .rsp_ready_i(a_pr), .rsp_o(a_p),
        .req_valid_o(b_qv), .req_ready_i(b_qr), .req_o(b_q),
        .rsp_valid_i(b_pv), .rsp_ready_o(b_pr), .rsp_i(b_p)
      );
    end
  end

  // ---------------------------------------------------------------- ports 4..6: Group boundary
  for (genvar s = 0; s < NS; s++) begin : g_bnd
    for (genvar t = 0; t < NT; t++) begin : g_t
      for (genvar e = 0; e < 3; e++) begin : g_e
        localparam int unsigned XS = t * (NUM_REMOTE - 1) + 3 + e;   // port 4 + e
        localparam int unsigned XG = (s * NT + t) * 3 + e;
        logic              q1v, q1r, p1v, p1r;
        logic [RREQ_W-1:0] q1, q2;
        logic [RRSP_W-1:0] p1, p2;
        tp_spill_reg #(.WIDTH(RREQ_W)) i_req_a (
          .clk_i, .rst_ni,
          .valid_i(o_qv[s][XS]), .ready_o(o_qr[s][XS]), .data_i(o_q[s][XS]),
          .valid_o(q1v), .ready_i(q1r), .data_o(q1));
        tp_spill_reg #(.WIDTH(RREQ_W)) i_req_b (
          .clk_i, .rst_ni,
          .valid_i(q1v), .ready_o(q1r), .data_i(q1),
          .valid_o(out_req_valid_o[XG]), .ready_i(out_req_ready_i[XG]), .data_o(q2));
        assign out_req_o[XG] = rreq_t'(q2);
        tp_spill_reg #(.WIDTH(RRSP_W)) i_rsp_a (
          .clk_i, .rst_ni,
          .valid_i(out_rsp_valid_i[XG]), .ready_o(out_rsp_ready_o[XG]), .data_i(out_rsp_i[XG]),
          .valid_o(p1v), .ready_i(p1r), .data_o(p1));
        tp_spill_reg #(.WIDTH(RRSP_W)) i_rsp_b (
          .clk_i, .rst_ni,
          .valid_i(p1v), .ready_o(p1r), .data_i(p1),
          .valid_o(o_pv[s][XS]), .ready_i(o_pr[s][XS]), .data_o(p2));
        assign o_p[s][XS] = rrsp_t'(p2);
        assign i_qv[s][XS]        = in_req_valid_i[XG];
        assign in_req_ready_o[XG] = i_qr[s][XS];
        assign i_q[s][XS]         = in_req_i[XG];
        assign in_rsp_valid_o[XG] = i_pv[s][XS];
        assign i_pr[s][XS]        = in_rsp_ready_i[XG];
        assign in_rsp_o[XG]       = i_p[s][XS];
      end
    end
  end
endmodule
