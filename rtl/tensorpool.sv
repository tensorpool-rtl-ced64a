// TensorPool cluster top: 4 Groups x 4 SubGroups x 4 Tiles = 64 Tiles,
// 256 core memory ports, 16 tensor engines (one per SubGroup) and 4 MiB of
// shared L1 in 2048 banks, every bank reachable from every core and engine.
//
// For every Group g and distance e = 1..3 a 16x16 crossbar links the Tiles
// of Group g to the Tiles of Group (g + e) mod 4 (the "16x16 XBAR to other
// Group" of the paper's Fig. 2b). Load latency seen by a core: 1 cycle in
// its own Tile, 3 in its SubGroup, 5 in its Group, 9 in another Group.
//
// The RISC-V cores, their instruction caches and FPUs, the DMA engine, the
// AXI L2 interconnect and L2 are not part of this RTL. The cores' L1 ports
// and the engines' configuration ports are top-level ports, indexed
// core = ((group * 4 + subgroup) * 4 + tile) * 4 + pe and
// engine = group * 4 + subgroup; a core request needs valid and ready high
// in the same cycle, and its response (read data or write acknowledge)
// arrives later as a one-cycle valid pulse.
//
// Lint notes. Verilator reports circular combinational logic (UNOPTFLAT)
// through the ready/valid vectors of the crossbars, the local crossbars and
// the Burst-Distributors. It is not a real loop: every path between Tiles
// passes a spill register whose valid and ready outputs are flops; the
// report comes from whole vectors being treated as one signal. Reset is used
// asynchronously by the flops and synchronously only in the assertions'
// "disable iff" terms, which is what SYNCASYNCNET points at.
module tensorpool
  import tp_pkg::*;
#(
  parameter int unsigned NG  = NUM_GROUPS,
  parameter int unsigned NP  = NUM_TILES * PES_PER_TILE,
  parameter int unsigned NTE = NUM_GROUPS * SG_PER_GROUP
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [NP-1:0]   pe_req_valid_i,
  output logic [NP-1:0]   pe_req_ready_o,
  input  pe_req_t         pe_req_i [NP],
  output logic [NP-1:0]   pe_rsp_valid_o,
  output pe_rsp_t         pe_rsp_o [NP],
  input  cfg_req_t        te_cfg_i [NTE],
  output logic [31:0]     te_cfg_rdata_o [NTE],
  output logic [NTE-1:0]  te_irq_o,
  output logic [NTE-1:0]  te_busy_o,
  output logic [31:0]     te_mac_cycles_o [NTE],
  output logic [31:0]     te_stall_cycles_o [NTE]
);
  localparam int unsigned PPG = NP / NG;     // 64 cores per Group
  localparam int unsigned TPG = NTE / NG;    // 4 engines per Group
  localparam int unsigned NX  = 48;          // 16 Tiles x 3 ports

  logic [NX-1:0] o_qv [NG], o_qr [NG], o_pv [NG], o_pr [NG];
  rreq_t         o_q  [NG][NX];
  rrsp_t         o_p  [NG][NX];
  logic [NX-1:0] i_qv [NG], i_qr [NG], i_pv [NG], i_pr [NG];
  rreq_t         i_q  [NG][NX];
  rrsp_t         i_p  [NG][NX];

  for (genvar g = 0; g < NG; g++) begin : g_grp
    pe_req_t  pq [PPG];
    pe_rsp_t  pp [PPG];
    cfg_req_t cq [TPG];
    logic [31:0] crd [TPG], mac [TPG], stl [TPG];
    for (genvar k = 0; k < PPG; k++) begin : g_pe
      assign pq[k] = pe_req_i[g*PPG + k];
      assign pe_rsp_o[g*PPG + k] = pp[k];
    end
    for (genvar k = 0; k < TPG; k++) begin : g_te
      assign cq[k] = te_cfg_i[g*TPG + k];
      assign te_cfg_rdata_o[g*TPG + k]    = crd[k];
      assign te_mac_cycles_o[g*TPG + k]   = mac[k];
      assign te_stall_cycles_o[g*TPG + k] = stl[k];
    end
    tp_group i_group (
      .clk_i, .rst_ni, .group_id_i(2'(g)),
      .pe_req_valid_i(pe_req_valid_i[g*PPG +: PPG]),
      .pe_req_ready_o(pe_req_ready_o[g*PPG +: PPG]),
      .pe_req_i(pq),
      .pe_rsp_valid_o(pe_rsp_valid_o[g*PPG +: PPG]),
      .pe_rsp_o(pp),
      .te_cfg_i(cq), .te_cfg_rdata_o(crd),
      .te_irq_o(te_irq_o[g*TPG +: TPG]), .te_busy_o(te_busy_o[g*TPG +: TPG]),
      .te_mac_cycles_o(mac), .te_stall_cycles_o(stl),
      .out_req_valid_o(o_qv[g]), .out_req_ready_i(o_qr[g]), .out_req_o(o_q[g]),
      .out_rsp_valid_i(o_pv[g]), .out_rsp_ready_o(o_pr[g]), .out_rsp_i(o_p[g]),
      .in_req_valid_i(i_qv[g]), .in_req_ready_o(i_qr[g]), .in_req_i(i_q[g]),
      .in_rsp_valid_o(i_pv[g]), .in_rsp_ready_i(i_pr[g]), .in_rsp_o(i_p[g])
    );
  end

  // ---------------------------------------------------------------- Group-to-Group crossbars
  for (genvar g = 0; g < NG; g++) begin : g_src
    for (genvar e = 1; e < 4; e++) begin : g_dist
      localparam int unsigned TG = (g + e) % NG;
      logic [15:0] a_qv, a_qr, a_pv, a_pr, b_qv, b_qr, b_pv, b_pr;
      rreq_t a_q [16], b_q [16];
      rrsp_t a_p [16], b_p [16];
      for (genvar t = 0; t < 16; t++) begin : g_t
        localparam int unsigned X = t * 3 + (e - 1);
        assign a_qv[t]     = o_qv[g][X];
        assign o_qr[g][X]  = a_qr[t];
        assign a_q[t]      = o_q[g][X];
        assign o_pv[g][X]  = a_pv[t];
        assign a_pr[t]     = o_pr[g][X];
        assign o_p[g][X]   = a_p[t];
        assign i_qv[TG][X] = b_qv[t];
        assign b_qr[t]     = i_qr[TG][X];
        assign i_q[TG][X]  = b_q[t];
        assign b_pv[t]     = i_pv[TG][X];
        assign i_pr[TG][X] = b_pr[t];
        assign b_p[t]      = i_p[TG][X];
      end
      tp_xbar #(.NI(16), .NO(16)) i_xbar (
        .clk_i, .rst_ni,
        .req_valid_i(a_qv), .req_ready_o(a_qr), .req_i(a_q),
        .rsp_valid_o(a_pv), .rsp_ready_i(a_pr), .rsp_o(a_p),
        .req_valid_o(b_qv), .req_ready_i(b_qr), .req_o(b_q),
        .rsp_valid_i(b_pv), .rsp_ready_o(b_pr), .rsp_i(b_p)
      );
    end
  end
endmodule
