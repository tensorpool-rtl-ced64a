// Remote request arbiter of a Tile.
//
// The Tile's requests that target other Tiles (one per PE port and the
// Burst-Grouper of the TE) are steered to one of seven outbound ports: ports
// 0..3 reach the four SubGroups of the own Group (relative index), ports
// 4..6 the three other Groups. Each port grants one requester per cycle,
// round-robin, so up to seven requests retire per cycle as in the paper.
// The port of a request is computed from its target Tile (tp_pkg::
// remote_port). Requests must not be for the own Tile.
module tp_remote_req_arbiter
  import tp_pkg::*;
#(
  parameter int unsigned NS = PES_PER_TILE + 1,
  parameter int unsigned NP = NUM_REMOTE
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [TILE_SEL_W-1:0] tile_id_i,
  input  logic [NS-1:0]         in_valid_i,
  output logic [NS-1:0]         in_ready_o,
  input  rreq_t                 in_req_i [NS],
  output logic [NP-1:0]         out_valid_o,
  input  logic [NP-1:0]         out_ready_i,
  output rreq_t                 out_req_o [NP]
);
  localparam int unsigned SW = $clog2(NS);
  logic [2:0]    port [NS];
  logic [SW-1:0] rr_q [NP];
  logic [SW-1:0] win  [NP];

  always_comb
    for (int s = 0; s < NS; s++) port[s] = remote_port(tile_id_i, addr_tile(in_req_i[s].addr));

  always_comb begin
    in_ready_o = '0;
    for (int p = 0; p < NP; p++) begin
      out_valid_o[p] = 1'b0;
      win[p]         = '0;
      for (int o = 0; o < NS; o++) begin
        int s;
        s = (int'(rr_q[p]) + o) % NS;
        if (!out_valid_o[p] && in_valid_i[s] && port[s] == 3'(p)) begin
          out_valid_o[p] = 1'b1;
          win[p]         = SW'(s);
        end
      end
      out_req_o[p] = in_req_i[win[p]];
      if (out_valid_o[p] && out_ready_i[p]) in_ready_o[win[p]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int p = 0; p < NP; p++) rr_q[p] <= '0;
    end else begin
      for (int p = 0; p < NP; p++)
        if (out_valid_o[p] && out_ready_i[p])
          rr_q[p] <= (win[p] == SW'(NS - 1)) ? '0 : win[p] + 1'b1;
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     in_valid_i[s] |-> addr_tile(in_req_i[s].addr) != tile_id_i)
      else $error("local request on the remote path");
  end
endmodule
