// Request/response crossbar between groups of Tiles.
//
// NI initiator ports and NO target ports, one request network and one
// response network, each with valid/ready handshakes and round-robin
// arbitration per output. A request goes to the target Tile given by the
// low bits of the Tile field of its address (bits [log2(NO)-1:0] of the Tile
// index); a response goes back to the initiator given by the same bits of
// its `src_tile`. The paper uses 4x4 crossbars inside and between the
// SubGroups of a Group and 16x16 crossbars between Groups; both are
// instances of this module. The crossbar itself is combinational; the spill
// registers at the hierarchy boundaries sit around it.
module tp_xbar
  import tp_pkg::*;
#(
  parameter int unsigned NI = 4,
  parameter int unsigned NO = 4
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  // initiator side
  input  logic [NI-1:0]  req_valid_i,
  output logic [NI-1:0]  req_ready_o,
  input  rreq_t          req_i [NI],
  output logic [NI-1:0]  rsp_valid_o,
  input  logic [NI-1:0]  rsp_ready_i,
  output rrsp_t          rsp_o [NI],
  // target side
  output logic [NO-1:0]  req_valid_o,
  input  logic [NO-1:0]  req_ready_i,
  output rreq_t          req_o [NO],
  input  logic [NO-1:0]  rsp_valid_i,
  output logic [NO-1:0]  rsp_ready_o,
  input  rrsp_t          rsp_i [NO]
);
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1;
  localparam int unsigned OW = (NO > 1) ? $clog2(NO) : 1;

  logic [IW-1:0] q_rr [NO], q_win [NO];
  logic [OW-1:0] p_rr [NI], p_win [NI];

  // requests
  always_comb begin
    req_ready_o = '0;
    for (int o = 0; o < NO; o++) begin
      req_valid_o[o] = 1'b0;
      q_win[o]       = '0;
      for (int k = 0; k < NI; k++) begin
        int i;
        i = (int'(q_rr[o]) + k) % NI;
        if (!req_valid_o[o] && req_valid_i[i] &&
            int'(addr_tile(req_i[i].addr)) % NO == o) begin
          req_valid_o[o] = 1'b1;
          q_win[o]       = IW'(i);
        end
      end
      req_o[o] = req_i[q_win[o]];
      if (req_valid_o[o] && req_ready_i[o]) req_ready_o[q_win[o]] = 1'b1;
    end
  end

  // responses
  always_comb begin
    rsp_ready_o = '0;
    for (int i = 0; i < NI; i++) begin
      rsp_valid_o[i] = 1'b0;
      p_win[i]       = '0;
      for (int k = 0; k < NO; k++) begin
        int o;
        o = (int'(p_rr[i]) + k) % NO;
        if (!rsp_valid_o[i] && rsp_valid_i[o] && int'(rsp_i[o].src_tile) % NI == i) begin
          rsp_valid_o[i] = 1'b1;
          p_win[i]       = OW'(o);
        end
      end
      rsp_o[i] = rsp_i[p_win[i]];
      if (rsp_valid_o[i] && rsp_ready_i[i]) rsp_ready_o[p_win[i]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int o = 0; o < NO; o++) q_rr[o] <= '0;
      for (int i = 0; i < NI; i++) p_rr[i] <= '0;
    end else begin
      for (int o = 0; o < NO; o++)
        if (req_valid_o[o] && req_ready_i[o]) q_rr[o] <= (q_win[o] == IW'(NI - 1)) ? '0 : q_win[o] + 1'b1;
      for (int i = 0; i < NI; i++)
        if (rsp_valid_o[i] && rsp_ready_i[i]) p_rr[i] <= (p_win[i] == OW'(NO - 1)) ? '0 : p_win[i] + 1'b1;
    end
  end
endmodule
