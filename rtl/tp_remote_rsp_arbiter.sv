// Remote response arbiter of a Tile.
//
// Responses to this Tile's requests come back on the seven outbound ports.
// Each is routed by its `src_port` field to a PE (0..3) or to the TE (4).
// A destination takes one response per cycle, chosen round-robin among the
// ports; a PE that receives a local bank response in the same cycle takes
// none (`block_i`), since a PE has a single response port. The TE takes one
// K-word beat per cycle. Round-robin and the local-first rule are this
// design's choices.
module tp_remote_rsp_arbiter
  import tp_pkg::*;
#(
  parameter int unsigned ND = PES_PER_TILE + 1,
  parameter int unsigned NP = NUM_REMOTE
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic [NP-1:0]  in_valid_i,
  output logic [NP-1:0]  in_ready_o,
  input  rrsp_t          in_rsp_i [NP],
  input  logic [ND-1:0]  block_i,
  output logic [ND-1:0]  out_valid_o,
  output rrsp_t          out_rsp_o [ND]
);
  localparam int unsigned PW = $clog2(NP);
  logic [PW-1:0] rr_q [ND];
  logic [PW-1:0] win  [ND];

  always_comb begin
    in_ready_o = '0;
    for (int d = 0; d < ND; d++) begin
      out_valid_o[d] = 1'b0;
      win[d]         = '0;
      for (int o = 0; o < NP; o++) begin
        int p;
        p = (int'(rr_q[d]) + o) % NP;
        if (!out_valid_o[d] && !block_i[d] && in_valid_i[p] && int'(in_rsp_i[p].src_port) == d) begin
          out_valid_o[d] = 1'b1;
          win[d]         = PW'(p);
        end
      end
      out_rsp_o[d] = in_rsp_i[win[d]];
      if (out_valid_o[d]) in_ready_o[win[d]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int d = 0; d < ND; d++) rr_q[d] <= '0;
    end else begin
      for (int d = 0; d < ND; d++)
        if (out_valid_o[d]) rr_q[d] <= (win[d] == PW'(NP - 1)) ? '0 : win[d] + 1'b1;
    end
  end
endmodule
