// Burst-Grouper of the initiator Tile (request side).
//
// The TE's 512-bit requests that leave the Tile pass through here. A read
// becomes a single burst request that carries only the address of the first
// word and a length of 16 words, so it takes one slot of the remote arbiter
// instead of sixteen (paper, Fig. 4). A write is cut into 16/J requests of
// J = 2 words each, the paper's widened write data field. Responses need no
// regrouping here: the distributor already returns K words per beat with
// their offset, and the TE's transactions table assembles the line.
//
// Interface: wide valid/ready in, remote valid/ready out; the wide request
// is acknowledged when its last beat leaves.
module tp_burst_grouper
  import tp_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [TILE_SEL_W-1:0] tile_id_i,
  input  logic                  in_valid_i,
  output logic                  in_ready_o,
  input  wreq_t                 in_req_i,
  output logic                  out_valid_o,
  input  logic                  out_ready_i,
  output rreq_t                 out_req_o
);
  localparam int unsigned NBEAT = LINE_WORDS / J_GRP;
  logic [$clog2(NBEAT)-1:0] beat_q;
  logic last;

  assign last = !in_req_i.we || (beat_q == ($clog2(NBEAT))'(NBEAT - 1));

  always_comb begin
    out_req_o          = '0;
    out_req_o.we       = in_req_i.we;
    out_req_o.src_tile = tile_id_i;
    out_req_o.src_port = PORT_W'(TE_PORT);
    out_req_o.tag      = in_req_i.tag;
    if (in_req_i.we) begin
      out_req_o.addr  = in_req_i.addr + ADDR_W'(int'(beat_q) * J_GRP * 4);
      out_req_o.len   = 4'(J_GRP - 1);
      out_req_o.be    = '1;
      out_req_o.wdata = in_req_i.wdata[int'(beat_q) * J_GRP * 32 +: J_GRP * 32];
    end else begin
      out_req_o.addr  = in_req_i.addr;
      out_req_o.len   = 4'(LINE_WORDS - 1);
    end
  end

  assign out_valid_o = in_valid_i;
  assign in_ready_o  = out_ready_i && last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) beat_q <= '0;
    else if (in_valid_i && out_ready_i && in_req_i.we) beat_q <= last ? '0 : beat_q + 1'b1;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) in_valid_i |-> in_req_i.addr[5:0] == '0)
    else $error("wide request not line aligned");
endmodule
