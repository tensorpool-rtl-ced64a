// Burst-Distributor of one inbound remote port of a Tile.
//
// Requests from other Tiles arrive here through the SubGroup/Group
// crossbars. A read burst carries only the address of the first word of a
// 512-bit line (the paper's burst support); the distributor issues it to the
// 16 banks in one go through the local crossbar. A grouped write carries J
// words, a narrow access one. The read data is registered and sent back K
// words per valid/ready handshake (K = 4: four beats for a line), each beat
// tagged with the word offset inside the line; a write answers with one
// acknowledge beat.
//
// Timing: grant in cycle 0, bank access, data registered at the end of
// cycle 1, first beat offered in cycle 2. A new request is taken during the
// last beat of the previous one. The register on the response path is this
// design's choice; it also sets the 3-cycle SubGroup latency of the paper.
module tp_burst_distributor
  import tp_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // from the network
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  rreq_t             in_req_i,
  output logic              rsp_valid_o,
  input  logic              rsp_ready_i,
  output rrsp_t             rsp_o,
  // to the local crossbar
  output logic              x_req_o,
  output lreq_t             x_lreq_o,
  input  logic              x_gnt_i,
  input  logic              x_rsp_valid_i,
  input  logic [LINE_W-1:0] x_rsp_rdata_i
);
  typedef enum logic [1:0] {IDLE, WAIT, SEND} state_e;
  state_e            state_q;
  rreq_t             req_q;
  logic [LINE_W-1:0] buf_q;
  logic [3:0]        beat_q;      // word offset of the current beat
  logic              last_beat, can_take;

  assign last_beat = req_q.we || (32'(beat_q) + K_GRP > 32'(req_q.len));
  assign can_take  = (state_q == IDLE) || (state_q == SEND && last_beat && rsp_ready_i);

  // request towards the banks
  always_comb begin
    x_lreq_o       = '0;
    x_lreq_o.row   = addr_row(in_req_i.addr);
    x_lreq_o.bank  = addr_bank(in_req_i.addr);
    x_lreq_o.len   = in_req_i.len;
    x_lreq_o.we    = in_req_i.we;
    x_lreq_o.be[J_GRP*4-1:0]     = in_req_i.be;
    x_lreq_o.wdata[J_GRP*32-1:0] = in_req_i.wdata;
  end
  assign x_req_o    = in_valid_i && can_take;
  assign in_ready_o = can_take && x_gnt_i;

  // response beats
  always_comb begin
    rsp_o          = '0;
    rsp_o.rdata    = buf_q[32*beat_q +: K_GRP*32];
    rsp_o.offs     = beat_q;
    rsp_o.we       = req_q.we;
    rsp_o.src_tile = req_q.src_tile;
    rsp_o.src_port = req_q.src_port;
    rsp_o.tag      = req_q.tag;
  end
  assign rsp_valid_o = (state_q == SEND);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      beat_q  <= '0;
      req_q   <= '0;
    end else begin
      unique case (state_q)
        IDLE: ;
        WAIT: if (x_rsp_valid_i) state_q <= SEND;
        SEND: if (rsp_ready_i) begin
          if (last_beat) state_q <= IDLE;
          else           beat_q  <= beat_q + 4'(K_GRP);
        end
        default: state_q <= IDLE;
      endcase
      if (in_valid_i && in_ready_o) begin
        state_q <= WAIT;
        req_q   <= in_req_i;
        beat_q  <= '0;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == WAIT && x_rsp_valid_i) buf_q <= x_rsp_rdata_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) state_q == WAIT |-> x_rsp_valid_i)
    else $error("bank response missing");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   rsp_valid_o && !rsp_ready_i |=> rsp_valid_o && $stable(rsp_o))
    else $error("response beat changed while stalled");
endmodule
