// Latency-tolerant streamer of the tensor engine.
//
// It turns a GEMM job (Z = Y + X * W, row-major FP16 matrices in L1) into
// 512-bit line requests on the TE's single wide memory port and feeds the
// engine with X, W and Y lines in order, however out of order the memory
// answers. Following the paper: each load stream has a 16-entry reorder
// buffer, an outstanding-transactions table assembles lines from 32-bit bank
// responses, a 32-entry FIFO decouples the Z stream from the Y/Z buffer, and
// a load/store multiplexer puts one request per cycle on the port.
//
// Tile order. Output tiles are 32 x 32. Tiles are visited row block by row
// block; inside a row block the column block starts at `w_start` and wraps
// around (the paper's interleaved W access with loop-back, which lets
// parallel TEs start on different W columns).
//
// Streams, per tile (mt, pt) (lines are 32 FP16 elements = 64 bytes):
//   X: for each 32-wide k chunk, rows mt*32 .. mt*32+31
//   W: rows k = 0 .. N-1, columns pt*32 .. pt*32+31
//   Y: rows mt*32 .. +31, columns pt*32 .. +31   (Z: same, at z_addr)
// Matrices must be 64-byte aligned, with N and K multiples of 32 and M a
// multiple of 32.
//
// Memory port: valid/ready wide request; responses arrive either as a whole
// line from the own Tile (`lrsp`) or as K-word beats from other Tiles
// (`rrsp`). Stores are acknowledged (one acknowledge for a local line, 16/J
// for a line written to another Tile); `done_o` pulses once the engine has
// finished and every Z line is written and acknowledged. The round-robin
// arbitration among the four streams is this design's choice.
module tp_te_streamer
  import tp_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [TILE_SEL_W-1:0] tile_id_i,
  // job
  input  logic                  start_i,
  input  logic [ADDR_W-1:0]     x_addr_i, w_addr_i, y_addr_i, z_addr_i,
  input  logic [15:0]           m_i, n_i, k_i,
  input  logic [15:0]           w_start_i,   // first column block
  output logic                  done_o,
  output logic [31:0]           mac_cycles_o,
  output logic [31:0]           stall_cycles_o,
  // memory port
  output logic                  req_valid_o,
  input  logic                  req_ready_i,
  output wreq_t                 req_o,
  input  logic                  lrsp_valid_i,
  input  wrsp_t                 lrsp_i,
  input  logic                  rrsp_valid_i,
  input  rrsp_t                 rrsp_i
);
  // ---------------------------------------------------------------- job registers
  logic              active_q;
  logic [ADDR_W-1:0] xa_q, wa_q, ya_q, za_q;
  logic [15:0]       m_q, n_q, k_q, ws_q;
  logic [15:0]       mt_num, kt_num;     // row / column block counts
  logic [15:0]       n_tiles;
  assign mt_num  = m_q >> 5;
  assign kt_num  = k_q >> 5;
  assign n_tiles = 16'(mt_num * kt_num);

  // ---------------------------------------------------------------- tile iterators
  typedef struct packed {
    logic [15:0] t;      // tiles done by this stream
    logic [15:0] mt, pt; // current tile
    logic [15:0] kc;     // chunk (X) or k (W) inside the tile
    logic [15:0] i;      // row inside chunk / tile
  } it_t;

  it_t xi_q, wi_q, yi_q, zi_q;

  function automatic it_t next_tile(input it_t s, input logic [15:0] kt, input logic [15:0] ws);
    it_t r;
    r = s;
    r.t  = s.t + 1'b1;
    r.kc = '0;
    r.i  = '0;
    r.pt = (s.pt + 1'b1 == kt) ? '0 : s.pt + 1'b1;
    if (r.pt == ws) r.mt = s.mt + 1'b1;   // loop-back reached the start column
    return r;
  endfunction

  function automatic it_t first_tile(input logic [15:0] ws);
    it_t r;
    r = '0;
    r.pt = ws;
    return r;
  endfunction

  // element offsets -> byte addresses
  function automatic logic [ADDR_W-1:0] elem_addr(input logic [ADDR_W-1:0] base,
                                                  input logic [31:0] row, input logic [31:0] ld,
                                                  input logic [31:0] col);
    return base + ADDR_W'((row * ld + col) * 2);
  endfunction

  logic [ADDR_W-1:0] x_next, w_next, y_next, z_next;
  assign x_next = elem_addr(xa_q, 32'(xi_q.mt) * 32 + 32'(xi_q.i), 32'(n_q), 32'(xi_q.kc) * 32);
  assign w_next = elem_addr(wa_q, 32'(wi_q.kc), 32'(k_q), 32'(wi_q.pt) * 32);
  assign y_next = elem_addr(ya_q, 32'(yi_q.mt) * 32 + 32'(yi_q.i), 32'(k_q), 32'(yi_q.pt) * 32);
  assign z_next = elem_addr(za_q, 32'(zi_q.mt) * 32 + 32'(zi_q.i), 32'(k_q), 32'(zi_q.pt) * 32);

  // ---------------------------------------------------------------- ROBs, table, Z FIFO
  localparam int unsigned S_X = 0, S_W = 1, S_Y = 2, S_Z = 3;

  logic [2:0]  rob_full, rob_alloc, rob_valid, rob_ready, rob_c0, rob_c1, rob_empty;
  logic [3:0]  rob_idx [3];
  logic [LINE_W-1:0] rob_data [3];

  logic              tt_alloc, tt_avail;
  logic [TAG_W-1:0]  tt_tag;
  logic              c0_v, c1_v;
  logic [1:0]        c0_s, c1_s;
  logic [3:0]        c0_r, c1_r;
  logic [LINE_W-1:0] c0_d, c1_d;

  tp_te_trans_table i_table (
    .clk_i, .rst_ni,
    .alloc_i       (tt_alloc),
    .alloc_stream_i(sel_q_stream()),
    .alloc_rob_i   (rob_idx[sel_q_stream()]),
    .avail_o       (tt_avail),
    .alloc_tag_o   (tt_tag),
    .lrsp_valid_i  (lrsp_valid_i && !lrsp_i.we),
    .lrsp_tag_i    (lrsp_i.tag),
    .lrsp_data_i   (lrsp_i.rdata),
    .rrsp_valid_i  (rrsp_valid_i && !rrsp_i.we),
    .rrsp_tag_i    (rrsp_i.tag),
    .rrsp_offs_i   (rrsp_i.offs),
    .rrsp_data_i   (rrsp_i.rdata),
    .c0_valid_o(c0_v), .c0_stream_o(c0_s), .c0_rob_o(c0_r), .c0_data_o(c0_d),
    .c1_valid_o(c1_v), .c1_stream_o(c1_s), .c1_rob_o(c1_r), .c1_data_o(c1_d),
    .in_flight_o()
  );

  for (genvar s = 0; s < 3; s++) begin : g_rob
    assign rob_c0[s] = c0_v && (c0_s == 2'(s));
    assign rob_c1[s] = c1_v && (c1_s == 2'(s));
    tp_te_rob i_rob (
      .clk_i, .rst_ni,
      .alloc_i    (rob_alloc[s]),
      .alloc_idx_o(rob_idx[s]),
      .full_o     (rob_full[s]),
      .c0_valid_i (rob_c0[s]), .c0_idx_i(c0_r), .c0_data_i(c0_d),
      .c1_valid_i (rob_c1[s]), .c1_idx_i(c1_r), .c1_data_i(c1_d),
      .valid_o    (rob_valid[s]),
      .ready_i    (rob_ready[s]),
      .data_o     (rob_data[s]),
      .empty_o    (rob_empty[s])
    );
  end

  logic              zf_push, zf_pop, zf_full, zf_empty;
  logic [LINE_W-1:0] zf_in, zf_out;
  logic              eng_done;

  tp_fifo #(.WIDTH(LINE_W), .DEPTH(ZFIFO_DEPTH)) i_zfifo (
    .clk_i, .rst_ni,
    .push_i(zf_push), .data_i(zf_in), .pop_i(zf_pop), .data_o(zf_out),
    .full_o(zf_full), .empty_o(zf_empty), .count_o()
  );

  // the engine samples its tile count with start, before the job registers load
  logic [15:0] n_tiles_start;
  assign n_tiles_start = (m_i >> 5) * (k_i >> 5);

  tp_te_engine i_engine (
    .clk_i, .rst_ni,
    .start_i       (start_i && !active_q),
    .n_steps_i     (n_i),
    .n_tiles_i     (n_tiles_start),
    .busy_o        (),
    .done_o        (eng_done),
    .mac_cycles_o  (mac_cycles_o),
    .stall_cycles_o(stall_cycles_o),
    .x_valid_i(rob_valid[S_X]), .x_ready_o(rob_ready[S_X]), .x_line_i(rob_data[S_X]),
    .w_valid_i(rob_valid[S_W]), .w_ready_o(rob_ready[S_W]), .w_line_i(rob_data[S_W]),
    .y_valid_i(rob_valid[S_Y]), .y_ready_o(rob_ready[S_Y]), .y_line_i(rob_data[S_Y]),
    .z_valid_o(zf_push),        .z_ready_i(!zf_full),       .z_line_o(zf_in)
  );

  // ---------------------------------------------------------------- load/store multiplexer
  logic [3:0] want;
  logic [1:0] rr_q, sel;
  logic       any;
  logic       x_more, w_more, y_more, z_more;
  assign x_more = active_q && (xi_q.t != n_tiles);
  assign w_more = active_q && (wi_q.t != n_tiles);
  assign y_more = active_q && (yi_q.t != n_tiles);
  assign z_more = active_q && (zi_q.t != n_tiles);
  assign want[S_X] = x_more && !rob_full[S_X] && tt_avail;
  assign want[S_W] = w_more && !rob_full[S_W] && tt_avail;
  assign want[S_Y] = y_more && !rob_full[S_Y] && tt_avail;
  assign want[S_Z] = z_more && !zf_empty;

  always_comb begin
    any = 1'b0;
    sel = rr_q;
    for (int o = 0; o < 4; o++) begin
      logic [1:0] s;
      s = rr_q + 2'(o);
      if (!any && want[s]) begin
        any = 1'b1;
        sel = s;
      end
    end
  end

  function automatic logic [1:0] sel_q_stream();
    return (sel == 2'(S_Z)) ? 2'(S_X) : sel;
  endfunction

  always_comb begin
    req_o = '0;
    unique case (sel)
      2'(S_X): req_o.addr = x_next;
      2'(S_W): req_o.addr = w_next;
      2'(S_Y): req_o.addr = y_next;
      default: req_o.addr = z_next;
    endcase
    req_o.we    = (sel == 2'(S_Z));
    req_o.wdata = zf_out;
    req_o.tag   = tt_tag;
  end

  logic fire;
  assign req_valid_o = any;
  assign fire        = any && req_ready_i;
  assign tt_alloc    = fire && (sel != 2'(S_Z));
  assign zf_pop      = fire && (sel == 2'(S_Z));
  for (genvar s = 0; s < 3; s++) begin : g_alloc
    assign rob_alloc[s] = fire && (sel == 2'(s));
  end

  // ---------------------------------------------------------------- store acknowledges
  logic [15:0] acks_pending_q;
  logic [15:0] ack_in;
  logic        z_local;
  assign z_local = (addr_tile(z_next) == tile_id_i);
  assign ack_in  = 16'(lrsp_valid_i && lrsp_i.we) + 16'(rrsp_valid_i && rrsp_i.we);

  logic eng_done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q       <= 1'b0;
      rr_q           <= '0;
      xi_q           <= '0;
      wi_q           <= '0;
      yi_q           <= '0;
      zi_q           <= '0;
      acks_pending_q <= '0;
      eng_done_q     <= 1'b0;
      done_o         <= 1'b0;
      {xa_q, wa_q, ya_q, za_q} <= '0;
      {m_q, n_q, k_q, ws_q}    <= '0;
    end else begin
      done_o <= 1'b0;
      if (start_i && !active_q) begin
        active_q <= 1'b1;
        xa_q <= x_addr_i; wa_q <= w_addr_i; ya_q <= y_addr_i; za_q <= z_addr_i;
        m_q  <= m_i; n_q <= n_i; k_q <= k_i; ws_q <= w_start_i;
        xi_q <= first_tile(w_start_i);
        wi_q <= first_tile(w_start_i);
        yi_q <= first_tile(w_start_i);
        zi_q <= first_tile(w_start_i);
        eng_done_q <= 1'b0;
      end
      if (eng_done) eng_done_q <= 1'b1;
      if (fire) begin
        rr_q <= sel + 1'b1;
        unique case (sel)
          2'(S_X): begin
            if (xi_q.i == 16'd31) begin
              xi_q.i  <= '0;
              xi_q.kc <= xi_q.kc + 1'b1;
              if (xi_q.kc + 1'b1 == (n_q >> 5)) xi_q <= next_tile(xi_q, kt_num, ws_q);
            end else xi_q.i <= xi_q.i + 1'b1;
          end
          2'(S_W): begin
            if (wi_q.kc + 1'b1 == n_q) wi_q <= next_tile(wi_q, kt_num, ws_q);
            else wi_q.kc <= wi_q.kc + 1'b1;
          end
          2'(S_Y): begin
            if (yi_q.i == 16'd31) yi_q <= next_tile(yi_q, kt_num, ws_q);
            else yi_q.i <= yi_q.i + 1'b1;
          end
          default: begin
            if (zi_q.i == 16'd31) zi_q <= next_tile(zi_q, kt_num, ws_q);
            else zi_q.i <= zi_q.i + 1'b1;
          end
        endcase
      end
      acks_pending_q <= acks_pending_q
                      + ((fire && sel == 2'(S_Z)) ? (z_local ? 16'd1 : 16'(LINE_WORDS / J_GRP)) : 16'd0)
                      - ack_in;
      if (active_q && (eng_done_q || eng_done) && !z_more && acks_pending_q == '0 && ack_in == '0
          && !(fire && sel == 2'(S_Z))) begin
        active_q <= 1'b0;
        done_o   <= 1'b1;
      end
    end
  end
endmodule
