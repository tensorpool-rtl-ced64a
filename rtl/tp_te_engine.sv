// Tensor engine datapath (RedMulE-style): an R x C array of FP16 FMAs with
// the X buffer, the W buffer and the shared Y/Z buffer. It computes
// Z = Y + X * W one output tile at a time; a tile is R rows by C*(P+1)
// columns (32 x 32 with the paper's R = 32, C = 8, P = 3).
//
// Schedule. Every FMA has P pipeline stages plus one feedback register, so
// each FMA runs P+1 = 4 independent accumulations interleaved in time. In the
// four cycles of one k-step, phase f = 0..3, FMA(i, c) computes
//     acc(i, 4c+f) += X[i][k] * W[k][4c+f]
// so the X element of a row is held stationary for four cycles while four
// different W columns pass, and one 512-bit W line (row k of W, 32 elements)
// is consumed every four cycles, as the paper states. At k = 0 the addend is
// the Y element instead of the feedback value; after the last k the result
// leaves the pipeline into the Y/Z buffer at the position Y came from.
//
// Buffers (organisation chosen here; the paper names the buffers but does not
// size them):
//   X buffer:  two sets of R lines; line i holds X[i][k0 .. k0+31]. A set is
//              filled from the X stream, used for 32 k-steps, then released.
//   W buffer:  a 4-line FIFO of W rows.
//   Y/Z:       two sets of R lines. A set is filled with Y, computed on,
//              overwritten with Z, then drained line by line to the Z FIFO;
//              meanwhile the other set is loaded with the next tile's Y.
//
// Stalls: at the start of a k-step inside a tile, if the X set or a W line
// is missing, the whole array (all pipelines and the feedback) is frozen. At
// a tile boundary the array keeps running with bubbles so that the previous
// tile drains. Throughput is R*C = 256 MACs per cycle while not stalled.
//
// Interface: three line inputs (valid/ready), one Z line output
// (valid/ready), a start pulse with the number of k-steps (N, a multiple of
// 32) and the number of tiles. `done_o` pulses after the last Z line left.
// `mac_cycles_o` counts cycles in which the array issued real work.
module tp_te_engine
  import tp_pkg::*;
#(
  parameter int unsigned R = TE_R,
  parameter int unsigned C = TE_C,
  parameter int unsigned P = TE_P
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // job
  input  logic              start_i,
  input  logic [15:0]       n_steps_i,   // inner dimension N, multiple of 32
  input  logic [15:0]       n_tiles_i,   // number of output tiles
  output logic              busy_o,
  output logic              done_o,
  output logic [31:0]       mac_cycles_o,
  output logic [31:0]       stall_cycles_o,
  // X lines
  input  logic              x_valid_i,
  output logic              x_ready_o,
  input  logic [LINE_W-1:0] x_line_i,
  // W lines
  input  logic              w_valid_i,
  output logic              w_ready_o,
  input  logic [LINE_W-1:0] w_line_i,
  // Y lines
  input  logic              y_valid_i,
  output logic              y_ready_o,
  input  logic [LINE_W-1:0] y_line_i,
  // Z lines
  output logic              z_valid_o,
  input  logic              z_ready_i,
  output logic [LINE_W-1:0] z_line_o
);
  localparam int unsigned PH   = P + 1;        // phases per k-step
  localparam int unsigned TN   = C * PH;       // tile columns
  localparam int unsigned XW   = 32;           // X elements per line
  localparam int unsigned RI_W = $clog2(R);

  // ---------------------------------------------------------------- storage
  logic [15:0] xbuf  [2][R][XW];
  logic [15:0] yzbuf [2][R][TN];
  logic [1:0]  xfull_q;
  logic        xfill_set_q, xuse_set_q;
  logic [RI_W-1:0] xfill_idx_q;

  typedef enum logic [1:0] {YZ_EMPTY, YZ_YREADY, YZ_COMPUTE, YZ_ZREADY} yz_state_e;
  yz_state_e   yz_state_q [2];
  logic        yfill_set_q, comp_set_q, zdrain_set_q;
  logic [RI_W-1:0] yfill_idx_q, zdrain_idx_q;

  // W FIFO
  logic              wf_pop, wf_empty, wf_full;
  logic [LINE_W-1:0] wf_head;

  tp_fifo #(.WIDTH(LINE_W), .DEPTH(4)) i_wbuf (
    .clk_i, .rst_ni,
    .push_i (w_valid_i && !wf_full),
    .data_i (w_line_i),
    .pop_i  (wf_pop),
    .data_o (wf_head),
    .full_o (wf_full),
    .empty_o(wf_empty),
    .count_o()
  );
  assign w_ready_o = !wf_full;

  // ---------------------------------------------------------------- sequencing
  logic        active_q;
  logic [15:0] n_steps_q, n_tiles_q;
  logic [15:0] k_q;                 // k-step inside the tile
  logic [1:0]  ph_q;                // phase inside the k-step
  logic [15:0] tiles_issued_q, tiles_drained_q;

  logic tile_left, step_ok, issue, en;
  assign tile_left = active_q && (tiles_issued_q != n_tiles_q);
  assign step_ok   = xfull_q[xuse_set_q] && !wf_empty &&
                     ((k_q != '0) || (yz_state_q[comp_set_q] == YZ_YREADY));
  // mid-step phases never wait: their operands were already present
  assign issue = tile_left && ((ph_q != '0) || step_ok);
  // freeze only inside a tile; at tile boundaries keep draining with bubbles
  assign en    = issue || (ph_q == '0 && k_q == '0);
  assign wf_pop = issue && (ph_q == 2'(P));

  typedef struct packed {
    logic       valid;
    logic       last;
    logic [1:0] ph;
    logic       set;
  } meta_t;
  meta_t m_q [P];   // meta of pipeline stage 1..P

  // ---------------------------------------------------------------- FMA array
  logic [15:0] fma_z  [R][C];
  logic [15:0] fb_q   [R][C];

  for (genvar i = 0; i < R; i++) begin : g_row
    logic [15:0] xa;
    assign xa = xbuf[xuse_set_q][i][k_q[4:0]];
    for (genvar c = 0; c < C; c++) begin : g_col
      logic [15:0] wb, cin;
      logic [$clog2(TN)-1:0] col;
      assign col = ($clog2(TN))'(c * PH) + ($clog2(TN))'(ph_q);
      assign wb  = wf_head[16*col +: 16];
      assign cin = (k_q == '0) ? yzbuf[comp_set_q][i][col] : fb_q[i][c];
      tp_fma_fp16 i_fma (
        .clk_i,
        .en_i (en),
        .a_i  (issue ? xa : 16'h0),
        .b_i  (issue ? wb : 16'h0),
        .c_i  (issue ? cin : 16'h0),
        .z_o  (fma_z[i][c])
      );
      always_ff @(posedge clk_i) if (en) fb_q[i][c] <= fma_z[i][c];
    end
  end

  // result write-back: the last k-step of a tile, leaving stage P
  logic wb_now;
  assign wb_now = en && m_q[P-1].valid && m_q[P-1].last;

  // ---------------------------------------------------------------- state update
  logic x_take, y_take, z_take;
  assign x_ready_o = active_q && !xfull_q[xfill_set_q];
  assign y_ready_o = active_q && (yz_state_q[yfill_set_q] == YZ_EMPTY);
  assign x_take    = x_valid_i && x_ready_o;
  assign y_take    = y_valid_i && y_ready_o;
  assign z_valid_o = active_q && (yz_state_q[zdrain_set_q] == YZ_ZREADY);
  assign z_take    = z_valid_o && z_ready_i;

  for (genvar e = 0; e < TN; e++) begin : g_zline
    assign z_line_o[16*e +: 16] = yzbuf[zdrain_set_q][zdrain_idx_q][e];
  end

  assign busy_o = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q        <= 1'b0;
      n_steps_q       <= '0;
      n_tiles_q       <= '0;
      k_q             <= '0;
      ph_q            <= '0;
      tiles_issued_q  <= '0;
      tiles_drained_q <= '0;
      xfull_q         <= '0;
      xfill_set_q     <= 1'b0;
      xuse_set_q      <= 1'b0;
      xfill_idx_q     <= '0;
      yz_state_q[0]   <= YZ_EMPTY;
      yz_state_q[1]   <= YZ_EMPTY;
      yfill_set_q     <= 1'b0;
      comp_set_q      <= 1'b0;
      zdrain_set_q    <= 1'b0;
      yfill_idx_q     <= '0;
      zdrain_idx_q    <= '0;
      done_o          <= 1'b0;
      mac_cycles_o    <= '0;
      stall_cycles_o  <= '0;
      for (int s = 0; s < P; s++) m_q[s] <= '0;
    end else begin
      done_o <= 1'b0;
      if (start_i && !active_q) begin
        active_q        <= 1'b1;
        n_steps_q       <= n_steps_i;
        n_tiles_q       <= n_tiles_i;
        k_q             <= '0;
        ph_q            <= '0;
        tiles_issued_q  <= '0;
        tiles_drained_q <= '0;
        mac_cycles_o    <= '0;
        stall_cycles_o  <= '0;
      end
      // X buffer fill
      if (x_take) begin
        xfill_idx_q <= xfill_idx_q + 1'b1;
        if (xfill_idx_q == RI_W'(R - 1)) begin
          xfull_q[xfill_set_q] <= 1'b1;
          xfill_set_q <= ~xfill_set_q;
        end
      end
      // Y fill
      if (y_take) begin
        yfill_idx_q <= yfill_idx_q + 1'b1;
        if (yfill_idx_q == RI_W'(R - 1)) begin
          yz_state_q[yfill_set_q] <= YZ_YREADY;
          yfill_set_q <= ~yfill_set_q;
        end
      end
      // pipeline meta
      if (en) begin
        m_q[0] <= '{valid: issue, last: (k_q == n_steps_q - 1'b1), ph: ph_q, set: comp_set_q};
        for (int s = 1; s < P; s++) m_q[s] <= m_q[s-1];
      end
      if (tile_left && !issue && ph_q == '0) stall_cycles_o <= stall_cycles_o + 1'b1;
      // step / tile sequencing
      if (issue) begin
        mac_cycles_o <= mac_cycles_o + 1'b1;
        if (k_q == '0 && ph_q == '0) yz_state_q[comp_set_q] <= YZ_COMPUTE;
        ph_q <= ph_q + 1'b1;
        if (ph_q == 2'(P)) begin
          if (k_q[4:0] == 5'd31 || k_q == n_steps_q - 1'b1) begin
            xfull_q[xuse_set_q] <= 1'b0;
            xuse_set_q <= ~xuse_set_q;
          end
          if (k_q == n_steps_q - 1'b1) begin
            k_q            <= '0;
            comp_set_q     <= ~comp_set_q;
            tiles_issued_q <= tiles_issued_q + 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
      end
      // write-back of the final phase completes the Z tile
      if (wb_now && m_q[P-1].ph == 2'(P)) yz_state_q[m_q[P-1].set] <= YZ_ZREADY;
      // Z drain
      if (z_take) begin
        zdrain_idx_q <= zdrain_idx_q + 1'b1;
        if (zdrain_idx_q == RI_W'(R - 1)) begin
          yz_state_q[zdrain_set_q] <= YZ_EMPTY;
          zdrain_set_q    <= ~zdrain_set_q;
          tiles_drained_q <= tiles_drained_q + 1'b1;
          if (tiles_drained_q + 1'b1 == n_tiles_q) begin
            active_q <= 1'b0;
            done_o   <= 1'b1;
          end
        end
      end
    end
  end

  // buffer data (no reset needed: every entry is written before it is read)
  always_ff @(posedge clk_i) begin
    if (x_take)
      for (int e = 0; e < XW; e++) xbuf[xfill_set_q][xfill_idx_q][e] <= x_line_i[16*e +: 16];
    if (y_take)
      for (int e = 0; e < TN; e++) yzbuf[yfill_set_q][yfill_idx_q][e] <= y_line_i[16*e +: 16];
    if (wb_now)
      for (int i = 0; i < R; i++)
        for (int c = 0; c < C; c++)
          yzbuf[m_q[P-1].set][i][c*PH + int'(m_q[P-1].ph)] <= fma_z[i][c];
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) start_i |-> n_steps_i[4:0] == '0)
    else $error("N must be a multiple of 32");
endmodule
