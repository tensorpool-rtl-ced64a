// End-to-end test of the full TensorPool cluster at its default size
// (64 Tiles, 256 core ports, 16 tensor engines, 4 MiB L1).
//
// 1. Load latency from core 0 (Tile 0) to its own Tile, another Tile of its
//    SubGroup, another SubGroup and another Group: 1, 3, 5 and 9 cycles.
// 2. Cores fill X, W and Y for two GEMM jobs through their own ports; the
//    matrices are spread over many Tiles by the address interleaving.
// 3. Two engines (Group 0 / SubGroup 0 and Group 1 / SubGroup 2) are
//    programmed through their register ports and run concurrently, the
//    first with an interleaved W start block (loop-back), and must raise
//    their interrupts.
// 4. Z is read back through core ports and compared with an integer model
//    (small integer operands keep all FP16 sums exact).
// Mechanisms counted (each must occur): local TE line accesses, read bursts
// through the Burst-Grouper, grouped (J) write beats, K-word response beats,
// out-of-order line completions in a ROB, engine stalls, local crossbar bank
// conflicts, and the interrupt.
module tb_tensorpool;
  import tp_pkg::*;
  localparam int NP = 256, NTE = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic [NP-1:0]  pe_req_valid, pe_req_ready, pe_rsp_valid;
  pe_req_t        pe_req [NP];
  pe_rsp_t        pe_rsp [NP];
  cfg_req_t       te_cfg [NTE];
  logic [31:0]    te_rdata [NTE], te_mac [NTE], te_stall [NTE];
  logic [NTE-1:0] te_irq, te_busy;

  tensorpool dut (
    .clk_i(clk), .rst_ni(rst_n),
    .pe_req_valid_i(pe_req_valid), .pe_req_ready_o(pe_req_ready), .pe_req_i(pe_req),
    .pe_rsp_valid_o(pe_rsp_valid), .pe_rsp_o(pe_rsp),
    .te_cfg_i(te_cfg), .te_cfg_rdata_o(te_rdata), .te_irq_o(te_irq), .te_busy_o(te_busy),
    .te_mac_cycles_o(te_mac), .te_stall_cycles_o(te_stall));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- mechanism counters
  int n_local_te, n_burst, n_wgroup, n_kbeat, n_reorder, n_conflict, n_irq;
  `define TE0 dut.g_grp[0].i_group.g_sg[0].i_sg.g_tile[0].g_te.i_tile
  always @(posedge clk) if (rst_n) begin
    if (`TE0.x_gnt[4]) n_local_te++;
    if (`TE0.g_te.i_grouper.out_valid_o && `TE0.g_te.i_grouper.out_ready_i) begin
      if (`TE0.g_te.i_grouper.out_req_o.we) n_wgroup++;
      else n_burst++;
    end
    if (`TE0.r_valid[4] && !`TE0.r_rsp[4].we) n_kbeat++;
    if (`TE0.g_te.i_redmule.i_streamer.c1_v &&
        `TE0.g_te.i_redmule.i_streamer.c1_s == 2'd1 &&
        `TE0.g_te.i_redmule.i_streamer.g_rob[1].i_rob.head_q !=
        `TE0.g_te.i_redmule.i_streamer.c1_r) n_reorder++;
    if ((`TE0.x_req & ~`TE0.x_gnt) != '0) n_conflict++;
    n_irq += $countones(te_irq);
  end

  // ---------------------------------------------------------------- core port helpers
  task automatic pe_access(input int p, input logic [ADDR_W-1:0] a, input logic we,
                           input logic [31:0] wd, output logic [31:0] rd, output int lat);
    // latency = clock edges from the accepting edge to the edge that samples the response
    pe_req[p] = '{addr: a, we: we, be: 4'hf, wdata: wd};
    pe_req_valid[p] = 1'b1;
    do @(posedge clk); while (!pe_req_ready[p]);
    #1 pe_req_valid[p] = 1'b0;
    lat = 1;
    while (!pe_rsp_valid[p]) begin @(posedge clk); #1; lat++; end
    rd = pe_rsp[p].rdata;
    @(posedge clk); #1;
  endtask

  function automatic int core_of_addr(input logic [ADDR_W-1:0] a);
    return int'(addr_tile(a)) * 4;   // first core of the Tile that owns the address
  endfunction

  function automatic logic [15:0] i2h(input int v);
    int m, e;
    if (v == 0) return 16'h0;
    m = v < 0 ? -v : v;
    e = 0;
    while (m >= 2048) begin m = m / 2; e++; end
    while (m < 1024) begin m = m * 2; e--; end
    return {v < 0, 5'(e + 25), 10'(m - 1024)};
  endfunction

  // write a row-major int matrix as FP16 pairs, each word through the owner Tile's core
  task automatic write_mat(input logic [ADDR_W-1:0] base, input int rows, input int cols,
                           ref int mat [64][64]);
    logic [31:0] rd;
    int lat;
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c += 2) begin
        logic [ADDR_W-1:0] a;
        a = base + ADDR_W'((r * cols + c) * 2);
        pe_access(core_of_addr(a), a, 1'b1, {i2h(mat[r][c+1]), i2h(mat[r][c])}, rd, lat);
      end
  endtask

  task automatic cfg_write(input int te, input cfg_reg_e r, input logic [31:0] v);
    te_cfg[te] = '{valid: 1'b1, we: 1'b1, addr: r, wdata: v};
    @(posedge clk); #1;
    te_cfg[te] = '0;
  endtask

  // ---------------------------------------------------------------- jobs
  int X0 [64][64], W0 [64][64], Y0 [64][64];
  int X1 [64][64], W1 [64][64], Y1 [64][64];

  task automatic check_z(input int te_id, input logic [ADDR_W-1:0] zb, input int M, input int N,
                         input int K, ref int X [64][64], ref int W [64][64], ref int Y [64][64]);
    logic [31:0] rd;
    int lat, s;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < K; c++) begin
        logic [ADDR_W-1:0] a;
        a = zb + ADDR_W'((r * K + c) * 2);
        if (c % 2 == 0) pe_access(core_of_addr(a), a, 1'b0, 32'h0, rd, lat);
        s = Y[r][c];
        for (int k = 0; k < N; k++) s += X[r][k] * W[k][c];
        checks++;
        if ((c % 2 == 0 ? rd[15:0] : rd[31:16]) !== i2h(s)) begin
          failures++;
          if (failures < 10) $display("FAIL TE%0d Z[%0d][%0d] got %h exp %h", te_id, r, c,
                                      c % 2 == 0 ? rd[15:0] : rd[31:16], i2h(s));
        end
      end
  endtask

  // cores 1..3 of Tile 0 keep reading their own Tile while the engines run,
  // competing with the engine and the inbound ports for the same banks
  bit hammer_on = 0;
  task automatic hammer(input int p);
    logic [31:0] rd;
    int lat;
    while (hammer_on)
      pe_access(p, ADDR_W'(($urandom % 4) << 13 | ($urandom % 32) << 2), 1'b0, 32'h0, rd, lat);
  endtask

  initial begin
    logic [31:0] rd;
    int lat;
    longint t_start, t_end;
    static int exp_lat [4] = '{1, 3, 5, 9};
    static int tgt_tile [4] = '{0, 1, 4, 16};
    pe_req_valid = '0;
    for (int p = 0; p < NP; p++) pe_req[p] = '0;
    for (int t = 0; t < NTE; t++) te_cfg[t] = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // 1. latency and data integrity through each level of the hierarchy
    for (int i = 0; i < 4; i++) begin
      logic [ADDR_W-1:0] a;
      a = ADDR_W'((100 << 13) | (tgt_tile[i] << 7) | (i << 2));
      pe_access(0, a, 1'b1, 32'hcafe0000 + 32'(i), rd, lat);
      pe_access(0, a, 1'b0, 32'h0, rd, lat);
      checks++;
      if (rd !== 32'hcafe0000 + 32'(i)) begin failures++; $display("FAIL data via level %0d", i); end
      checks++;
      if (lat != exp_lat[i]) begin failures++; $display("FAIL latency to tile %0d: %0d, expected %0d", tgt_tile[i], lat, exp_lat[i]); end
      $display("load latency core 0 -> tile %0d: %0d cycles", tgt_tile[i], lat);
    end

    // 2. operands (job 0: 32 x 64 x 64 on TE 0, job 1: 32 x 32 x 32 on TE 6)
    for (int r = 0; r < 64; r++) for (int c = 0; c < 64; c++) begin
      X0[r][c] = int'($urandom % 7) - 3; W0[r][c] = int'($urandom % 7) - 3; Y0[r][c] = int'($urandom % 21) - 10;
      X1[r][c] = int'($urandom % 7) - 3; W1[r][c] = int'($urandom % 7) - 3; Y1[r][c] = int'($urandom % 21) - 10;
    end
    write_mat(22'h000000, 32, 64, X0);
    write_mat(22'h010000, 64, 64, W0);
    write_mat(22'h020000, 32, 64, Y0);
    write_mat(22'h100000, 32, 32, X1);
    write_mat(22'h110000, 32, 32, W1);
    write_mat(22'h120000, 32, 32, Y1);

    // 3. program both engines, start them together
    cfg_write(0, CFG_X_ADDR, 32'h000000); cfg_write(0, CFG_W_ADDR, 32'h010000);
    cfg_write(0, CFG_Y_ADDR, 32'h020000); cfg_write(0, CFG_Z_ADDR, 32'h030000);
    cfg_write(0, CFG_M, 32); cfg_write(0, CFG_N, 64); cfg_write(0, CFG_K, 64);
    cfg_write(0, CFG_W_START, 1);
    cfg_write(6, CFG_X_ADDR, 32'h100000); cfg_write(6, CFG_W_ADDR, 32'h110000);
    cfg_write(6, CFG_Y_ADDR, 32'h120000); cfg_write(6, CFG_Z_ADDR, 32'h130000);
    cfg_write(6, CFG_M, 32); cfg_write(6, CFG_N, 32); cfg_write(6, CFG_K, 32);
    cfg_write(6, CFG_W_START, 0);
    te_cfg[0] = '{valid: 1'b1, we: 1'b1, addr: CFG_TRIGGER, wdata: 1};
    te_cfg[6] = '{valid: 1'b1, we: 1'b1, addr: CFG_TRIGGER, wdata: 1};
    @(posedge clk); #1;
    te_cfg[0] = '0; te_cfg[6] = '0;
    t_start = cyc;
    hammer_on = 1;
    fork hammer(1); hammer(2); hammer(3); join_none
    while (te_busy[0] || te_busy[6]) @(posedge clk);
    t_end = cyc;
    hammer_on = 0;
    repeat (20) @(posedge clk);
    $display("two concurrent GEMMs done in %0d cycles; TE0 MAC-issue cycles %0d (%0d%% of 256 MAC/cycle peak), stalls %0d",
             t_end - t_start, te_mac[0], 100 * te_mac[0] / (t_end - t_start), te_stall[0]);
    checks++;
    if (te_mac[0] != 32'(4 * 64 * 2)) begin failures++; $display("FAIL TE0 mac cycles %0d", te_mac[0]); end
    // status register counts the finished job
    te_cfg[0] = '{valid: 1'b1, we: 1'b0, addr: CFG_STATUS, wdata: 0};
    @(posedge clk); #1 te_cfg[0] = '0;
    checks++;
    if (te_rdata[0] != 32'd1) begin failures++; $display("FAIL status %0d", te_rdata[0]); end

    // 4. results
    check_z(0, 22'h030000, 32, 64, 64, X0, W0, Y0);
    check_z(6, 22'h130000, 32, 32, 32, X1, W1, Y1);

    $display("mechanisms: local TE lines %0d, read bursts %0d, grouped write beats %0d, K-beats %0d, ROB reorders %0d, bank conflicts %0d, irqs %0d, TE0 stall cycles %0d",
             n_local_te, n_burst, n_wgroup, n_kbeat, n_reorder, n_conflict, n_irq, te_stall[0]);
    checks++; if (n_local_te == 0) begin failures++; $display("FAIL no local TE access"); end
    checks++; if (n_burst == 0)    begin failures++; $display("FAIL no read burst"); end
    checks++; if (n_wgroup == 0)   begin failures++; $display("FAIL no grouped write"); end
    checks++; if (n_kbeat == 0)    begin failures++; $display("FAIL no K-word beat"); end
    checks++; if (n_reorder == 0)  begin failures++; $display("FAIL no out-of-order completion"); end
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_irq != 2)      begin failures++; $display("FAIL irq count %0d", n_irq); end
    checks++; if (te_stall[0] == 0) begin failures++; $display("FAIL no engine stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
