// Self-checking test of one tensor engine (register file, streamer with its
// transactions table, ROBs and Z FIFO, and the 32 x 8 x 3 datapath) against a
// behavioural model of the memory system around it. The model answers lines
// of the engine's own Tile as whole lines one cycle after acceptance, and
// lines of other Tiles as four K-word beats after a random delay, with beats
// of different lines (and of one line) arriving in random order; remote
// writes are acknowledged with LINE_WORDS/J beats. The request port is
// back-pressured at random. Two jobs run back to back: Z = Y + X*W with
// M = N = K = 64 and an interleaved W start block of 1, then a 32 x 96 x 32
// job with start block 0. Z is checked word by word against an integer model
// (small integer operands keep all FP16 sums exact); the number of
// MAC-issue cycles (counted per job) must equal 4*N per 32 x 32 output tile.
module tb_tp_redmule;
  import tp_pkg::*;
  localparam logic [5:0] ME = 6'd5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  logic [31:0] rdata, mac, stall;
  logic irq, busy, req_v, req_r = 0, lv = 0, rv = 0;
  wreq_t req;
  wrsp_t lrsp;
  rrsp_t rrsp;

  tp_redmule dut (.clk_i(clk), .rst_ni(rst_n), .tile_id_i(ME), .cfg_i(cfg), .cfg_rdata_o(rdata),
    .irq_o(irq), .busy_o(busy), .mac_cycles_o(mac), .stall_cycles_o(stall),
    .req_valid_o(req_v), .req_ready_i(req_r), .req_o(req),
    .lrsp_valid_i(lv), .lrsp_i(lrsp), .rrsp_valid_i(rv), .rrsp_i(rrsp));

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- memory model
  logic [31:0] mem [int];      // word address -> data
  typedef struct { longint due; rrsp_t b; } beat_t;
  beat_t  pool [$];            // remote beats waiting for delivery
  wrsp_t  lq [$];              // local responses, one per cycle
  longint cyc = 0;
  int n_local = 0, n_remote_rd = 0, n_remote_wr = 0, n_ooo = 0;
  logic [TAG_W-1:0] last_tag = '0;

  function automatic logic [31:0] rd_word(input int wa);
    return mem.exists(wa) ? mem[wa] : 32'h0;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    req_r <= ($urandom % 100) < 75;
    if (rst_n && req_v && req_r) begin
      int wa;
      wa = int'(req.addr >> 2);
      if (req.we) for (int w = 0; w < LINE_WORDS; w++) mem[wa + w] = req.wdata[32*w +: 32];
      if (addr_tile(req.addr) == ME) begin
        wrsp_t r;
        r.we = req.we; r.tag = req.tag; r.rdata = '0;
        if (!req.we) for (int w = 0; w < LINE_WORDS; w++) r.rdata[32*w +: 32] = rd_word(wa + w);
        lq.push_back(r);
        n_local++;
      end else begin
        longint d;
        d = cyc + 3 + $urandom % 20;
        for (int b = 0; b < (req.we ? LINE_WORDS / J_GRP : LINE_WORDS / K_GRP); b++) begin
          beat_t e;
          e.due = d + $urandom % 6;
          e.b = '0;
          e.b.we = req.we; e.b.tag = req.tag; e.b.src_tile = ME; e.b.src_port = 3'(TE_PORT);
          if (!req.we) begin
            e.b.offs = 4'(b * K_GRP);
            for (int w = 0; w < K_GRP; w++) e.b.rdata[32*w +: 32] = rd_word(wa + b * K_GRP + w);
          end
          pool.push_back(e);
        end
        if (req.we) n_remote_wr++; else n_remote_rd++;
      end
    end
    // deliver one local and one remote response per cycle
    lv <= 1'b0;
    if (lq.size() > 0) begin lv <= 1'b1; lrsp <= lq.pop_front(); end
    rv <= 1'b0;
    begin
      int due [$];
      due = pool.find_index(x) with (x.due <= cyc);
      if (due.size() > 0) begin
        int k;
        k = due[$urandom % due.size()];
        rv <= 1'b1;
        rrsp <= pool[k].b;
        if (!pool[k].b.we && pool[k].b.tag != last_tag) n_ooo++;
        last_tag = pool[k].b.tag;
        pool.delete(k);
      end
    end
  end

  // ---------------------------------------------------------------- jobs
  function automatic logic [15:0] i2h(input int v);
    int m, e;
    if (v == 0) return 16'h0;
    m = v < 0 ? -v : v;
    e = 0;
    while (m >= 2048) begin m = m / 2; e++; end
    while (m < 1024) begin m = m * 2; e--; end
    return {v < 0, 5'(e + 25), 10'(m - 1024)};
  endfunction

  int X [][], W [][], Y [][];

  task automatic put(input int base, input int r, input int c, input int cols, input int v);
    int ba, wa;
    ba = base + (r * cols + c) * 2;
    wa = ba >> 2;
    if (!mem.exists(wa)) mem[wa] = 0;
    if (ba % 4 == 0) mem[wa][15:0] = i2h(v); else mem[wa][31:16] = i2h(v);
  endtask

  task automatic cfg_wr(input cfg_reg_e a, input int v);
    cfg = '{valid: 1'b1, we: 1'b1, addr: a, wdata: 32'(v)};
    @(posedge clk); #1 cfg = '0;
  endtask

  task automatic job(input int M, input int N, input int K, input int ws, input int xb, input int wb,
                     input int yb, input int zb);
    int t0, cycles, tiles;
    X = new[M]; foreach (X[i]) X[i] = new[N];
    W = new[N]; foreach (W[i]) W[i] = new[K];
    Y = new[M]; foreach (Y[i]) Y[i] = new[K];
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin X[i][j] = int'($urandom % 7) - 3; put(xb, i, j, N, X[i][j]); end
    for (int i = 0; i < N; i++) for (int j = 0; j < K; j++) begin W[i][j] = int'($urandom % 7) - 3; put(wb, i, j, K, W[i][j]); end
    for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) begin Y[i][j] = int'($urandom % 21) - 10; put(yb, i, j, K, Y[i][j]); end
    cfg_wr(CFG_X_ADDR, xb); cfg_wr(CFG_W_ADDR, wb); cfg_wr(CFG_Y_ADDR, yb); cfg_wr(CFG_Z_ADDR, zb);
    cfg_wr(CFG_M, M); cfg_wr(CFG_N, N); cfg_wr(CFG_K, K); cfg_wr(CFG_W_START, ws);
    t0 = int'(cyc);
    cfg_wr(CFG_TRIGGER, 1);
    while (!irq) @(posedge clk);
    cycles = int'(cyc) - t0;
    tiles = (M / 32) * (K / 32);
    checks++;
    if (int'(mac) != 4 * N * tiles) begin failures++; $display("FAIL MAC cycles %0d", int'(mac)); end
    $display("job %0dx%0dx%0d: %0d cycles, %0d MAC-issue cycles", M, N, K, cycles, int'(mac));
    for (int i = 0; i < M; i++) for (int j = 0; j < K; j++) begin
      int s, ba;
      logic [31:0] w;
      logic [15:0] h;
      s = Y[i][j];
      for (int k = 0; k < N; k++) s += X[i][k] * W[k][j];
      ba = zb + (i * K + j) * 2;
      w = rd_word(ba >> 2);
      h = (ba % 4 == 0) ? w[15:0] : w[31:16];
      checks++;
      if (h !== i2h(s)) begin
        failures++;
        if (failures < 10) $display("FAIL Z[%0d][%0d] got %h exp %h", i, j, h, i2h(s));
      end
    end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    job(64, 64, 64, 1, 'h00000, 'h10000, 'h20000, 'h30000);
    job(32, 96, 32, 0, 'h40000, 'h50000, 'h60000, 'h70000);
    $display("local lines %0d, remote reads %0d, remote writes %0d, tag switches between beats %0d, stall cycles %0d",
             n_local, n_remote_rd, n_remote_wr, n_ooo, stall);
    checks++;
    if (n_local == 0 || n_remote_rd == 0 || n_remote_wr == 0 || stall == 0) begin
      failures++; $display("FAIL a path was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
