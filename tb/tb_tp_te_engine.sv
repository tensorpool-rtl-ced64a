// Self-checking test of the tensor engine datapath at its full 32 x 8 x 3
// geometry. Each output tile gets its own random X (32 x N), W (N x 32) and
// Y (32 x 32) made of small integers, so every partial sum is exactly
// representable in FP16 and the reference is plain integer arithmetic. Two
// runs are made: one with all streams always ready, where the number of
// MAC-issue cycles and the total cycle count are checked against 4*N per
// tile (one W line every four cycles), and one with random gaps on the input
// streams and random back-pressure on Z, which exercises freezing the array
// in the middle of a tile.
module tb_tp_te_engine;
  import tp_pkg::*;
  localparam int R = 32, TN = 32;
  localparam int N = 64, NT = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [31:0] mac_cycles, stall_cycles;
  logic x_valid, x_ready, w_valid, w_ready, y_valid, y_ready, z_valid, z_ready;
  logic [LINE_W-1:0] x_line, w_line, y_line, z_line;

  tp_te_engine dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .n_steps_i(16'(N)), .n_tiles_i(16'(NT)),
    .busy_o(busy), .done_o(done), .mac_cycles_o(mac_cycles), .stall_cycles_o(stall_cycles),
    .x_valid_i(x_valid), .x_ready_o(x_ready), .x_line_i(x_line),
    .w_valid_i(w_valid), .w_ready_o(w_ready), .w_line_i(w_line),
    .y_valid_i(y_valid), .y_ready_o(y_ready), .y_line_i(y_line),
    .z_valid_o(z_valid), .z_ready_i(z_ready), .z_line_o(z_line));

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int X [NT][R][N];
  int W [NT][N][TN];
  int Y [NT][R][TN];

  function automatic logic [15:0] i2h(input int v);   // small integer to FP16
    int m, e;
    if (v == 0) return 16'h0;
    m = v < 0 ? -v : v;
    e = 0;
    while (m >= 2048) begin m = m / 2; e++; end
    while (m < 1024) begin m = m * 2; e--; end
    return {v < 0, 5'(e + 25), 10'(m - 1024)};
  endfunction

  int gap;   // percent of cycles an input stream withholds data
  int bp;    // percent of cycles Z is back-pressured

  // streams: X lines per tile and 32-wide k chunk, W lines per k, Y lines per tile
  task automatic drive_x();
    for (int t = 0; t < NT; t++)
      for (int kc = 0; kc < N / 32; kc++)
        for (int i = 0; i < R; i++) begin
          for (int e = 0; e < 32; e++) x_line[16*e +: 16] = i2h(X[t][i][kc*32+e]);
          x_valid = 1;
          while (($urandom % 100) < gap) begin x_valid = 0; @(posedge clk); #1; x_valid = 1; end
          do @(posedge clk); while (!x_ready);
          #1 x_valid = 0;
        end
  endtask
  task automatic drive_w();
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < N; k++) begin
        for (int e = 0; e < 32; e++) w_line[16*e +: 16] = i2h(W[t][k][e]);
        w_valid = 1;
        while (($urandom % 100) < gap) begin w_valid = 0; @(posedge clk); #1; w_valid = 1; end
        do @(posedge clk); while (!w_ready);
        #1 w_valid = 0;
      end
  endtask
  task automatic drive_y();
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < R; i++) begin
        for (int e = 0; e < 32; e++) y_line[16*e +: 16] = i2h(Y[t][i][e]);
        y_valid = 1;
        do @(posedge clk); while (!y_ready);
        #1 y_valid = 0;
      end
  endtask
  task automatic sink_z();
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < R; i++) begin
        z_ready = ($urandom % 100) >= bp;
        @(posedge clk);
        while (!(z_valid && z_ready)) begin #1 z_ready = ($urandom % 100) >= bp; @(posedge clk); end
        for (int e = 0; e < TN; e++) begin
          int s;
          s = Y[t][i][e];
          for (int k = 0; k < N; k++) s += X[t][i][k] * W[t][k][e];
          checks++;
          if (z_line[16*e +: 16] !== i2h(s)) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d Z[%0d][%0d] got %h exp %h", t, i, e, z_line[16*e +: 16], i2h(s));
          end
        end
        #1 z_ready = 0;
      end
  endtask

  task automatic run(input int g, input int b, output int cycles);
    int t0;
    gap = g; bp = b;
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < R; i++) for (int k = 0; k < N; k++) X[t][i][k] = int'($urandom % 7) - 3;
      for (int k = 0; k < N; k++) for (int e = 0; e < TN; e++) W[t][k][e] = int'($urandom % 7) - 3;
      for (int i = 0; i < R; i++) for (int e = 0; e < TN; e++) Y[t][i][e] = int'($urandom % 41) - 20;
    end
    @(posedge clk); #1 start = 1; t0 = $time;
    @(posedge clk); #1 start = 0;
    fork drive_x(); drive_w(); drive_y(); sink_z(); join
    while (busy) @(posedge clk);
    cycles = ($time - t0) / 10;
  endtask

  initial begin
    int cyc;
    start = 0; x_valid = 0; w_valid = 0; y_valid = 0; z_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(0, 0, cyc);
    checks++;
    if (mac_cycles != 32'(4 * N * NT)) begin failures++; $display("FAIL mac cycles %0d", mac_cycles); end
    // ideal streaming: 4 cycles per k-step plus fill/drain overhead of a few tiles' lines
    checks++;
    if (cyc > 4 * N * NT + 3 * R + 40) begin failures++; $display("FAIL ideal run took %0d cycles", cyc); end
    $display("ideal run: %0d cycles for %0d MAC-issue cycles, utilisation %0d%%", cyc, mac_cycles, 100 * mac_cycles / cyc);
    run(40, 40, cyc);
    checks++;
    if (mac_cycles != 32'(4 * N * NT)) begin failures++; $display("FAIL mac cycles %0d", mac_cycles); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("stressed run: %0d cycles, %0d stall cycles", cyc, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
