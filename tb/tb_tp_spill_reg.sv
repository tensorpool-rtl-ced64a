// Self-checking test of the two-entry spill register that cuts every
// handshake path at a Tile, SubGroup and Group boundary. A random producer and
// a randomly back-pressured consumer exchange a numbered sequence; the
// consumer checks order and completeness. In a second phase producer and
// consumer are always ready and the register must pass one word per cycle.
module tb_tp_spill_reg;
  localparam int W = 32, NWORDS = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic vi = 0, ri, vo, ro = 0;
  logic [W-1:0] di = '0, dq;
  int pv = 50, cr = 50;   // producer-valid and consumer-ready probability in percent

  tp_spill_reg #(.WIDTH(W)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .ready_o(ri), .data_i(di),
    .valid_o(vo), .ready_i(ro), .data_o(dq));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got = 0, streak = 0, best = 0;
  always @(posedge clk) if (rst_n) begin
    if (vo && ro) begin
      checks++;
      if (dq !== W'(got)) begin failures++; if (failures < 10) $display("FAIL got %0d exp %0d", dq, got); end
      got++;
      streak++;
      if (streak > best) best = streak;
    end else streak = 0;
  end

  initial begin   // consumer
    @(posedge rst_n);
    forever begin @(posedge clk); #1 ro = ($urandom % 100) < cr; end
  end

  initial begin   // producer
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int sent = 0; sent < NWORDS; ) begin
      if (sent == NWORDS / 2) begin pv = 100; cr = 100; end
      if (($urandom % 100) < pv) begin
        vi = 1; di = W'(sent);
        do @(posedge clk); while (!ri);
        #1 vi = 0;
        sent++;
      end else begin
        @(posedge clk); #1;
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (got != NWORDS) begin failures++; $display("FAIL received %0d of %0d", got, NWORDS); end
    checks++;
    if (best < NWORDS / 4) begin failures++; $display("FAIL no full-rate streaming (longest run %0d)", best); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
