// Self-checking test of the tensor engine's register file and job
// controller. Random values are written to the eight job registers and read
// back (read data one cycle after the request); the job outputs must show the
// written values. A trigger must give a single start pulse and raise busy; a
// second trigger while busy is ignored; done ends the job with a one-cycle
// interrupt, clears busy and increments the job counter in STATUS.
module tb_tp_te_ctrl;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_req_t cfg;
  logic [31:0] rdata;
  logic irq, start, done = 0, busy;
  logic [ADDR_W-1:0] xa, wa, ya, za;
  logic [15:0] m, n, k, ws;

  tp_te_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .cfg_rdata_o(rdata), .irq_o(irq),
    .start_o(start), .x_addr_o(xa), .w_addr_o(wa), .y_addr_o(ya), .z_addr_o(za),
    .m_o(m), .n_o(n), .k_o(k), .w_start_o(ws), .done_i(done), .busy_o(busy));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_start = 0, n_irq = 0;
  always @(posedge clk) if (rst_n) begin n_start += start; n_irq += irq; end

  task automatic wr(input int a, input logic [31:0] v);
    cfg = '{valid: 1'b1, we: 1'b1, addr: 4'(a), wdata: v};
    @(posedge clk); #1 cfg = '0;
  endtask
  task automatic rd(input int a, output logic [31:0] v);
    cfg = '{valid: 1'b1, we: 1'b0, addr: 4'(a), wdata: 0};
    @(posedge clk); #1 cfg = '0;
    v = rdata;
  endtask
  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h, expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] v [8], r;
    cfg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int job = 0; job < 20; job++) begin
      for (int a = 0; a < 8; a++) begin
        v[a] = a < 4 ? 32'($urandom) & ((32'd1 << ADDR_W) - 1) : 32'($urandom % 65536);
        wr(a, v[a]);
      end
      for (int a = 0; a < 8; a++) begin rd(a, r); expect_eq(r, v[a], "register read-back"); end
      expect_eq(32'(xa), v[0], "x addr"); expect_eq(32'(wa), v[1], "w addr");
      expect_eq(32'(ya), v[2], "y addr"); expect_eq(32'(za), v[3], "z addr");
      expect_eq(32'(m), v[4], "M"); expect_eq(32'(n), v[5], "N");
      expect_eq(32'(k), v[6], "K"); expect_eq(32'(ws), v[7], "W start");
      wr(CFG_TRIGGER, 1);
      expect_eq(32'(start), 1, "start pulse");
      expect_eq(32'(busy), 1, "busy");
      @(posedge clk); #1;
      expect_eq(32'(start), 0, "start is a pulse");
      wr(CFG_TRIGGER, 1);                  // ignored while busy
      rd(CFG_TRIGGER, r); expect_eq(r, 1, "running flag");
      repeat ($urandom % 20) @(posedge clk);
      #1 done = 1;
      @(posedge clk); #1 done = 0;
      expect_eq(32'(irq), 1, "interrupt");
      expect_eq(32'(busy), 0, "busy after done");
      @(posedge clk); #1;
      expect_eq(32'(irq), 0, "interrupt is a pulse");
      rd(CFG_STATUS, r); expect_eq(r, 32'(job + 1), "job counter");
    end
    expect_eq(32'(n_start), 20, "start count");
    expect_eq(32'(n_irq), 20, "interrupt count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
