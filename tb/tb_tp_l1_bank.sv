// Self-checking test of one 2 KiB L1 bank (512 x 32 bit, byte enables,
// one-cycle read latency). Random reads and byte-masked writes are mirrored in
// a model array; a read returns its data on the cycle after the request, and a
// write also returns the old word (read-before-write), which the model checks.
module tb_tp_l1_bank;
  localparam int WORDS = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req = 0, we = 0;
  logic [3:0] be = '0;
  logic [8:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [WORDS];

  tp_l1_bank #(.WORDS(WORDS)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr),
    .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    bit chk;
    @(posedge clk); #1;
    // initialise every word
    for (int a = 0; a < WORDS; a++) begin
      model[a] = $urandom;
      req = 1; we = 1; be = 4'hf; addr = 9'(a); wdata = model[a];
      @(posedge clk); #1;
    end
    req = 0;
    for (int i = 0; i < 20000; i++) begin
      req = ($urandom % 100) < 80;
      we = $urandom % 2;
      be = 4'($urandom);
      addr = 9'($urandom);
      wdata = $urandom;
      chk = req;
      exp = model[addr];
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
      @(posedge clk); #1;
      if (chk) begin
        checks++;
        if (rdata !== exp) begin failures++; if (failures < 10) $display("FAIL addr %0d got %h exp %h", addr, rdata, exp); end
      end
    end
    req = 0;
    for (int a = 0; a < WORDS; a++) begin   // final sweep of the whole array
      req = 1; we = 0; addr = 9'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; if (failures < 10) $display("FAIL sweep %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
