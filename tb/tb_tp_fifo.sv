// Self-checking test of the synchronous FIFO used as the engine's Z queue.
// Random pushes and pops (never into a full or out of an empty FIFO) are
// mirrored in a SystemVerilog queue; every cycle the head data, the full and
// empty flags and the fill count are compared with the model. A final phase
// fills the FIFO to its full depth to check that all DEPTH entries are usable.
module tb_tp_fifo;
  localparam int W = 16, D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, pop = 0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(D+1)-1:0] cnt;
  logic [W-1:0] q [$];

  tp_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .push_i(push), .data_i(din),
    .pop_i(pop), .data_o(dout), .full_o(full), .empty_o(empty), .count_o(cnt));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (cnt != q.size() || full != (q.size() == D) || empty != (q.size() == 0) ||
        (q.size() > 0 && dout !== q[0])) begin
      failures++;
      if (failures < 10) $display("FAIL cnt %0d/%0d full %b empty %b dout %h exp %h", cnt, q.size(),
                                  full, empty, dout, q.size() ? q[0] : '0);
    end
  endtask

  task automatic step(input int push_pct, input int pop_pct);
    push = (($urandom % 100) < push_pct) && (q.size() < D);
    pop  = (($urandom % 100) < pop_pct) && (q.size() > 0);
    din  = W'($urandom);
    @(posedge clk);
    if (pop) void'(q.pop_front());
    if (push) q.push_back(din);
    #1 compare();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1 compare();
    for (int i = 0; i < 3000; i++) step(50, 50);
    for (int i = 0; i < 200; i++) step(90, 10);   // drive it full
    for (int i = 0; i < 200; i++) step(10, 90);   // and empty again
    for (int i = 0; i < D; i++) step(100, 0);
    checks++;
    if (!full) begin failures++; $display("FAIL not full after %0d pushes", D); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
