// Self-checking test of the engine's reorder buffer. Entries are allocated in
// order, completed in random order through the two commit ports (sometimes
// both in one cycle), and must leave strictly in allocation order, each with
// the data committed to its slot. The head must not become valid before its
// own line has been committed, even if younger lines are complete.
module tb_tp_te_rob;
  localparam int D = 16, W = 32, NLINES = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic alloc = 0, full, c0v = 0, c1v = 0, valid, ready = 0, empty;
  logic [3:0] aidx, c0i = '0, c1i = '0;
  logic [W-1:0] c0d = '0, c1d = '0, dout;

  tp_te_rob #(.DEPTH(D), .WIDTH(W)) dut (.clk_i(clk), .rst_ni(rst_n), .alloc_i(alloc), .alloc_idx_o(aidx),
    .full_o(full), .c0_valid_i(c0v), .c0_idx_i(c0i), .c0_data_i(c0d), .c1_valid_i(c1v), .c1_idx_i(c1i),
    .c1_data_i(c1d), .valid_o(valid), .ready_i(ready), .data_o(dout), .empty_o(empty));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int slot_seq [D];          // sequence number held by each slot
  bit slot_pend [D];         // allocated, not yet committed
  bit slot_done [D];
  int next_alloc = 0, next_out = 0, n_ooo = 0;

  function automatic logic [W-1:0] val(input int seq); return W'(seq * 32'h9e3779b1); endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (next_out < NLINES) begin
      int pend [$];
      logic [3:0] a_idx;
      // pick stimulus for this cycle from the state before the edge
      pend.delete();
      alloc = !full && next_alloc < NLINES && ($urandom % 100) < 60;
      for (int s = 0; s < D; s++) if (slot_pend[s]) pend.push_back(s);
      pend.shuffle();
      c0v = pend.size() > 0 && ($urandom % 100) < 50;
      c1v = pend.size() > 1 && ($urandom % 100) < 50;
      if (c0v) begin c0i = 4'(pend[0]); c0d = val(slot_seq[pend[0]]); end
      if (c1v) begin c1i = 4'(pend[1]); c1d = val(slot_seq[pend[1]]); end
      ready = ($urandom % 100) < 70;
      // the head may only be valid when its slot is complete
      checks++;
      if (valid !== (next_out < next_alloc && slot_done[next_out % D])) begin
        failures++;
        if (failures < 10) $display("FAIL valid %b for seq %0d", valid, next_out);
      end
      if (valid && ready) begin
        checks++;
        if (dout !== val(next_out)) begin failures++; if (failures < 10) $display("FAIL data seq %0d", next_out); end
      end
      a_idx = aidx;
      @(posedge clk);
      if (valid && ready) begin slot_done[next_out % D] = 0; next_out++; end
      if (c0v) begin slot_pend[c0i] = 0; slot_done[c0i] = 1; if (slot_seq[c0i] != next_out) n_ooo++; end
      if (c1v) begin slot_pend[c1i] = 0; slot_done[c1i] = 1; end
      if (alloc) begin
        checks++;
        if (a_idx != 4'(next_alloc % D)) begin failures++; $display("FAIL alloc idx %0d", a_idx); end
        slot_seq[a_idx] = next_alloc; slot_pend[a_idx] = 1; next_alloc++;
      end
      #1;
    end
    checks++;
    if (n_ooo == 0) begin failures++; $display("FAIL no out-of-order commit happened"); end
    checks++;
    if (!empty) begin failures++; $display("FAIL not empty at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
