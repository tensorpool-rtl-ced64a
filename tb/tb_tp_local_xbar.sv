// Self-checking test of the Tile's local crossbar with its 32 banks. Four
// masters issue random single-word and 16-word line accesses (reads and
// byte-masked writes) and hold each request until it is granted. Checked:
//   * the banks of the masters granted in one cycle never overlap,
//   * a refused master overlaps a granted one (the grant is maximal),
//   * no master waits longer than one full turn of the rotating priority,
//   * read data arrive one cycle after the grant and match a memory model
//     updated in grant order.
module tb_tp_local_xbar;
  import tp_pkg::*;
  localparam int NM = 4, NB = 32, WORDS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NM-1:0] req = '0, gnt, rvalid;
  lreq_t lreq [NM];
  logic [LINE_W-1:0] rdata [NM];

  tp_local_xbar #(.NM(NM), .NB(NB), .WORDS(WORDS)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req),
    .lreq_i(lreq), .gnt_o(gnt), .rsp_valid_o(rvalid), .rsp_rdata_o(rdata));

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [NB][WORDS];
  logic [31:0] exp_line [NM][LINE_WORDS];
  bit          exp_v [NM];
  int          exp_len [NM];
  int          waited [NM];
  int          n_conflict = 0, n_line = 0;

  function automatic logic [NB-1:0] mask_of(input lreq_t r);
    logic [NB-1:0] m = '0;
    for (int w = 0; w <= int'(r.len); w++) m[(int'(r.bank) + w) % NB] = 1'b1;
    return m;
  endfunction

  task automatic new_req(input int m);
    lreq[m] = '0;
    lreq[m].row = 9'($urandom % WORDS);
    if ($urandom % 2) begin
      lreq[m].len = 4'd15;
      lreq[m].bank = 5'(16 * ($urandom % 2));
    end else begin
      lreq[m].len = 4'd0;
      lreq[m].bank = 5'($urandom);
    end
    lreq[m].we = $urandom % 2;
    for (int i = 0; i < 2; i++) lreq[m].be[32*i +: 32] = $urandom;
    for (int i = 0; i < 16; i++) lreq[m].wdata[32*i +: 32] = $urandom;
  endtask

  initial begin
    for (int m = 0; m < NM; m++) begin lreq[m] = '0; exp_v[m] = 0; waited[m] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // preload every word through master 0
    for (int r = 0; r < WORDS; r++)
      for (int h = 0; h < 2; h++) begin
        lreq[0] = '0; lreq[0].row = 9'(r); lreq[0].bank = 5'(16 * h); lreq[0].len = 4'd15;
        lreq[0].we = 1; lreq[0].be = '1;
        for (int i = 0; i < 16; i++) begin
          lreq[0].wdata[32*i +: 32] = $urandom;
          model[16*h + i][r] = lreq[0].wdata[32*i +: 32];
        end
        req[0] = 1;
        @(posedge clk); #1;
      end
    req = '0;
    lreq[0] = '0;
    @(posedge clk); #1;
    for (int m = 0; m < NM; m++) new_req(m);
    for (int cyc = 0; cyc < 20000; cyc++) begin
      logic [NB-1:0] granted;
      for (int m = 0; m < NM; m++) if (!req[m] && ($urandom % 100) < 70) req[m] = 1;
      #1;   // let the grant settle
      // response check for grants of the previous cycle
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (rvalid[m] != exp_v[m]) begin failures++; if (failures < 10) $display("FAIL rvalid m%0d", m); end
        if (exp_v[m]) for (int w = 0; w <= exp_len[m]; w++) if (exp_line[m][w] !== rdata[m][32*w +: 32]) begin
          failures++;
          if (failures < 10) $display("FAIL data m%0d word %0d got %h exp %h", m, w, rdata[m][32*w +: 32], exp_line[m][w]);
          break;
        end
      end
      // grant checks
      granted = '0;
      for (int m = 0; m < NM; m++) if (gnt[m]) begin
        checks++;
        if (!req[m] || (granted & mask_of(lreq[m])) != '0) begin failures++; $display("FAIL overlapping grant m%0d", m); end
        granted |= mask_of(lreq[m]);
      end
      for (int m = 0; m < NM; m++) if (req[m] && !gnt[m]) begin
        checks++;
        n_conflict++;
        if ((granted & mask_of(lreq[m])) == '0) begin failures++; $display("FAIL m%0d refused without conflict", m); end
        waited[m]++;
        checks++;
        if (waited[m] > NM) begin failures++; $display("FAIL m%0d starved", m); end
      end
      // model update in grant order: reads see the state before this cycle's writes
      for (int m = 0; m < NM; m++) begin
        exp_v[m] = gnt[m];
        exp_len[m] = int'(lreq[m].len);
        if (gnt[m]) for (int w = 0; w <= int'(lreq[m].len); w++)
          exp_line[m][w] = model[(int'(lreq[m].bank) + w) % NB][lreq[m].row];
      end
      for (int m = 0; m < NM; m++) if (gnt[m]) begin
        if (lreq[m].len != 0) n_line++;
        if (lreq[m].we) for (int w = 0; w <= int'(lreq[m].len); w++)
          for (int b = 0; b < 4; b++) if (lreq[m].be[4*w + b])
            model[(int'(lreq[m].bank) + w) % NB][lreq[m].row][8*b +: 8] = lreq[m].wdata[32*w + 8*b +: 8];
      end
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) if (exp_v[m]) begin
        req[m] = 0; waited[m] = 0; new_req(m);
      end
    end
    checks++;
    if (n_conflict == 0 || n_line == 0) begin failures++; $display("FAIL no conflicts/lines"); end
    $display("conflict cycles %0d, line accesses %0d", n_conflict, n_line);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
