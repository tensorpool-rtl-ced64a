// Self-checking test of the Burst-Grouper between a tensor engine and the
// remote request arbiter. Random line reads and writes enter with random
// valid gaps; the output is back-pressured at random. A read must leave as a
// single burst request (one beat, 16 words, same address and tag); a write
// must leave as LINE_WORDS/J beats of J words at consecutive addresses, and
// the engine side is acknowledged only with the last beat.
module tb_tp_burst_grouper;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_v = 0, in_r, out_v, out_r = 0;
  wreq_t in_q;
  rreq_t out_q;

  tp_burst_grouper dut (.clk_i(clk), .rst_ni(rst_n), .tile_id_i(6'd37),
    .in_valid_i(in_v), .in_ready_o(in_r), .in_req_i(in_q),
    .out_valid_o(out_v), .out_ready_i(out_r), .out_req_o(out_q));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output beats, produced from each accepted request
  rreq_t exp_q [$];
  int n_rd = 0, n_wr = 0, beats_seen = 0;

  initial begin
    in_q = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      in_q.addr  = ADDR_W'($urandom) & ~ADDR_W'(63);
      in_q.we    = $urandom % 2;
      in_q.tag   = TAG_W'($urandom);
      for (int i = 0; i < 16; i++) in_q.wdata[32*i +: 32] = $urandom;
      if (in_q.we) begin
        n_wr++;
        for (int b = 0; b < LINE_WORDS / J_GRP; b++) begin
          automatic rreq_t e = '0;
          e.addr = in_q.addr + ADDR_W'(b * J_GRP * 4); e.we = 1; e.len = 4'(J_GRP - 1); e.be = '1;
          e.wdata = in_q.wdata[b * J_GRP * 32 +: J_GRP * 32];
          e.src_tile = 6'd37; e.src_port = PORT_W'(TE_PORT); e.tag = in_q.tag;
          exp_q.push_back(e);
        end
      end else begin
        automatic rreq_t e = '0;
        n_rd++;
        e.addr = in_q.addr; e.len = 4'(LINE_WORDS - 1);
        e.src_tile = 6'd37; e.src_port = PORT_W'(TE_PORT); e.tag = in_q.tag;
        exp_q.push_back(e);
      end
      while ($urandom % 4 == 0) begin @(posedge clk); #1; end
      in_v = 1;
      do @(posedge clk); while (!in_r);
      #1 in_v = 0;
      // every beat of this request has left once the engine side is released
      checks++;
      if (exp_q.size() != 0) begin failures++; if (failures < 10) $display("FAIL released with %0d beats pending", exp_q.size()); end
    end
    $display("reads %0d writes %0d beats %0d", n_rd, n_wr, beats_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial forever begin @(posedge clk); #1 out_r = ($urandom % 100) < 60; end

  always @(posedge clk) if (rst_n && out_v && out_r) begin
    checks++;
    beats_seen++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected beat"); end
    else begin
      if (out_q !== exp_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL beat addr %h/%h len %0d/%0d we %b", out_q.addr, exp_q[0].addr,
                                    out_q.len, exp_q[0].len, out_q.we);
      end
      void'(exp_q.pop_front());
    end
  end
endmodule
