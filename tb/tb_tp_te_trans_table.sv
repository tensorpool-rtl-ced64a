// Self-checking test of the engine's outstanding-transactions table. Lines
// are allocated with a random stream and ROB slot; each is answered either
// as one whole line (own-Tile path) or as four K-word beats in random order,
// interleaved with the beats of other lines (remote path). Checked: tags are
// unique among lines in flight, a line commits exactly once, on the right
// commit port, only after its last beat, with the stream, ROB slot and all
// 16 words it was given; the in-flight count matches the model.
module tb_tp_te_trans_table;
  import tp_pkg::*;
  localparam int NT = 16, NLINES = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic alloc = 0, avail, lv = 0, rv = 0, c0v, c1v;
  logic [1:0] a_s = '0, c0s, c1s;
  logic [3:0] a_r = '0, c0r, c1r, rofs = '0;
  logic [TAG_W-1:0] a_tag, ltag = '0, rtag = '0;
  logic [LINE_W-1:0] ldata = '0, c0d, c1d;
  logic [K_GRP*32-1:0] rdata = '0;
  logic [4:0] inflight;

  tp_te_trans_table #(.NT(NT)) dut (.clk_i(clk), .rst_ni(rst_n),
    .alloc_i(alloc), .alloc_stream_i(a_s), .alloc_rob_i(a_r), .avail_o(avail), .alloc_tag_o(a_tag),
    .lrsp_valid_i(lv), .lrsp_tag_i(ltag), .lrsp_data_i(ldata),
    .rrsp_valid_i(rv), .rrsp_tag_i(rtag), .rrsp_offs_i(rofs), .rrsp_data_i(rdata),
    .c0_valid_o(c0v), .c0_stream_o(c0s), .c0_rob_o(c0r), .c0_data_o(c0d),
    .c1_valid_o(c1v), .c1_stream_o(c1s), .c1_rob_o(c1r), .c1_data_o(c1d), .in_flight_o(inflight));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model of each tag in flight
  bit          busy [NT];
  bit          remote [NT];
  logic [1:0]  m_s [NT];
  logic [3:0]  m_r [NT];
  logic [LINE_W-1:0] m_d [NT];
  int          beats_left [NT][$];   // word offsets not yet sent
  int          n_alloc = 0, n_done = 0, n_local = 0, n_remote = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (n_done < NLINES) begin
      int cand_l [$], cand_r [$], n_busy, at;
      cand_l.delete(); cand_r.delete(); n_busy = 0;
      for (int t = 0; t < NT; t++) if (busy[t]) begin
        n_busy++;
        if (!remote[t]) cand_l.push_back(t); else cand_r.push_back(t);
      end
      checks++;
      if (int'(inflight) != n_busy) begin failures++; $display("FAIL in flight %0d, model %0d", inflight, n_busy); end
      // stimulus
      alloc = avail && n_alloc < NLINES && $urandom % 2;
      a_s = 2'($urandom % 3); a_r = 4'($urandom);
      lv = cand_l.size() > 0 && $urandom % 2;
      if (lv) begin ltag = TAG_W'(cand_l[$urandom % cand_l.size()]); ldata = m_d[ltag]; end
      rv = cand_r.size() > 0 && $urandom % 4 != 0;
      if (rv) begin
        int k;
        rtag = TAG_W'(cand_r[$urandom % cand_r.size()]);
        k = $urandom % beats_left[rtag].size();
        rofs = 4'(beats_left[rtag][k]);
        beats_left[rtag].delete(k);
        rdata = m_d[rtag][32 * int'(rofs) +: K_GRP * 32];
      end
      #1;
      // commit checks
      checks++;
      if (c0v !== lv || (lv && (c0s !== m_s[ltag] || c0r !== m_r[ltag] || c0d !== m_d[ltag]))) begin
        failures++; if (failures < 10) $display("FAIL local commit tag %0d", ltag);
      end
      checks++;
      if (c1v !== (rv && beats_left[rtag].size() == 0) ||
          (c1v && (c1s !== m_s[rtag] || c1r !== m_r[rtag] || c1d !== m_d[rtag]))) begin
        failures++; if (failures < 10) $display("FAIL remote commit tag %0d", rtag);
      end
      if (alloc) begin
        checks++;
        if (busy[a_tag]) begin failures++; $display("FAIL tag %0d handed out twice", a_tag); end
      end
      at = int'(a_tag);
      @(posedge clk); #1;
      if (lv) begin busy[ltag] = 0; n_done++; n_local++; end
      if (rv && beats_left[rtag].size() == 0) begin busy[rtag] = 0; n_done++; n_remote++; end
      if (alloc) begin
        busy[at] = 1; remote[at] = $urandom % 2; m_s[at] = a_s; m_r[at] = a_r;
        for (int w = 0; w < 16; w++) m_d[at][32*w +: 32] = $urandom;
        beats_left[at] = '{0, 4, 8, 12};
        n_alloc++;
      end
      alloc = 0; lv = 0; rv = 0;
    end
    $display("lines: %0d whole, %0d in beats", n_local, n_remote);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
