// Self-checking test of the 4x4 request/response crossbar used at the
// SubGroup, Group and cluster levels. Four initiators send numbered requests
// to random target Tiles; four targets accept at random and return responses
// addressed to random source Tiles. Checked: every request reaches output
// (target Tile mod 4) exactly once and unchanged, every response reaches
// initiator (source Tile mod 4), a waiting request is served within one turn
// of the round-robin (no starvation), and nothing is lost or duplicated.
module tb_tp_xbar;
  import tp_pkg::*;
  localparam int N = 4, NREQ = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] qv_i = '0, qr_i, pv_i, pr_i = '0, qv_o, qr_o = '0, pv_o = '0, pr_o;
  rreq_t q_i [N], q_o [N];
  rrsp_t p_i [N], p_o [N];

  tp_xbar #(.NI(N), .NO(N)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(qv_i), .req_ready_o(qr_i), .req_i(q_i),
    .rsp_valid_o(pv_i), .rsp_ready_i(pr_i), .rsp_o(p_i),
    .req_valid_o(qv_o), .req_ready_i(qr_o), .req_o(q_o),
    .rsp_valid_i(pv_o), .rsp_ready_o(pr_o), .rsp_i(p_o));

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [N], got_req = 0, got_rsp = 0, rsp_sent = 0;
  int wait_q [N];
  bit seen [N * NREQ];
  logic [N-1:0] acc_q, acc_p;

  task automatic new_req(input int i);
    q_i[i] = '0;
    q_i[i].addr = ADDR_W'($urandom);
    q_i[i].wdata = 64'(i * NREQ + sent[i]);   // unique id
  endtask
  task automatic new_rsp(input int o);
    p_o[o] = '0;
    p_o[o].src_tile = 6'($urandom);
    p_o[o].rdata = 128'(rsp_sent);
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; wait_q[i] = 0; new_req(i); new_rsp(i); end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (got_req < N * NREQ || got_rsp < rsp_sent || rsp_sent < NREQ) begin
      for (int i = 0; i < N; i++) if (!qv_i[i] && sent[i] < NREQ && $urandom % 2) qv_i[i] = 1;
      for (int o = 0; o < N; o++) if (!pv_o[o] && rsp_sent < NREQ && $urandom % 2) begin new_rsp(o); pv_o[o] = 1; rsp_sent++; end
      qr_o = N'($urandom);
      pr_i = N'($urandom);
      #1;
      for (int o = 0; o < N; o++) if (qv_o[o] && qr_o[o]) begin
        int id;
        id = int'(q_o[o].wdata);
        checks++;
        if (int'(addr_tile(q_o[o].addr)) % N != o || id >= N * NREQ || seen[id]) begin
          failures++; if (failures < 10) $display("FAIL request %0d on output %0d", id, o);
        end else seen[id] = 1;
        got_req++;
      end
      for (int i = 0; i < N; i++) if (pv_i[i] && pr_i[i]) begin
        checks++;
        if (int'(p_i[i].src_tile) % N != i) begin failures++; $display("FAIL response on initiator %0d", i); end
        got_rsp++;
      end
      for (int i = 0; i < N; i++) if (qv_i[i]) begin
        if (qr_i[i]) wait_q[i] = 0;
        else if (qr_o[int'(addr_tile(q_i[i].addr)) % N]) wait_q[i]++;   // lost an arbitration
        checks++;
        if (wait_q[i] > N) begin failures++; $display("FAIL initiator %0d starved", i); end
      end
      acc_q = qv_i & qr_i;
      acc_p = pv_o & pr_o;
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) if (acc_q[i]) begin qv_i[i] = 0; sent[i]++; new_req(i); end
      for (int o = 0; o < N; o++) if (acc_p[o]) pv_o[o] = 0;
    end
    checks++;
    if (got_req != N * NREQ) begin failures++; $display("FAIL %0d requests delivered", got_req); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
