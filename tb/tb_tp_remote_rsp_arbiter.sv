// Self-checking test of a Tile's remote response arbiter. Seven outbound
// ports return numbered response beats for random destinations (four cores
// and the engine, chosen by the beat's source-port field); a destination can
// be blocked for a cycle (as a core is when its own Tile answers locally).
// Checked: each beat reaches its destination exactly once and unchanged, never
// while that destination is blocked, and a waiting port is served within one
// turn of the destination's round-robin.
module tb_tp_remote_rsp_arbiter;
  import tp_pkg::*;
  localparam int ND = 5, NP = 7, NRSP = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NP-1:0] iv = '0, ir, acc;
  logic [ND-1:0] blk = '0, ov;
  rrsp_t ip [NP], op [ND];

  tp_remote_rsp_arbiter #(.ND(ND), .NP(NP)) dut (.clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(iv), .in_ready_o(ir), .in_rsp_i(ip), .block_i(blk), .out_valid_o(ov), .out_rsp_o(op));

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [NP], got = 0, waitc [NP];
  bit seen [NP * NRSP];

  task automatic new_rsp(input int p);
    ip[p] = '0;
    ip[p].src_port = 3'($urandom % ND);
    ip[p].rdata = 128'(p * NRSP + sent[p]);
    ip[p].tag = 4'($urandom);
  endtask

  initial begin
    for (int p = 0; p < NP; p++) begin sent[p] = 0; waitc[p] = 0; new_rsp(p); end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (got < NP * NRSP) begin
      for (int p = 0; p < NP; p++) if (!iv[p] && sent[p] < NRSP && $urandom % 4 != 0) iv[p] = 1;
      blk = ND'($urandom) & ND'($urandom);
      #1;
      for (int d = 0; d < ND; d++) if (ov[d]) begin
        int id;
        id = int'(op[d].rdata);
        checks++;
        if (blk[d] || int'(op[d].src_port) != d || id >= NP * NRSP || seen[id]) begin
          failures++; if (failures < 10) $display("FAIL beat %0d to destination %0d", id, d);
        end else seen[id] = 1;
        got++;
      end
      for (int p = 0; p < NP; p++) if (iv[p]) begin
        if (ir[p]) waitc[p] = 0;
        else if (!blk[ip[p].src_port]) waitc[p]++;
        checks++;
        if (waitc[p] > NP) begin failures++; $display("FAIL port %0d starved", p); end
      end
      acc = iv & ir;
      @(posedge clk); #1;
      for (int p = 0; p < NP; p++) if (acc[p]) begin iv[p] = 0; sent[p]++; new_rsp(p); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
