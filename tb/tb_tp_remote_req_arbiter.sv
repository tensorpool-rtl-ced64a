// Self-checking test of a Tile's remote request arbiter. Five sources (four
// cores and the engine's Burst-Grouper) of Tile 21 (Group 1, SubGroup 1)
// send numbered requests to random non-local Tiles; the seven outbound ports
// accept at random. Checked: each request leaves on the port of its target
// (0..3 = SubGroup distance inside the Group, 4..6 = Group distance, worked
// out here from the Tile numbers), exactly once and unchanged, and a waiting
// source is served within one turn of its port's round-robin.
module tb_tp_remote_req_arbiter;
  import tp_pkg::*;
  localparam int NS = 5, NP = 7, NREQ = 2000;
  localparam logic [5:0] ME = 6'd21;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NS-1:0] iv = '0, ir, acc;
  logic [NP-1:0] ov, orr = '0;
  rreq_t iq [NS], oq [NP];

  tp_remote_req_arbiter #(.NS(NS), .NP(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .tile_id_i(ME),
    .in_valid_i(iv), .in_ready_o(ir), .in_req_i(iq), .out_valid_o(ov), .out_ready_i(orr), .out_req_o(oq));

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int exp_port(input logic [5:0] dst);
    int dg, ds;
    dg = (int'(dst[5:4]) - int'(ME[5:4]) + 4) % 4;
    ds = (int'(dst[3:2]) - int'(ME[3:2]) + 4) % 4;
    return dg != 0 ? 3 + dg : ds;
  endfunction

  int sent [NS], got = 0, waitc [NS];
  bit seen [NS * NREQ];
  int per_port [NP];

  task automatic new_req(input int s);
    logic [5:0] t;
    do t = 6'($urandom); while (t == ME);
    iq[s] = '0;
    iq[s].addr = ADDR_W'({9'($urandom), t, 5'($urandom), 2'b00});
    iq[s].wdata = 64'(s * NREQ + sent[s]);
  endtask

  initial begin
    for (int s = 0; s < NS; s++) begin sent[s] = 0; waitc[s] = 0; new_req(s); end
    for (int p = 0; p < NP; p++) per_port[p] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (got < NS * NREQ) begin
      for (int s = 0; s < NS; s++) if (!iv[s] && sent[s] < NREQ && $urandom % 4 != 0) iv[s] = 1;
      orr = NP'($urandom);
      #1;
      for (int p = 0; p < NP; p++) if (ov[p] && orr[p]) begin
        int id;
        id = int'(oq[p].wdata);
        checks++;
        if (exp_port(addr_tile(oq[p].addr)) != p || id >= NS * NREQ || seen[id]) begin
          failures++; if (failures < 10) $display("FAIL request %0d on port %0d", id, p);
        end else seen[id] = 1;
        per_port[p]++;
        got++;
      end
      for (int s = 0; s < NS; s++) if (iv[s]) begin
        if (ir[s]) waitc[s] = 0;
        else if (orr[exp_port(addr_tile(iq[s].addr))]) waitc[s]++;
        checks++;
        if (waitc[s] > NS) begin failures++; $display("FAIL source %0d starved", s); end
      end
      acc = iv & ir;
      @(posedge clk); #1;
      for (int s = 0; s < NS; s++) if (acc[s]) begin iv[s] = 0; sent[s]++; new_req(s); end
    end
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (per_port[p] == 0) begin failures++; $display("FAIL port %0d never used", p); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
