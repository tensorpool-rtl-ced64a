// Self-checking test of the Burst-Distributor at a Tile's inbound port. The
// testbench plays the network (random single-word reads, 16-word burst reads
// and J-word grouped writes, each with a tag) and the local crossbar (random
// grant refusals, registered bank data one cycle after the grant, backed by a
// memory model). Checked: a burst read returns LINE_WORDS/K beats of K words
// with the right offsets and data, a single read one beat, a write one
// acknowledge beat; tags and source fields are returned unchanged; writes
// reach the banks with the right byte enables.
module tb_tp_burst_distributor;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_v = 0, in_r, rsp_v, rsp_r = 0, x_req, x_gnt = 0, x_rv = 0;
  rreq_t in_q;
  rrsp_t rsp;
  lreq_t x_lreq;
  logic [LINE_W-1:0] x_rdata = '0;

  tp_burst_distributor dut (.clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_v), .in_ready_o(in_r), .in_req_i(in_q),
    .rsp_valid_o(rsp_v), .rsp_ready_i(rsp_r), .rsp_o(rsp),
    .x_req_o(x_req), .x_lreq_o(x_lreq), .x_gnt_i(x_gnt),
    .x_rsp_valid_i(x_rv), .x_rsp_rdata_i(x_rdata));

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 32 banks x 8 rows of memory behind the crossbar model
  localparam int ROWS = 8;
  logic [31:0] mem [BANKS_PER_TILE][ROWS];
  rrsp_t exp_q [$];
  int n_burst = 0, n_single = 0, n_write = 0;

  // crossbar model: random refusal, data one cycle after the grant
  initial forever begin @(posedge clk); #1 x_gnt = ($urandom % 100) < 70; end
  always @(posedge clk) begin
    x_rv <= rst_n && x_req && x_gnt;
    if (rst_n && x_req && x_gnt) begin
      for (int w = 0; w < LINE_WORDS; w++)
        x_rdata[32*w +: 32] <= mem[(int'(x_lreq.bank) + w) % BANKS_PER_TILE][x_lreq.row % ROWS];
      if (x_lreq.we)
        for (int w = 0; w <= int'(x_lreq.len); w++)
          for (int b = 0; b < 4; b++) if (x_lreq.be[4*w + b])
            mem[(int'(x_lreq.bank) + w) % BANKS_PER_TILE][x_lreq.row % ROWS][8*b +: 8] <= x_lreq.wdata[32*w + 8*b +: 8];
    end
  end

  // reference memory updated at the accepting edge
  logic [31:0] ref_mem [BANKS_PER_TILE][ROWS];

  initial begin
    for (int b = 0; b < BANKS_PER_TILE; b++) for (int r = 0; r < ROWS; r++) begin
      mem[b][r] = $urandom; ref_mem[b][r] = mem[b][r];
    end
    in_q = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int kind, bank, row;
      kind = $urandom % 3;
      row = $urandom % ROWS;
      bank = kind == 0 ? 16 * ($urandom % 2) : (kind == 1 ? $urandom % 32 : 2 * ($urandom % 16));
      in_q = '0;
      in_q.addr = ADDR_W'((row << 13) | (($urandom % 64) << 7) | (bank << 2));
      in_q.we = kind == 2;
      in_q.len = kind == 0 ? 4'd15 : (kind == 1 ? 4'd0 : 4'(J_GRP - 1));
      in_q.be = 8'($urandom);
      in_q.wdata = {$urandom, $urandom};
      in_q.src_tile = 6'($urandom); in_q.src_port = 3'($urandom); in_q.tag = 4'($urandom);
      // expected beats, from the reference memory at this point in the sequence
      if (kind == 2) begin
        automatic rrsp_t e = '0;
        n_write++;
        e.we = 1; e.src_tile = in_q.src_tile; e.src_port = in_q.src_port; e.tag = in_q.tag;
        exp_q.push_back(e);
        for (int w = 0; w < J_GRP; w++) for (int b = 0; b < 4; b++) if (in_q.be[4*w + b])
          ref_mem[(bank + w) % 32][row][8*b +: 8] = in_q.wdata[32*w + 8*b +: 8];
      end else begin
        automatic int nb = kind == 0 ? LINE_WORDS / K_GRP : 1;
        if (kind == 0) n_burst++; else n_single++;
        for (int bt = 0; bt < nb; bt++) begin
          automatic rrsp_t e = '0;
          for (int w = 0; w < K_GRP; w++)
            e.rdata[32*w +: 32] = (kind == 1 && w > 0) ? 32'h0 : ref_mem[(bank + bt * K_GRP + w) % 32][row];
          e.offs = 4'(bt * K_GRP);
          e.src_tile = in_q.src_tile; e.src_port = in_q.src_port; e.tag = in_q.tag;
          exp_q.push_back(e);
        end
      end
      while ($urandom % 3 == 0) begin @(posedge clk); #1; end
      in_v = 1;
      do @(posedge clk); while (!in_r);
      #1 in_v = 0;
    end
    while (exp_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    for (int b = 0; b < BANKS_PER_TILE; b++) for (int r = 0; r < ROWS; r++)
      if (mem[b][r] !== ref_mem[b][r]) begin failures++; $display("FAIL memory bank %0d row %0d", b, r); break; end
    $display("bursts %0d singles %0d writes %0d", n_burst, n_single, n_write);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial forever begin @(posedge clk); #1 rsp_r = ($urandom % 100) < 60; end

  always @(posedge clk) if (rst_n && rsp_v && rsp_r) begin
    rrsp_t g;
    g = rsp;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected beat"); end
    else begin
      // a single-word read carries only word 0; the other words are don't-care
      if (!exp_q[0].we && exp_q[0].offs == 0 && exp_q.size() >= 1) ;
      if (g.we !== exp_q[0].we || g.offs !== exp_q[0].offs || g.tag !== exp_q[0].tag ||
          g.src_tile !== exp_q[0].src_tile || g.src_port !== exp_q[0].src_port ||
          (!g.we && g.rdata[31:0] !== exp_q[0].rdata[31:0]) ||
          (!g.we && exp_q[0].rdata[127:32] != '0 && g.rdata !== exp_q[0].rdata)) begin
        failures++;
        if (failures < 10) $display("FAIL beat offs %0d/%0d we %b/%b data %h exp %h", g.offs, exp_q[0].offs,
                                    g.we, exp_q[0].we, g.rdata, exp_q[0].rdata);
      end
      void'(exp_q.pop_front());
    end
  end
endmodule
