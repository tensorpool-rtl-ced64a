// Tile-local crossbar with the Tile's 32 L1 banks.
//
// Masters (PE ports, the TE's wide port, and the burst distributors of the
// inbound remote ports) each ask for len+1 consecutive words starting at one
// bank; a narrow access is one word, a TE line is 16 words in 16 banks, a
// grouped write is J words. Banks answer in one cycle, as in the paper
// ("Tile banks are accessed in one cycle through a local XBAR").
//
// Arbitration (this design's choice): masters are visited in a priority
// order that rotates by one every cycle; a master is granted only if all of
// its banks are still free, so a wide access is served in one cycle or not
// at all. Rotation guarantees every master is eventually first. The response
// comes one cycle after the grant as a line in which word w of the access
// sits at bits [32w +: 32]; it cannot be refused.
module tp_local_xbar
  import tp_pkg::*;
#(
  parameter int unsigned NM    = 12,
  parameter int unsigned NB    = BANKS_PER_TILE,
  parameter int unsigned WORDS = BANK_WORDS
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NM-1:0]     req_i,
  input  lreq_t             lreq_i [NM],
  output logic [NM-1:0]     gnt_o,
  output logic [NM-1:0]     rsp_valid_o,
  output logic [LINE_W-1:0] rsp_rdata_o [NM]
);
  localparam int unsigned MW = $clog2(NM);
  localparam int unsigned BW = $clog2(NB);

  logic [MW-1:0] prio_q;

  // banks touched by each master
  logic [NB-1:0] mask [NM];
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mask[m] = '0;
      for (int w = 0; w < LINE_WORDS; w++)
        if (w <= int'(lreq_i[m].len)) mask[m][(int'(lreq_i[m].bank) + w) % NB] = 1'b1;
    end
  end

  // greedy grant in rotating order
  logic [NB-1:0] taken;
  logic [MW-1:0] owner [NB];
  always_comb begin
    taken = '0;
    gnt_o = '0;
    for (int b = 0; b < NB; b++) owner[b] = '0;
    for (int o = 0; o < NM; o++) begin
      int m;
      m = (int'(prio_q) + o) % NM;
      if (req_i[m] && ((mask[m] & taken) == '0)) begin
        gnt_o[m] = 1'b1;
        taken    = taken | mask[m];
        for (int b = 0; b < NB; b++) if (mask[m][b]) owner[b] = MW'(m);
      end
    end
  end

  // bank ports
  logic [31:0] bank_rdata [NB];
  for (genvar b = 0; b < NB; b++) begin : g_bank
    lreq_t     r;
    logic [3:0] w;                      // word index of bank b inside the access
    assign r = lreq_i[owner[b]];
    assign w = 4'((b - int'(r.bank) + NB) % NB);
    tp_l1_bank #(.WORDS(WORDS)) i_bank (
      .clk_i,
      .req_i  (taken[b]),
      .we_i   (r.we),
      .be_i   (r.be[4*w +: 4]),
      .addr_i (r.row),
      .wdata_i(r.wdata[32*w +: 32]),
      .rdata_o(bank_rdata[b])
    );
  end

  // response, one cycle later
  logic [BW-1:0] start_q [NM];
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q      <= '0;
      rsp_valid_o <= '0;
      for (int m = 0; m < NM; m++) start_q[m] <= '0;
    end else begin
      prio_q      <= (prio_q == MW'(NM - 1)) ? '0 : prio_q + 1'b1;
      rsp_valid_o <= gnt_o;
      for (int m = 0; m < NM; m++) if (gnt_o[m]) start_q[m] <= lreq_i[m].bank;
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++)
      for (int w = 0; w < LINE_WORDS; w++)
        rsp_rdata_o[m][32*w +: 32] = bank_rdata[(int'(start_q[m]) + w) % NB];
  end
endmodule
