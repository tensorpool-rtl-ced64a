// Outstanding-transactions table of the tensor-engine streamer.
//
// Every 512-bit read the streamer issues takes a free entry (its tag) that
// remembers which stream (X, W, Y) and which ROB slot the line belongs to.
// Responses from the Tile's own banks return the whole line in one beat and
// are forwarded straight to the ROB (commit port 0). Responses from other
// Tiles come back as beats of K 32-bit words with a word offset; the table
// merges them into the entry and, when all 16 words are present, commits
// the line (commit port 1) and frees the tag. The paper names this table and
// its job (collect 32-bit bank responses, commit 512-bit lines); the entry
// count (16) and the lowest-free-entry allocation are this design's choice.
module tp_te_trans_table
  import tp_pkg::*;
#(
  parameter int unsigned NT = NUM_TAGS
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // allocation
  input  logic                 alloc_i,
  input  logic [1:0]           alloc_stream_i,
  input  logic [3:0]           alloc_rob_i,
  output logic                 avail_o,
  output logic [TAG_W-1:0]     alloc_tag_o,
  // whole-line response (same Tile)
  input  logic                 lrsp_valid_i,
  input  logic [TAG_W-1:0]     lrsp_tag_i,
  input  logic [LINE_W-1:0]    lrsp_data_i,
  // K-word beat (other Tiles)
  input  logic                 rrsp_valid_i,
  input  logic [TAG_W-1:0]     rrsp_tag_i,
  input  logic [3:0]           rrsp_offs_i,
  input  logic [K_GRP*32-1:0]  rrsp_data_i,
  // commits towards the ROBs
  output logic                 c0_valid_o,
  output logic [1:0]           c0_stream_o,
  output logic [3:0]           c0_rob_o,
  output logic [LINE_W-1:0]    c0_data_o,
  output logic                 c1_valid_o,
  output logic [1:0]           c1_stream_o,
  output logic [3:0]           c1_rob_o,
  output logic [LINE_W-1:0]    c1_data_o,
  output logic [$clog2(NT+1)-1:0] in_flight_o
);
  logic [NT-1:0]         used_q;
  logic [1:0]            stream_q [NT];
  logic [3:0]            rob_q    [NT];
  logic [LINE_W-1:0]     data_q   [NT];
  logic [LINE_WORDS-1:0] mask_q   [NT];

  // lowest free entry
  always_comb begin
    avail_o     = 1'b0;
    alloc_tag_o = '0;
    for (int i = NT - 1; i >= 0; i--)
      if (!used_q[i]) begin
        avail_o     = 1'b1;
        alloc_tag_o = TAG_W'(i);
      end
  end

  assign c0_valid_o  = lrsp_valid_i;
  assign c0_stream_o = stream_q[lrsp_tag_i];
  assign c0_rob_o    = rob_q[lrsp_tag_i];
  assign c0_data_o   = lrsp_data_i;

  // merge of a remote beat
  logic [LINE_W-1:0]     merged;
  logic [LINE_WORDS-1:0] mmask;
  always_comb begin
    merged = data_q[rrsp_tag_i];
    mmask  = mask_q[rrsp_tag_i];
    for (int w = 0; w < K_GRP; w++) begin
      merged[32*(int'(rrsp_offs_i) + w) +: 32] = rrsp_data_i[32*w +: 32];
      mmask[int'(rrsp_offs_i) + w] = 1'b1;
    end
  end

  assign c1_valid_o  = rrsp_valid_i && (&mmask);
  assign c1_stream_o = stream_q[rrsp_tag_i];
  assign c1_rob_o    = rob_q[rrsp_tag_i];
  assign c1_data_o   = merged;

  always_comb begin
    in_flight_o = '0;
    for (int i = 0; i < NT; i++) in_flight_o += ($clog2(NT+1))'(used_q[i]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      used_q <= '0;
      for (int i = 0; i < NT; i++) mask_q[i] <= '0;
    end else begin
      if (alloc_i) begin
        used_q[alloc_tag_o] <= 1'b1;
        mask_q[alloc_tag_o] <= '0;
      end
      if (lrsp_valid_i) used_q[lrsp_tag_i] <= 1'b0;
      if (rrsp_valid_i) begin
        if (&mmask) begin
          used_q[rrsp_tag_i] <= 1'b0;
          mask_q[rrsp_tag_i] <= '0;
        end else begin
          mask_q[rrsp_tag_i] <= mmask;
        end
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (alloc_i) begin
      stream_q[alloc_tag_o] <= alloc_stream_i;
      rob_q[alloc_tag_o]    <= alloc_rob_i;
    end
    if (rrsp_valid_i) data_q[rrsp_tag_i] <= merged;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) alloc_i |-> avail_o)
    else $error("tag allocation with no free entry");
  assert property (@(posedge clk_i) disable iff (!rst_ni) lrsp_valid_i |-> used_q[lrsp_tag_i])
    else $error("response for a free tag");
  assert property (@(posedge clk_i) disable iff (!rst_ni) rrsp_valid_i |-> used_q[rrsp_tag_i])
    else $error("beat for a free tag");
endmodule
