// One L1 scratchpad bank: 2 KiB as 512 words of 32 bits (the paper's Tile
// has 32 such banks, 4 MiB over the cluster). In silicon this is an SRAM
// macro; here it is an array with the macro's behaviour: a request in one
// cycle (row, write enable, byte enables, write data) and the read data in
// the next. Writes answer with the old contents, which callers ignore. The
// bank accepts a request every cycle and never stalls.
module tp_l1_bank #(
  parameter int unsigned WORDS = 512
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [3:0]               be_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  output logic [31:0]              rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      rdata_o <= mem[addr_i];
      if (we_i)
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
    end
  end
endmodule
