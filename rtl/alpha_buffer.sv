// alpha_buffer: the Alpha buffer of the weights generator.
//
// Holds the learnt OVSF coefficients (alphas) of every on-chip layer. It is
// split into NF independent banks so that the alphas of all filters touched
// by one M-element subtile come out in the same cycle, one per bank, and are
// concatenated towards the multiplier array. Addressing is a single row
// address shared by all banks: the host lays the alphas out so that row
// ((tile*NS + subtile)*nv + j) holds, in bank f, the j-th coefficient of the
// f-th filter met in that subtile (zero where the subtile meets fewer
// filters). The control unit then walks the rows with a plain counter. This
// layout is this design's choice; it repeats the alphas of a filter that
// straddles two subtiles.
//
// Interface: one 16-bit write per cycle (bank, row, data) from the host or
// DMA; one row read per cycle, registered (rd_data valid the cycle after
// rd_en), like a block RAM.
module alpha_buffer import unzip_pkg::*; #(
  parameter int NF    = 192,   // banks = alphas delivered per cycle
  parameter int DEPTH = 1024   // rows per bank
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(NF)-1:0]    wr_bank,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  word_t                    wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output word_t [NF-1:0]           rd_data
);
  for (genvar b = 0; b < NF; b++) begin : g_bank
    word_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == $clog2(NF)'(b)) mem[wr_addr] <= wr_data;
      if (rd_en) rd_data[b] <= mem[rd_addr];
    end
  end
endmodule
