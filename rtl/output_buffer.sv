// output_buffer: T_R x T_C partial-sum store of the output-stationary engine.
//
// Every PE has a read-modify-write port: it reads the partial sum of the
// output element it works on (row, column) and writes the updated sum back
// one cycle later. Ports write to distinct elements (the engine controller
// guarantees it). After the last P tile the buffer holds the finished output
// tile, which the host (DMA) reads one row of T_C sums at a time.
//
// Timing: reads combinational, writes at the clock edge.
module output_buffer import unzip_pkg::*; #(
  parameter int T_R = 32,
  parameter int T_C = 32,
  parameter int NP  = 32
) (
  input  logic                            clk,
  input  logic [NP-1:0][$clog2(T_R)-1:0]  rd_row,
  input  logic [NP-1:0][$clog2(T_C)-1:0]  rd_col,
  output acc_t [NP-1:0]                   rd_psum,
  input  logic [NP-1:0]                   wr_valid,
  input  logic [NP-1:0][$clog2(T_R)-1:0]  wr_row,
  input  logic [NP-1:0][$clog2(T_C)-1:0]  wr_col,
  input  acc_t [NP-1:0]                   wr_psum,
  input  logic [$clog2(T_R)-1:0]          host_row,
  output acc_t [T_C-1:0]                  host_data
);
  acc_t mem [T_R][T_C];

  always_ff @(posedge clk)
    for (int p = 0; p < NP; p++)
      if (wr_valid[p]) mem[wr_row[p]][wr_col[p]] <= wr_psum[p];

  always_comb begin
    for (int p = 0; p < NP; p++) rd_psum[p] = mem[rd_row[p]][rd_col[p]];
    for (int c = 0; c < T_C; c++) host_data[c] = mem[host_row][c];
  end
endmodule
