// input_buffer: double-buffered T_R x T_P activations tile.
//
// The DMA (host) writes one T_P-word row per cycle into the write bank and
// commits it; the engine reads the other bank. Banks alternate, so the input
// transfer of the next tile overlaps processing of the current one. For the
// input-selective PEs the buffer is organised for parallel access: NRP rows
// can be read in the same cycle (port 0 feeds all normally working PEs, the
// other ports one work-stealing PE each). The number of ports is this
// design's choice (one per switch-equipped PE plus one).
//
// Timing: writes, commit and release at the clock edge; reads combinational.
// wr_ready is high while the current write bank is empty.
//
// Lint note: the assertions below use rst_n in 'disable iff' while the flops
// use it as an asynchronous reset, so lint reports rst_n as both synchronous
// and asynchronous; the assertions are not part of the circuit.
module input_buffer import unzip_pkg::*; #(
  parameter int T_R = 32,
  parameter int T_P = 18,
  parameter int NRP = 17
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            wr_valid,
  input  logic [$clog2(T_R)-1:0]          wr_row,
  input  word_t [T_P-1:0]                 wr_data,
  input  logic                            wr_commit,
  output logic                            wr_ready,
  output logic [1:0]                      bank_full,
  input  logic                            rd_bank,
  input  logic [NRP-1:0][$clog2(T_R)-1:0] rd_row,
  output word_t [NRP-1:0][T_P-1:0]        rd_data,
  input  logic                            release_,
  input  logic                            release_bank
);
  word_t [T_P-1:0] mem [2][T_R];
  logic            wbank;
  logic [1:0]      full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0;
      full  <= '0;
    end else begin
      if (wr_commit) begin
        full[wbank] <= 1'b1;
        wbank       <= ~wbank;
      end
      if (release_) full[release_bank] <= 1'b0;
    end
  end

  always_ff @(posedge clk)
    if (wr_valid) mem[wbank][wr_row] <= wr_data;

  assign wr_ready  = !full[wbank];
  assign bank_full = full;

  always_comb
    for (int r = 0; r < NRP; r++) rd_data[r] = mem[rd_bank][rd_row[r]];

  assert property (@(posedge clk) disable iff (!rst_n) (wr_valid || wr_commit) |-> !full[wbank]);
  assert property (@(posedge clk) disable iff (!rst_n) release_ |-> full[release_bank]);
endmodule
