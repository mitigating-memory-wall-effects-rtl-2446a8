// weights_buffer: double-buffered T_P x T_C tile of generated weights.
//
// The weights generator fills one bank subtile by subtile while the PE array
// reads the other, so weights generation overlaps the engine's processing.
// Each bank moves EMPTY -> FILLING (claim, by the generator before its first
// subtile) -> FULL (commit, after its last subtile) -> EMPTY (release, by the
// engine after the tile has been used). A tile is stored flattened in
// column-major order: element g holds row g mod T_P of column g / T_P, so a
// subtile s covers elements s*M .. s*M+M-1 (elements past T_P*T_C are
// dropped). Column-major order keeps each K*K filter contiguous when T_P is a
// multiple of K*K.
//
// Timing: writes, claim, commit and release act at the clock edge; the read
// side is combinational from the selected bank (all T_C columns of T_P words).
//
// Lint note: the assertions below use rst_n in 'disable iff' while the flops
// use it as an asynchronous reset, so lint reports rst_n as both synchronous
// and asynchronous; the assertions are not part of the circuit.
module weights_buffer import unzip_pkg::*; #(
  parameter int M   = 192,
  parameter int T_P = 18,
  parameter int T_C = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         claim,
  input  logic                         claim_bank,
  input  logic                         wr_valid,
  input  logic                         wr_bank,
  input  logic [$clog2(((T_P*T_C+M-1)/M)+1)-1:0] wr_sub,
  input  word_t [M-1:0]                wr_data,
  input  logic                         commit,
  input  logic                         commit_bank,
  input  logic                         release_,
  input  logic                         release_bank,
  output logic [1:0]                   bank_empty,
  output logic [1:0]                   bank_full,
  input  logic                         rd_bank,
  output word_t [T_C-1:0][T_P-1:0]     rd_w
);
  localparam int TE = T_P * T_C;
  localparam int NS = (TE + M - 1) / M;

  typedef enum logic [1:0] {EMPTY, FILLING, FULL} bstate_e;
  bstate_e st [2];
  word_t   mem [2][TE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st[0] <= EMPTY;
      st[1] <= EMPTY;
    end else begin
      if (claim)    st[claim_bank]   <= FILLING;
      if (commit)   st[commit_bank]  <= FULL;
      if (release_) st[release_bank] <= EMPTY;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid)
      for (int s = 0; s < NS; s++)
        if (32'(wr_sub) == s)
          for (int k = 0; k < M; k++)
            if (s * M + k < TE) mem[wr_bank][s*M + k] <= wr_data[k];
  end

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      bank_empty[b] = (st[b] == EMPTY);
      bank_full[b]  = (st[b] == FULL);
    end
    for (int c = 0; c < T_C; c++)
      for (int p = 0; p < T_P; p++)
        rd_w[c][p] = mem[rd_bank][c*T_P + p];
  end

  assert property (@(posedge clk) disable iff (!rst_n) claim |-> st[claim_bank] == EMPTY);
  assert property (@(posedge clk) disable iff (!rst_n) commit |-> st[commit_bank] == FILLING);
  assert property (@(posedge clk) disable iff (!rst_n) release_ |-> st[release_bank] == FULL);
  assert property (@(posedge clk) disable iff (!rst_n) wr_valid |-> st[wr_bank] == FILLING);
endmodule
