// tb_weights_buffer: fills both banks of a 9x4 weights buffer with M=20
// subtiles (2 subtiles, the second partial), checks the bank state machine
// (empty -> filling -> full -> empty), and checks that column c, row p of
// the read port holds flattened element c*T_P + p of the written subtiles.
module tb_weights_buffer;
  import unzip_pkg::*;
  localparam int M = 20, T_P = 9, T_C = 4, TE = T_P*T_C, NS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic claim, claim_bank, wr_valid, wr_bank, commit, commit_bank, release_, release_bank, rd_bank;
  logic [1:0] wr_sub;
  word_t [M-1:0] wr_data;
  logic [1:0] bank_empty, bank_full;
  word_t [T_C-1:0][T_P-1:0] rd_w;
  word_t ref_t [2][TE];

  weights_buffer #(.M(M), .T_P(T_P), .T_C(T_C)) dut (.clk, .rst_n, .claim, .claim_bank,
    .wr_valid, .wr_bank, .wr_sub, .wr_data, .commit, .commit_bank, .release_, .release_bank,
    .bank_empty, .bank_full, .rd_bank, .rd_w);

  task automatic fill(input int b);
    @(negedge clk); claim = 1; claim_bank = b[0];
    @(negedge clk); claim = 0;
    checks++; if (bank_empty[b] || bank_full[b]) failures++;
    for (int s = 0; s < NS; s++) begin
      wr_valid = 1; wr_bank = b[0]; wr_sub = 2'(s);
      for (int k = 0; k < M; k++) begin
        wr_data[k] = word_t'($urandom);
        if (s*M + k < TE) ref_t[b][s*M + k] = wr_data[k];
      end
      commit = (s == NS-1); commit_bank = b[0];
      @(negedge clk);
    end
    wr_valid = 0; commit = 0;
    checks++; if (!bank_full[b]) failures++;
  endtask

  task automatic check(input int b);
    rd_bank = b[0];
    #1;
    for (int c = 0; c < T_C; c++)
      for (int p = 0; p < T_P; p++) begin
        checks++;
        if (rd_w[c][p] != ref_t[b][c*T_P + p]) begin
          failures++; $display("bank %0d c%0d p%0d", b, c, p);
        end
      end
  endtask

  initial begin
    claim = 0; claim_bank = 0; wr_valid = 0; wr_bank = 0; commit = 0; commit_bank = 0;
    release_ = 0; release_bank = 0; rd_bank = 0; wr_sub = 0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (bank_empty != 2'b11) failures++;
    for (int n = 0; n < 6; n++) begin
      fill(n % 2);
      if (n > 0) begin
        check((n - 1) % 2);
        @(negedge clk); release_ = 1; release_bank = 1'((n - 1) % 2);
        @(negedge clk); release_ = 0;
        checks++; if (!bank_empty[(n-1)%2]) failures++;
      end
    end
    check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
