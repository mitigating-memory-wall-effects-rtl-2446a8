// tb_input_buffer: writes and commits activation tiles into alternate banks,
// then reads random rows on all ports of the committed bank and compares with
// a shadow copy; checks wr_ready/bank_full and release.
module tb_input_buffer;
  import unzip_pkg::*;
  localparam int T_R = 8, T_P = 3, NRP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_valid, wr_commit, wr_ready, rd_bank, release_, release_bank;
  logic [2:0] wr_row;
  word_t [T_P-1:0] wr_data;
  logic [1:0] bank_full;
  logic [NRP-1:0][2:0] rd_row;
  word_t [NRP-1:0][T_P-1:0] rd_data;
  word_t [T_P-1:0] shadow [2][T_R];

  input_buffer #(.T_R(T_R), .T_P(T_P), .NRP(NRP)) dut (.clk, .rst_n, .wr_valid, .wr_row,
    .wr_data, .wr_commit, .wr_ready, .bank_full, .rd_bank, .rd_row, .rd_data, .release_,
    .release_bank);

  initial begin
    wr_valid = 0; wr_commit = 0; rd_bank = 0; release_ = 0; release_bank = 0; wr_row = 0;
    wr_data = '0; rd_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      automatic int b = n % 2;
      @(negedge clk);
      checks++; if (!wr_ready) failures++;
      for (int r = 0; r < T_R; r++) begin
        wr_valid = 1; wr_row = 3'(r);
        for (int p = 0; p < T_P; p++) wr_data[p] = word_t'($urandom);
        shadow[b][r] = wr_data;
        @(negedge clk);
      end
      wr_valid = 0; wr_commit = 1;
      @(negedge clk); wr_commit = 0;
      checks++; if (!bank_full[b]) failures++;
      rd_bank = b[0];
      for (int k = 0; k < 10; k++) begin
        for (int q = 0; q < NRP; q++) rd_row[q] = 3'($urandom_range(0, T_R-1));
        #1;
        for (int q = 0; q < NRP; q++) begin
          checks++;
          if (rd_data[q] != shadow[b][rd_row[q]]) begin failures++; $display("n%0d q%0d", n, q); end
        end
        @(negedge clk);
      end
      release_ = 1; release_bank = b[0];
      @(negedge clk); release_ = 0;
      checks++; if (bank_full[b]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
