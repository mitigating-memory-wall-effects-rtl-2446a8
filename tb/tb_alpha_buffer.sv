// tb_alpha_buffer: writes random alphas into random (bank, row) slots of a
// small Alpha buffer, keeps a shadow copy, and checks that a row read returns
// all banks' words one cycle after rd_en.
module tb_alpha_buffer;
  import unzip_pkg::*;
  localparam int NF = 8, DEPTH = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, rd_en;
  logic [2:0] wr_bank;
  logic [3:0] wr_addr, rd_addr;
  word_t wr_data;
  word_t [NF-1:0] rd_data;
  word_t shadow [NF][DEPTH];

  alpha_buffer #(.NF(NF), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_bank, .wr_addr, .wr_data,
    .rd_en, .rd_addr, .rd_data);

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int b = 0; b < NF; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 3'(b); wr_addr = 4'(a); wr_data = word_t'($urandom);
        shadow[b][a] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      // random overwrite in the same cycle as a read of another row
      automatic int a = $urandom_range(0, DEPTH-1);
      automatic int b = $urandom_range(0, NF-1);
      automatic int w = $urandom_range(0, DEPTH-1);
      if (w == a) w = (a + 1) % DEPTH;
      rd_en = 1; rd_addr = 4'(a);
      wr_en = 1; wr_bank = 3'(b); wr_addr = 4'(w); wr_data = word_t'($urandom);
      @(negedge clk);
      shadow[b][w] = wr_data;
      rd_en = 0; wr_en = 0;
      checks++;
      for (int k = 0; k < NF; k++)
        if (rd_data[k] != shadow[k][a]) begin
          failures++; $display("mismatch bank %0d row %0d", k, a); break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
