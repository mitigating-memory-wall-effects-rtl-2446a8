// tb_pe: random activation/weight vectors (including extreme values) through
// one PE; checks psum_out = (clear ? 0 : psum_in) + dot(act, w) one cycle
// later, and that the row/column tags follow.
module tb_pe;
  import unzip_pkg::*;
  localparam int T_P = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, clear, out_valid;
  logic [5:0] in_row, out_row;
  logic [4:0] in_col, out_col;
  word_t [T_P-1:0] act, w;
  acc_t psum_in, psum_out;

  pe #(.T_P(T_P), .ROWW(6), .COLW(5)) dut (.clk, .rst_n, .in_valid, .clear, .in_row, .in_col,
    .act, .w, .psum_in, .out_valid, .out_row, .out_col, .psum_out);

  initial begin
    in_valid = 0; clear = 0; in_row = 0; in_col = 0; act = '0; w = '0; psum_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic longint e = 0;
      in_valid = 1; clear = ($urandom_range(0, 3) == 0);
      in_row = 6'($urandom); in_col = 5'($urandom);
      psum_in = acc_t'({$urandom, $urandom}) >>> 20;
      for (int p = 0; p < T_P; p++) begin
        act[p] = (n < 10) ? word_t'(-32768) : word_t'($urandom);
        w[p]   = (n < 10) ? word_t'(-32768) : word_t'($urandom);
        e += longint'(act[p]) * longint'(w[p]);
      end
      if (!clear) e += longint'(psum_in);
      @(negedge clk);
      checks++;
      if (!out_valid || psum_out != acc_t'(e) || out_row != in_row || out_col != in_col) begin
        failures++; $display("n%0d got %0d exp %0d", n, psum_out, e);
      end
    end
    in_valid = 0;
    @(negedge clk);
    checks++; if (out_valid) failures++;
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
