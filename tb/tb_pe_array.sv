// tb_pe_array: 6 PEs of 3 MACs, last 3 input-selective. First a normal
// phase (all PEs on their own weight column and the shared row). Then a
// stealing phase with C' = 3 busy columns: the busy PEs forward their own
// weights every 3rd cycle, and the test checks that idle PE q at cycle t
// (t >= q) computes with weight column (q - t) mod 3 and its own activation
// row, while the busy PEs keep computing their own column.
module tb_pe_array;
  import unzip_pkg::*;
  localparam int T_P = 3, T_C = 6, T_R = 8, N_SEL = 3, CP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  word_t [T_C-1:0][T_P-1:0] w;
  word_t [T_P-1:0] act_main;
  word_t [N_SEL-1:0][T_P-1:0] act_sel;
  logic [T_C-1:0] fwd_own, in_valid, out_valid;
  logic [N_SEL-1:0] use_r;
  logic clear;
  logic [T_C-1:0][2:0] in_row, out_row;
  logic [T_C-1:0][2:0] in_col, out_col;
  acc_t [T_C-1:0] psum_in, out_psum;

  pe_array #(.T_P(T_P), .T_C(T_C), .T_R(T_R), .N_SEL(N_SEL)) dut (.clk, .rst_n, .w, .act_main,
    .act_sel, .fwd_own, .use_r, .clear, .in_valid, .in_row, .in_col, .psum_in, .out_valid,
    .out_row, .out_col, .out_psum);

  function automatic longint dotp(input word_t [T_P-1:0] a, input word_t [T_P-1:0] b);
    longint s = 0;
    for (int p = 0; p < T_P; p++) s += longint'(a[p]) * longint'(b[p]);
    return s;
  endfunction

  longint expv [T_C];

  initial begin
    fwd_own = '0; use_r = '0; clear = 1; in_valid = '0; in_row = '0; in_col = '0; psum_in = '0;
    act_main = '0; act_sel = '0;
    for (int c = 0; c < T_C; c++) for (int p = 0; p < T_P; p++) w[c][p] = word_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // normal phase
    for (int t = 0; t < 5; t++) begin
      in_valid = '1;
      for (int p = 0; p < T_P; p++) act_main[p] = word_t'($urandom);
      for (int q = 0; q < T_C; q++) expv[q] = dotp(act_main, w[q]);
      @(negedge clk);
      for (int q = 0; q < T_C; q++) begin
        checks++;
        if (out_psum[q] != acc_t'(expv[q])) begin failures++; $display("normal q%0d", q); end
      end
    end
    // stealing phase: new weight tile, schedule starts at t = 0
    for (int c = 0; c < T_C; c++) for (int p = 0; p < T_P; p++) w[c][p] = word_t'($urandom);
    use_r = '1;
    for (int t = 0; t < 20; t++) begin
      for (int q = 0; q < T_C; q++) fwd_own[q] = (q < CP) && (t % CP == 0);
      for (int p = 0; p < T_P; p++) act_main[p] = word_t'($urandom);
      for (int s = 0; s < N_SEL; s++) for (int p = 0; p < T_P; p++) act_sel[s][p] = word_t'($urandom);
      for (int q = 0; q < CP; q++) expv[q] = dotp(act_main, w[q]);
      for (int q = CP; q < T_C; q++) expv[q] = dotp(act_sel[q - CP], w[((q - t) % CP + CP) % CP]);
      @(negedge clk);
      for (int q = 0; q < T_C; q++)
        if (q < CP || t >= q) begin
          checks++;
          if (out_psum[q] != acc_t'(expv[q])) begin failures++; $display("steal t%0d q%0d", t, q); end
        end
    end
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
