// pe: one processing element of the CNN engine.
//
// A T_P-wide dot-product circuit (T_P multipliers feeding an adder tree)
// followed by the accumulating adder of the output-stationary dataflow:
// psum_out = (clear ? 0 : psum_in) + sum_p act[p]*w[p]. The running partial
// sum lives in the output buffer and comes back through psum_in, which is
// the accumulator feedback loop of the PE; "clear" marks the first P tile of
// an output tile. Row and column tags travel with the result so that a PE
// can work on any output element (needed by the input-selective PEs).
//
// Timing: one register stage; out_* are valid the cycle after in_valid.
module pe import unzip_pkg::*; #(
  parameter int T_P  = 18,
  parameter int ROWW = 6,
  parameter int COLW = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              clear,
  input  logic [ROWW-1:0]   in_row,
  input  logic [COLW-1:0]   in_col,
  input  word_t [T_P-1:0]   act,
  input  word_t [T_P-1:0]   w,
  input  acc_t              psum_in,
  output logic              out_valid,
  output logic [ROWW-1:0]   out_row,
  output logic [COLW-1:0]   out_col,
  output acc_t              psum_out
);
  // Adder tree over the T_P products (pairwise reduction, log2 levels).
  function automatic acc_t dot(input word_t [T_P-1:0] a, input word_t [T_P-1:0] b);
    acc_t lvl [T_P];
    int   n;
    for (int p = 0; p < T_P; p++) lvl[p] = acc_t'(a[p]) * acc_t'(b[p]);
    n = T_P;
    while (n > 1) begin
      for (int p = 0; p < n / 2; p++) lvl[p] = lvl[2*p] + lvl[2*p+1];
      if (n % 2 == 1) lvl[n/2] = lvl[n-1];
      n = (n + 1) / 2;
    end
    return lvl[0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
      out_col   <= '0;
      psum_out  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_row  <= in_row;
        out_col  <= in_col;
        psum_out <= (clear ? acc_t'(0) : psum_in) + dot(act, w);
      end
    end
  end
endmodule
