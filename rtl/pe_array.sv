// pe_array: T_C processing elements with input-selective PEs.
//
// Normal operation: PE q multiplies the broadcast activation row (act_main)
// with column q of the weights tile and accumulates output column q.
//
// Work stealing: when a layer has fewer output columns C' than PEs, PEs
// C'..T_C-1 would idle. Each PE q >= 1 has a register R_q fed from its upper
// neighbour's forwarding switch, which passes either that neighbour's own
// weight column or the neighbour's R register onwards:
//     fwd_q = fwd_own[q] ? w[q] : R_q,   fwd_0 = w[0],   R_q <= fwd_{q-1}.
// With fwd_own asserted on the busy PEs once every C' cycles, the weight
// columns stream down the chain so that an idle PE q sees column
// (q - t) mod C' at cycle t (t >= q), a different column every cycle. Only
// the last N_SEL PEs (those that can be idle for some layer, a design-time
// choice) have the second, dot-product input switch: with use_r set they
// take R_q as weights and their own activation row act_sel, and so compute
// extra rows of the busy columns. Which PEs get the switch, and the forward
// schedule above, are this design's reading of the paper's figure.
//
// Timing: the R chain advances every cycle; PE results are registered (one
// cycle), tagged with the output row and column they belong to.
module pe_array import unzip_pkg::*; #(
  parameter int T_P   = 18,
  parameter int T_C   = 32,
  parameter int T_R   = 32,
  parameter int N_SEL = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  word_t [T_C-1:0][T_P-1:0]            w,
  input  word_t [T_P-1:0]                     act_main,
  input  word_t [N_SEL-1:0][T_P-1:0]          act_sel,
  input  logic [T_C-1:0]                      fwd_own,
  input  logic [N_SEL-1:0]                    use_r,
  input  logic                                clear,
  input  logic [T_C-1:0]                      in_valid,
  input  logic [T_C-1:0][$clog2(T_R)-1:0]     in_row,
  input  logic [T_C-1:0][$clog2(T_C)-1:0]     in_col,
  input  acc_t [T_C-1:0]                      psum_in,
  output logic [T_C-1:0]                      out_valid,
  output logic [T_C-1:0][$clog2(T_R)-1:0]     out_row,
  output logic [T_C-1:0][$clog2(T_C)-1:0]     out_col,
  output acc_t [T_C-1:0]                      out_psum
);
  localparam int FIRST_SEL = T_C - N_SEL;

  word_t [T_C-1:0][T_P-1:0] r_chain;   // R registers (index 0 unused)
  word_t [T_C-1:0][T_P-1:0] fwd;
  word_t [T_C-1:0][T_P-1:0] pe_w;
  word_t [T_C-1:0][T_P-1:0] pe_a;

  always_comb begin
    fwd[0] = w[0];
    for (int q = 1; q < T_C; q++) fwd[q] = fwd_own[q] ? w[q] : r_chain[q];
    for (int q = 0; q < T_C; q++) begin
      pe_w[q] = w[q];
      pe_a[q] = act_main;
      if (q >= FIRST_SEL && use_r[q - FIRST_SEL]) begin
        pe_w[q] = r_chain[q];
        pe_a[q] = act_sel[q - FIRST_SEL];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < T_C; q++) r_chain[q] <= '0;
    end else begin
      r_chain[0] <= '0;
      for (int q = 1; q < T_C; q++) r_chain[q] <= fwd[q-1];
    end
  end

  for (genvar q = 0; q < T_C; q++) begin : g_pe
    pe #(.T_P(T_P), .ROWW($clog2(T_R)), .COLW($clog2(T_C))) u_pe (
      .clk, .rst_n,
      .in_valid(in_valid[q]), .clear,
      .in_row(in_row[q]), .in_col(in_col[q]),
      .act(pe_a[q]), .w(pe_w[q]), .psum_in(psum_in[q]),
      .out_valid(out_valid[q]), .out_row(out_row[q]), .out_col(out_col[q]),
      .psum_out(out_psum[q])
    );
  end
endmodule
