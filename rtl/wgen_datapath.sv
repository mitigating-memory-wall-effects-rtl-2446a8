// wgen_datapath: vector compute datapath of the weights generator.
//
// Two M-wide vector units. The multiplier array forms, for every element k of
// the current subtile, incr_k = code_bit_k * alpha_f(k), where code_bit is
// +1/-1 from the OVSF generator and alpha_f(k) is the coefficient of the
// filter that element k belongs to. The adder array accumulates these over
// the nv basis vectors of the subtile; "first" (basis vector 0) restarts the
// accumulators, which is the control unit's reset of the accumulators between
// subtiles. After the "last" vector the saturated 16-bit weights leave as one
// subtile.
//
// Alpha routing: element k lies in kernel number floor((phase + k) / K*K)
// of the subtile, counted from the kernel that the subtile starts in, where
// phase is the subtile's start offset inside that kernel. So each multiplier
// only ever picks between two neighbouring alpha lanes (k/K*K and k/K*K+1),
// for each supported K*K; this small fixed selection is this design's way of
// spreading the N_f parallel alphas over the M multipliers.
//
// Timing: inputs registered into the multiplier stage, then the accumulator
// stage; out_valid is high for one cycle, two cycles after the in_last input.
// The tag travels with the subtile.
module wgen_datapath import unzip_pkg::*; #(
  parameter int M     = 192,
  parameter int NF    = nf_for(192),
  parameter int TAG_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic [KSEL_W-1:0] in_ksel,
  input  logic [PH_W-1:0]   in_phase,
  input  logic [M-1:0]      in_bits,
  input  word_t [NF-1:0]    in_alpha,
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [TAG_W-1:0]  out_tag,
  output word_t [M-1:0]     out_w
);
  gen_t              prod [M];
  gen_t              acc  [M];
  logic              s1_valid, s1_first, s1_last;
  logic [TAG_W-1:0]  s1_tag;
  word_t             lane_alpha [M];

  // Alpha lane of each multiplier for the layer's kernel area and phase.
  always_comb begin
    for (int k = 0; k < M; k++) begin
      int base;
      int rem;
      lane_alpha[k] = '0;
      for (int o = 0; o < NK; o++) begin
        base = k / K2_OPT[o];
        rem  = k % K2_OPT[o];
        if (in_ksel == KSEL_W'(o)) begin
          if ((32'(in_phase) + rem) >= K2_OPT[o]) begin
            if (base + 1 < NF) lane_alpha[k] = in_alpha[base + 1];
          end else begin
            if (base < NF) lane_alpha[k] = in_alpha[base];
          end
        end
      end
    end
  end

  // Multiplier array: alpha times a +1/-1 code bit.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_tag   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= in_first;
      s1_last  <= in_last;
      s1_tag   <= in_tag;
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < M; k++) begin
      logic signed [1:0] sgn;
      sgn = in_bits[k] ? -2'sd1 : 2'sd1;
      if (in_valid) prod[k] <= gen_t'(lane_alpha[k]) * gen_t'(sgn);
    end
  end

  // Adder array with accumulators.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int k = 0; k < M; k++) acc[k] <= '0;
    end else begin
      out_valid <= s1_valid && s1_last;
      if (s1_valid && s1_last) out_tag <= s1_tag;
      if (s1_valid)
        for (int k = 0; k < M; k++)
          acc[k] <= s1_first ? prod[k] : acc[k] + prod[k];
    end
  end

  always_comb
    for (int k = 0; k < M; k++) out_w[k] = sat_word(acc[k]);
endmodule
