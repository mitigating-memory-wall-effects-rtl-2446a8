// unzip_top: CNN engine with on-the-fly weights generation.
//
// Instead of streaming weights from off-chip memory, the engine generates
// every weights tile on chip from OVSF binary codes and a small set of learnt
// coefficients (alphas), so the off-chip bandwidth is left to activations.
// Blocks: cnn_wgen (OVSF generator + Alpha buffer + M-wide multiplier/adder
// arrays + control unit) writes T_P x T_C weights tiles into the double-
// buffered weights_buffer; the host/DMA writes T_R x T_P activation tiles
// into the double-buffered input_buffer; engine_ctrl runs the pe_array (T_C
// PEs of T_P MACs, the last N_SEL of them input-selective) over each tile and
// accumulates into output_buffer, whose finished T_R x T_C tiles the host
// reads back. The three coarse stages (input transfer + weights generation,
// engine, output transfer) overlap through the double buffers.
//
// Host protocol for a layer: load the OVSF FIFO (basis_*) with the layer's nv
// basis vectors and the Alpha buffer (alpha_*), then pulse start with cfg.
// Then, for every (R tile, C tile, P tile) in that order, write the input
// tile rows and pulse in_wr_commit when in_wr_ready; whenever out_ready is
// high, read rows of the output tile (out_rt, out_ct) through out_rd_row /
// out_rd_data and pulse out_release. "done" pulses at the end of the layer.
// The off-chip memory, the DMA and the host CPU are outside this module.
//
// Default sizes are this design's choice (the evaluated configurations are
// not listed numerically): T_P=18, T_C=32 (576 MACs), M = T_P*T_C/3 = 192
// generator lanes, i.e. 768 multipliers, within a 900-DSP device.
//
// Lint note: the assertions below use rst_n in 'disable iff' while the flops
// use it as an asynchronous reset, so lint reports rst_n as both synchronous
// and asynchronous; the assertions are not part of the circuit.
module unzip_top import unzip_pkg::*; #(
  parameter int M           = 192,
  parameter int T_P         = 18,
  parameter int T_C         = 32,
  parameter int T_R         = 32,
  parameter int N_SEL       = 16,
  parameter int ALPHA_DEPTH = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  layer_cfg_t                     cfg,
  output logic                           done,
  output logic                           busy,
  // OVSF FIFO load
  input  logic                           basis_clear,
  input  logic                           basis_load_valid,
  input  logic [KMAX2-1:0]               basis_load_vec,
  // Alpha buffer load
  input  logic                           alpha_wr_en,
  input  logic [$clog2(nf_for(M))-1:0]   alpha_wr_bank,
  input  logic [$clog2(ALPHA_DEPTH)-1:0] alpha_wr_addr,
  input  word_t                          alpha_wr_data,
  // input activations (from DMA)
  input  logic                           in_wr_valid,
  input  logic [$clog2(T_R)-1:0]         in_wr_row,
  input  word_t [T_P-1:0]                in_wr_data,
  input  logic                           in_wr_commit,
  output logic                           in_wr_ready,
  // output tiles (to DMA)
  output logic                           out_ready,
  output logic [11:0]                    out_rt,
  output logic [11:0]                    out_ct,
  input  logic [$clog2(T_R)-1:0]         out_rd_row,
  output acc_t [T_C-1:0]                 out_rd_data,
  input  logic                           out_release,
  // status
  output logic                           wgen_stall,
  output logic                           eng_running,
  output logic                           eng_stealing,
  output logic                           eng_stall_w,
  output logic                           eng_stall_in,
  output logic                           eng_stall_out
);
  localparam int NS = (T_P * T_C + M - 1) / M;
  localparam int SW = $clog2(NS + 1);
  localparam int RB = $clog2(T_R);
  localparam int CB = $clog2(T_C);

  // weights buffer wiring
  logic              claim, claim_bank, wwr_valid, wwr_bank, commit, commit_bank;
  logic [SW-1:0]     wwr_sub;
  word_t [M-1:0]     wwr_data;
  logic [1:0]        w_empty, w_full;
  logic              w_rd_bank, w_release;
  word_t [T_C-1:0][T_P-1:0] w_tile;
  logic              wgen_busy, wgen_done, eng_busy, eng_done;

  // input buffer wiring
  logic [1:0]                       in_full;
  logic                             in_rd_bank, in_release;
  logic [N_SEL:0][RB-1:0]           in_rd_row;
  word_t [N_SEL:0][T_P-1:0]         in_rd_data;
  word_t [N_SEL-1:0][T_P-1:0]       act_sel;

  // PE array wiring
  logic [T_C-1:0]          pe_valid, fwd_own, pe_ovalid;
  logic [T_C-1:0][RB-1:0]  pe_row, pe_orow;
  logic [T_C-1:0][CB-1:0]  pe_col, pe_ocol;
  logic [N_SEL-1:0]        use_r;
  logic                    pe_clear;
  acc_t [T_C-1:0]          psum_rd, psum_wr;

  cnn_wgen #(.M(M), .T_P(T_P), .T_C(T_C), .ALPHA_DEPTH(ALPHA_DEPTH)) u_wgen (
    .clk, .rst_n, .start, .cfg, .busy(wgen_busy), .done(wgen_done), .stall(wgen_stall),
    .basis_clear, .basis_load_valid, .basis_load_vec,
    .alpha_wr_en, .alpha_wr_bank, .alpha_wr_addr, .alpha_wr_data,
    .bank_empty(w_empty), .claim, .claim_bank,
    .wr_valid(wwr_valid), .wr_bank(wwr_bank), .wr_sub(wwr_sub), .wr_data(wwr_data),
    .commit, .commit_bank
  );

  weights_buffer #(.M(M), .T_P(T_P), .T_C(T_C)) u_wbuf (
    .clk, .rst_n, .claim, .claim_bank,
    .wr_valid(wwr_valid), .wr_bank(wwr_bank), .wr_sub(wwr_sub), .wr_data(wwr_data),
    .commit, .commit_bank, .release_(w_release), .release_bank(w_rd_bank),
    .bank_empty(w_empty), .bank_full(w_full), .rd_bank(w_rd_bank), .rd_w(w_tile)
  );

  input_buffer #(.T_R(T_R), .T_P(T_P), .NRP(N_SEL + 1)) u_ibuf (
    .clk, .rst_n, .wr_valid(in_wr_valid), .wr_row(in_wr_row), .wr_data(in_wr_data),
    .wr_commit(in_wr_commit), .wr_ready(in_wr_ready), .bank_full(in_full),
    .rd_bank(in_rd_bank), .rd_row(in_rd_row), .rd_data(in_rd_data),
    .release_(in_release), .release_bank(in_rd_bank)
  );

  always_comb
    for (int s = 0; s < N_SEL; s++) act_sel[s] = in_rd_data[s+1];

  engine_ctrl #(.T_R(T_R), .T_C(T_C), .N_SEL(N_SEL)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy(eng_busy), .done(eng_done),
    .w_full, .w_rd_bank, .w_release,
    .in_full, .in_rd_bank, .in_release, .in_rd_row,
    .out_ready, .out_rt, .out_ct, .out_release,
    .pe_valid, .pe_row, .pe_col, .pe_clear, .fwd_own, .use_r,
    .running(eng_running), .stealing(eng_stealing),
    .stall_w(eng_stall_w), .stall_in(eng_stall_in), .stall_out(eng_stall_out)
  );

  pe_array #(.T_P(T_P), .T_C(T_C), .T_R(T_R), .N_SEL(N_SEL)) u_pes (
    .clk, .rst_n, .w(w_tile), .act_main(in_rd_data[0]), .act_sel,
    .fwd_own, .use_r, .clear(pe_clear),
    .in_valid(pe_valid), .in_row(pe_row), .in_col(pe_col), .psum_in(psum_rd),
    .out_valid(pe_ovalid), .out_row(pe_orow), .out_col(pe_ocol), .out_psum(psum_wr)
  );

  output_buffer #(.T_R(T_R), .T_C(T_C), .NP(T_C)) u_obuf (
    .clk, .rd_row(pe_row), .rd_col(pe_col), .rd_psum(psum_rd),
    .wr_valid(pe_ovalid), .wr_row(pe_orow), .wr_col(pe_ocol), .wr_psum(psum_wr),
    .host_row(out_rd_row), .host_data(out_rd_data)
  );

  // The layer is done when the engine has handed over its last output tile;
  // the generator finishes earlier by construction.
  assign done = eng_done;
  assign busy = eng_busy || wgen_busy;

  assert property (@(posedge clk) disable iff (!rst_n) wgen_done |-> eng_busy);
endmodule
