// tb_cnn_wgen: the weights generator on a small configuration (M=20,
// T_P=9, T_C=4, so a tile has 36 elements in 2 subtiles). For a 3x3 OVSF
// layer (nv = 3 of the 16 Sylvester codes, cropped to 3x3) and a 1x1 layer
// (K=1, alpha = raw weight) it loads the OVSF FIFO and the Alpha buffer in
// the documented layout, models the weights buffer, and checks every
// committed tile element against sum_j (+/-)alpha, recomputed here. It also
// checks the tile order (R, C, P loops) and the rate: consecutive commits are
// NS*nv cycles apart plus the cycles the generator was stalled in between.
module tb_cnn_wgen;
  import unzip_pkg::*;
  localparam int M = 20, T_P = 9, T_C = 4, AD = 64, TE = 36, NS = 2;
  localparam int NF = nf_for(M);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, stall;
  layer_cfg_t cfg;
  logic basis_clear, basis_load_valid;
  logic [KMAX2-1:0] basis_load_vec;
  logic alpha_wr_en;
  logic [$clog2(NF)-1:0] alpha_wr_bank;
  logic [$clog2(AD)-1:0] alpha_wr_addr;
  word_t alpha_wr_data;
  logic [1:0] bank_empty;
  logic claim, claim_bank, wr_valid, wr_bank, commit, commit_bank;
  logic [1:0] wr_sub;
  word_t [M-1:0] wr_data;

  cnn_wgen #(.M(M), .T_P(T_P), .T_C(T_C), .ALPHA_DEPTH(AD)) dut (.clk, .rst_n, .start, .cfg,
    .busy, .done, .stall, .basis_clear, .basis_load_valid, .basis_load_vec, .alpha_wr_en,
    .alpha_wr_bank, .alpha_wr_addr, .alpha_wr_data, .bank_empty, .claim, .claim_bank,
    .wr_valid, .wr_bank, .wr_sub, .wr_data, .commit, .commit_bank);

  // Reference data
  int    k2, nv, ntiles;
  logic [KMAX2-1:0] basis [KMAX2];
  word_t alpha [8][TE][KMAX2];     // [tile][kernel][j]
  word_t tilemem [2][TE];
  int    bst [2];                   // 0 empty, 1 filling, 2 full
  int    rel_delay [2];
  logic [2:0] stall_d = '0;  // stall seen at the commit side: 3-cycle pipeline
  int    commits, stalls_since, last_commit_cyc, cyc, max_delay;

  assign bank_empty = {bst[1] == 0, bst[0] == 0};

  always @(posedge clk) begin
    cyc <= cyc + 1;
    stall_d <= {stall_d[1:0], stall};
    if (stall_d[2]) stalls_since <= stalls_since + 1;
    if (claim) bst[claim_bank] <= 1;
    if (wr_valid)
      for (int k = 0; k < M; k++)
        if (int'(wr_sub)*M + k < TE) tilemem[wr_bank][int'(wr_sub)*M + k] = wr_data[k];
    for (int b = 0; b < 2; b++)
      if (bst[b] == 2) begin
        if (rel_delay[b] == 0) bst[b] <= 0; else rel_delay[b] <= rel_delay[b] - 1;
      end
    if (commit) begin
      automatic int tile = commits % ntiles;
      bst[commit_bank] <= 2;
      rel_delay[commit_bank] <= $urandom_range(0, max_delay);
      for (int g = 0; g < TE; g++) begin
        automatic longint e = 0;
        for (int j = 0; j < nv; j++)
          e += basis[j][g % k2] ? -longint'(alpha[tile][g / k2][j]) : longint'(alpha[tile][g / k2][j]);
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (tilemem[commit_bank][g] != word_t'(e)) begin
          failures++; $display("tile %0d g%0d got %0d exp %0d", commits, g, tilemem[commit_bank][g], e);
        end
      end
      if (commits > 0) begin
        checks++;
        if (cyc - last_commit_cyc != NS*nv + stalls_since) begin
          failures++; $display("commit interval %0d exp %0d", cyc - last_commit_cyc, NS*nv + stalls_since);
        end
      end
      stalls_since <= stall_d[2];
      last_commit_cyc <= cyc;
      commits++;
    end
  end

  task automatic run_layer(input int sel, input int nvv, input int npt, input int nct, input int nrt,
                           input int base, input int maxd);
    layer_cfg_t c = '0;
    k2 = K2_OPT[sel]; nv = nvv; ntiles = npt * nct; max_delay = maxd;
    // basis vectors: codes 0, 5, 10, ... of length 16, cropped to 3x3 (K=3)
    for (int j = 0; j < nv; j++)
      for (int n = 0; n < KMAX2; n++)
        basis[j][n] = (k2 == 9) ? ovsf_bit((j * 5) % 16, (n / 3) * 4 + (n % 3)) : 1'b0;
    @(negedge clk) basis_clear = 1;
    @(negedge clk) basis_clear = 0;
    for (int j = 0; j < nv; j++) begin
      basis_load_valid = 1; basis_load_vec = basis[j];
      @(negedge clk);
    end
    basis_load_valid = 0;
    // alphas and their Alpha-buffer layout
    for (int t = 0; t < ntiles; t++)
      for (int kk = 0; kk < TE / k2; kk++)
        for (int j = 0; j < nv; j++) alpha[t][kk][j] = word_t'($urandom_range(0, 20000) - 10000);
    for (int t = 0; t < ntiles; t++)
      for (int i = 0; i < NS; i++)
        for (int j = 0; j < nv; j++) begin
          automatic int first = (i * M) / k2;
          automatic int lastk = (i * M + M - 1) / k2;
          if (lastk > TE / k2 - 1) lastk = TE / k2 - 1;
          for (int kk = first; kk <= lastk; kk++) begin
            alpha_wr_en = 1;
            alpha_wr_bank = $clog2(NF)'(kk - first);
            alpha_wr_addr = $clog2(AD)'(base + (t * NS + i) * nv + j);
            alpha_wr_data = alpha[t][kk][j];
            @(negedge clk);
          end
        end
    alpha_wr_en = 0;
    c.ksel = KSEL_W'(sel); c.nv = NV_W'(nv); c.n_ptiles = 12'(npt); c.n_ctiles = 12'(nct);
    c.n_rtiles = 12'(nrt); c.alpha_base = 20'(base);
    commits = 0;
    cfg = c; start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (commits != npt * nct * nrt) begin failures++; $display("commits %0d", commits); end
  endtask

  initial begin
    start = 0; cfg = '0; basis_clear = 0; basis_load_valid = 0; basis_load_vec = '0;
    alpha_wr_en = 0; alpha_wr_bank = '0; alpha_wr_addr = '0; alpha_wr_data = '0;
    bst = '{0, 0}; rel_delay = '{0, 0}; cyc = 0; stalls_since = 0; commits = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(0, 3, 2, 2, 2, 5, 0);    // 3x3 OVSF, consumer always ready
    run_layer(0, 9, 3, 1, 2, 0, 20);   // 3x3, all 9 codes, slow consumer (stalls)
    run_layer(1, 1, 2, 2, 1, 3, 5);    // 1x1 raw weights
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
