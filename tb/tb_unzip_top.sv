// tb_unzip_top: end-to-end test of unzip_top at reduced sizes (M=12, T_P=9, T_C=4, T_R=4, N_SEL=2).
//
// The testbench plays host, DMA and off-chip memory. For each layer it draws
// random alphas A[c][n][j] and activations X[r][p], builds the reference
// weights W[p][c] = sat16(sum_j (+/-1 from OVSF code j at kernel position
// p mod K*K) * A[c][p / K*K][j]) and the reference output
// O[r][c] = sum_p X[r][p] * W[p][c], loads the OVSF FIFO and the Alpha
// buffer in the layout the generator expects, then streams input tiles in
// (R tile, C tile, P tile) order and checks every valid element of every
// output tile. Layers: a 3x3 OVSF layer whose last C tile is short (work
// stealing) and a 1x1 raw-weight layer, so the kernel-size option switches.
// Random host delays make the engine stall on inputs and on output drain;
// the generator stalls when both weight banks are full. Each of these
// mechanisms is counted and must occur at least once.
module tb_unzip_top;
  import unzip_pkg::*;
  localparam int M = 12, T_P = 9, T_C = 4, T_R = 4, N_SEL = 2, AD = 256;
  localparam int MAXC = 16, MAXN = 16, MAXR = 16, MAXP = 32;
  localparam int NS = (T_P*T_C + M - 1) / M;
  localparam int NF = nf_for(M);
  localparam int RB = $clog2(T_R);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done, busy;
  layer_cfg_t cfg;
  logic basis_clear, basis_load_valid;
  logic [KMAX2-1:0] basis_load_vec;
  logic alpha_wr_en;
  logic [$clog2(NF)-1:0] alpha_wr_bank;
  logic [$clog2(AD)-1:0] alpha_wr_addr;
  word_t alpha_wr_data;
  logic in_wr_valid, in_wr_commit, in_wr_ready;
  logic [RB-1:0] in_wr_row;
  word_t [T_P-1:0] in_wr_data;
  logic out_ready, out_release;
  logic [11:0] out_rt, out_ct;
  logic [RB-1:0] out_rd_row;
  acc_t [T_C-1:0] out_rd_data;
  logic wgen_stall, eng_running, eng_stealing, eng_stall_w, eng_stall_in, eng_stall_out;

  unzip_top #(.M(M), .T_P(T_P), .T_C(T_C), .T_R(T_R), .N_SEL(N_SEL), .ALPHA_DEPTH(AD)) dut (
    .clk, .rst_n, .start, .cfg, .done, .busy,
    .basis_clear, .basis_load_valid, .basis_load_vec,
    .alpha_wr_en, .alpha_wr_bank, .alpha_wr_addr, .alpha_wr_data,
    .in_wr_valid, .in_wr_row, .in_wr_data, .in_wr_commit, .in_wr_ready,
    .out_ready, .out_rt, .out_ct, .out_rd_row, .out_rd_data, .out_release,
    .wgen_stall, .eng_running, .eng_stealing, .eng_stall_w, .eng_stall_in, .eng_stall_out);

  // layer under test
  int k2, nv, nin, P, C, R, npt, nct, nrt;
  logic [KMAX2-1:0] basis [KMAX2];
  word_t A [MAXC][MAXN][KMAX2];
  word_t X [MAXR][MAXP];
  word_t W [MAXP][MAXC];
  longint O [MAXR][MAXC];

  int n_wgen_stall = 0, n_stall_w = 0, n_stall_in = 0, n_stall_out = 0, n_steal = 0;
  int n_k3 = 0, n_k1 = 0, n_tiles_checked = 0, cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_wgen_stall += wgen_stall; n_stall_w += eng_stall_w; n_stall_in += eng_stall_in;
    n_stall_out += eng_stall_out; n_steal += eng_stealing;
  end

  task automatic build_layer(input int sel, input int nvv, input int nin_, input int c_,
                             input int r_);
    k2 = K2_OPT[sel]; nv = nvv; nin = nin_; C = c_; R = r_; P = nin * k2;
    npt = (P + T_P - 1) / T_P; nct = (C + T_C - 1) / T_C; nrt = (R + T_R - 1) / T_R;
    for (int j = 0; j < nv; j++)
      for (int n = 0; n < KMAX2; n++)
        basis[j][n] = (k2 == 9) ? ovsf_bit((j * 3 + 1) % 16, (n / 3) * 4 + (n % 3)) : 1'b0;
    for (int c = 0; c < C; c++)
      for (int n = 0; n < nin; n++)
        for (int j = 0; j < nv; j++) A[c][n][j] = word_t'($urandom_range(0, 4000) - 2000);
    for (int r = 0; r < R; r++)
      for (int p = 0; p < P; p++) X[r][p] = word_t'($urandom_range(0, 4000) - 2000);
    for (int p = 0; p < P; p++)
      for (int c = 0; c < C; c++) begin
        automatic longint e = 0;
        for (int j = 0; j < nv; j++)
          e += basis[j][p % k2] ? -longint'(A[c][p / k2][j]) : longint'(A[c][p / k2][j]);
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        W[p][c] = word_t'(e);
      end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        O[r][c] = 0;
        for (int p = 0; p < P; p++) O[r][c] += longint'(X[r][p]) * longint'(W[p][c]);
      end
  endtask

  task automatic load_layer(input int base);
    @(negedge clk) basis_clear = 1;
    @(negedge clk) basis_clear = 0;
    for (int j = 0; j < nv; j++) begin
      basis_load_valid = 1; basis_load_vec = basis[j];
      @(negedge clk);
    end
    basis_load_valid = 0;
    for (int ct = 0; ct < nct; ct++)
      for (int pt = 0; pt < npt; pt++)
        for (int i = 0; i < NS; i++)
          for (int j = 0; j < nv; j++) begin
            automatic int first = (i * M) / k2;
            automatic int lastk = (i * M + M - 1) / k2;
            if (lastk > T_P * T_C / k2 - 1) lastk = T_P * T_C / k2 - 1;
            for (int kk = first; kk <= lastk; kk++) begin
              automatic int cl = (kk * k2) / T_P;
              automatic int kin = ((kk * k2) % T_P) / k2;
              automatic int cg = ct * T_C + cl;
              automatic int ng = pt * (T_P / k2) + kin;
              if (cg < C && ng < nin) begin
                alpha_wr_en = 1;
                alpha_wr_bank = $clog2(NF)'(kk - first);
                alpha_wr_addr = $clog2(AD)'(base + ((ct * npt + pt) * NS + i) * nv + j);
                alpha_wr_data = A[cg][ng][j];
                @(negedge clk);
              end
            end
          end
    alpha_wr_en = 0;
  endtask

  task automatic feed_inputs(input int maxd);
    for (int rt = 0; rt < nrt; rt++)
      for (int ct = 0; ct < nct; ct++)
        for (int pt = 0; pt < npt; pt++) begin
          repeat ($urandom_range(0, maxd)) @(negedge clk);
          while (!in_wr_ready) @(negedge clk);
          for (int rr = 0; rr < T_R; rr++) begin
            in_wr_valid = 1; in_wr_row = RB'(rr);
            for (int pp = 0; pp < T_P; pp++) begin
              automatic int r = rt * T_R + rr, p = pt * T_P + pp;
              in_wr_data[pp] = (r < R && p < P) ? X[r][p] : word_t'(0);
            end
            @(negedge clk);
          end
          in_wr_valid = 0; in_wr_commit = 1;
          @(negedge clk) in_wr_commit = 0;
        end
  endtask

  task automatic drain_outputs(input int maxd);
    for (int t = 0; t < nrt * nct; t++) begin
      automatic int ert = t / nct, ect = t % nct;
      while (!out_ready) @(negedge clk);
      repeat ($urandom_range(0, maxd)) @(negedge clk);
      checks++;
      if (int'(out_rt) != ert || int'(out_ct) != ect) begin
        failures++; $display("tile order %0d,%0d exp %0d,%0d", out_rt, out_ct, ert, ect);
      end
      for (int rr = 0; rr < T_R; rr++) begin
        out_rd_row = RB'(rr);
        #1;
        for (int cc = 0; cc < T_C; cc++) begin
          automatic int r = ert * T_R + rr, c = ect * T_C + cc;
          if (r < R && c < C) begin
            checks++;
            if (out_rd_data[cc] != acc_t'(O[r][c])) begin
              failures++;
              if (failures < 10) $display("O[%0d][%0d] got %0d exp %0d", r, c, out_rd_data[cc], O[r][c]);
            end
          end
        end
      end
      n_tiles_checked++;
      @(negedge clk) out_release = 1;
      @(negedge clk) out_release = 0;
    end
  endtask

  task automatic run_layer(input int sel, input int nvv, input int nin_, input int c_, input int r_,
                           input int steal, input int base, input int maxd);
    layer_cfg_t c = '0;
    build_layer(sel, nvv, nin_, c_, r_);
    load_layer(base);
    c.ksel = KSEL_W'(sel); c.nv = NV_W'(nvv);
    c.n_ptiles = 12'(npt); c.n_ctiles = 12'(nct); c.n_rtiles = 12'(nrt);
    c.c_last = 8'(C - (nct - 1) * T_C); c.r_last = 8'(R - (nrt - 1) * T_R);
    c.steal_rows = 8'(steal); c.alpha_base = 20'(base);
    @(negedge clk) cfg = c; start = 1;
    @(negedge clk) start = 0;
    fork
      feed_inputs(maxd);
      drain_outputs(maxd);
    join
    while (busy) @(negedge clk);
    if (sel == 0) n_k3++; else n_k1++;
  endtask

  initial begin
    start = 0; cfg = '0; basis_clear = 0; basis_load_valid = 0; basis_load_vec = '0;
    alpha_wr_en = 0; alpha_wr_bank = '0; alpha_wr_addr = '0; alpha_wr_data = '0;
    in_wr_valid = 0; in_wr_commit = 0; in_wr_row = '0; in_wr_data = '0;
    out_release = 0; out_rd_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 3x3 OVSF layer: P = 27 (3 P tiles), C = 7 (last C tile 3 wide), R = 6
    run_layer(0, 2, 3, 7, 6, 1, 0, 12);
    // 1x1 raw-weight layer: P = 9, C = 6 (last C tile 2 wide), R = 5
    run_layer(1, 1, 9, 6, 5, 1, 64, 6);
    // 3x3 layer with all 9 codes, full-width tiles
    run_layer(0, 9, 2, 8, 8, 0, 128, 3);
    $display("mechanisms: wgen stall %0d, engine stall on weights %0d / inputs %0d / output %0d, stealing %0d, 3x3 layers %0d, 1x1 layers %0d, tiles %0d, cycles %0d",
             n_wgen_stall, n_stall_w, n_stall_in, n_stall_out, n_steal, n_k3, n_k1, n_tiles_checked, cycles);
    checks++; if (n_wgen_stall == 0) begin failures++; $display("no generator stall"); end
    checks++; if (n_stall_w == 0)    begin failures++; $display("no engine stall on weights"); end
    checks++; if (n_stall_in == 0)   begin failures++; $display("no engine stall on inputs"); end
    checks++; if (n_stall_out == 0)  begin failures++; $display("no engine stall on output"); end
    checks++; if (n_steal == 0)      begin failures++; $display("no work stealing"); end
    checks++; if (n_k3 == 0 || n_k1 == 0) begin failures++; $display("no kernel-size switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
