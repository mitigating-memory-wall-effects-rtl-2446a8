// tb_engine_ctrl: runs the engine controller (T_R=8, T_C=6, N_SEL=3) through
// two layers with modelled buffers that become ready after random delays.
// For every P tile it checks that each valid output element (row < Rv,
// column < C') is issued to exactly one PE exactly once and nothing else;
// that a stealing PE q works on column (q - t) mod C' (the column the weight
// chain delivers at cycle t) and reads its own activation row; that clear is
// set only on the first P tile; and that the tile's RUN length equals the
// schedule's last busy cycle + 2, computed here from the row-assignment rule.
module tb_engine_ctrl;
  import unzip_pkg::*;
  localparam int T_R = 8, T_C = 6, N_SEL = 3, FS = T_C - N_SEL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_steal = 0, n_stall_w = 0, n_stall_in = 0, n_stall_out = 0;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic [1:0] w_full, in_full;
  logic w_rd_bank, w_release, in_rd_bank, in_release, out_ready, out_release;
  logic [N_SEL:0][2:0] in_rd_row;
  logic [11:0] out_rt, out_ct;
  logic [T_C-1:0] pe_valid, fwd_own;
  logic [T_C-1:0][2:0] pe_row, pe_col;
  logic pe_clear, running, stealing, stall_w, stall_in, stall_out;
  logic [N_SEL-1:0] use_r;

  engine_ctrl #(.T_R(T_R), .T_C(T_C), .N_SEL(N_SEL)) dut (.clk, .rst_n, .start, .cfg, .busy,
    .done, .w_full, .w_rd_bank, .w_release, .in_full, .in_rd_bank, .in_release, .in_rd_row,
    .out_ready, .out_rt, .out_ct, .out_release, .pe_valid, .pe_row, .pe_col, .pe_clear,
    .fwd_own, .use_r, .running, .stealing, .stall_w, .stall_in, .stall_out);

  // Buffer models: a released bank refills after a random delay.
  int wdelay [2], idelay [2];
  always @(posedge clk) begin
    for (int b = 0; b < 2; b++) begin
      if (w_release && w_rd_bank == b[0]) begin w_full[b] <= 0; wdelay[b] <= $urandom_range(1, 12); end
      else if (!w_full[b]) begin if (wdelay[b] == 0) w_full[b] <= 1; else wdelay[b] <= wdelay[b] - 1; end
      if (in_release && in_rd_bank == b[0]) begin in_full[b] <= 0; idelay[b] <= $urandom_range(1, 12); end
      else if (!in_full[b]) begin if (idelay[b] == 0) in_full[b] <= 1; else idelay[b] <= idelay[b] - 1; end
    end
  end

  // Output hand-off model.
  int odelay = 0;
  always @(posedge clk) begin
    out_release <= 0;
    if (out_ready && !out_release) begin
      if (odelay == 0) begin out_release <= 1; odelay <= $urandom_range(0, 15); end
      else odelay <= odelay - 1;
    end
  end

  // Per-tile bookkeeping.
  int hits [T_R][T_C];
  int t_cyc, cur_cp, cur_rv, cur_pt, exp_pt;
  logic prev_running;
  layer_cfg_t lc;
  int ert, ect;

  function automatic int ref_run(input int cp, input int rv, input int sr);
    int ni = (T_C - cp > N_SEL) ? N_SEL : T_C - cp;
    bit st = (ni != 0) && (sr != 0);
    int srr = (sr > rv) ? rv : sr;
    int ta = st ? rv - srr : rv;
    int last = ta - 1;
    if (st)
      for (int e = 0; e < ni; e++) begin
        int q = T_C - ni + e;
        for (int k = 0; ta + e + ni*k < rv; k++)
          if (q + (k+1)*cp - 1 > last) last = q + (k+1)*cp - 1;
      end
    return last + 2;
  endfunction

  always @(posedge clk) if (rst_n) begin
    n_stall_w += stall_w; n_stall_in += stall_in; n_stall_out += stall_out;
    if (running && !prev_running) begin
      t_cyc = 0;
      cur_cp = (ect == lc.n_ctiles - 1) ? lc.c_last : T_C;
      cur_rv = (ert == lc.n_rtiles - 1) ? lc.r_last : T_R;
      for (int r = 0; r < T_R; r++) for (int c = 0; c < T_C; c++) hits[r][c] = 0;
      checks++; if (pe_clear != (exp_pt == 0)) begin failures++; $display("clear flag"); end
    end
    if (running) begin
      if (stealing) n_steal++;
      for (int q = 0; q < T_C; q++)
        if (pe_valid[q]) begin
          hits[pe_row[q]][pe_col[q]]++;
          if (q >= FS && use_r[q - FS]) begin
            checks++;
            if (int'(pe_col[q]) != ((q - t_cyc) % cur_cp + cur_cp) % cur_cp ||
                in_rd_row[q - FS + 1] != pe_row[q]) begin
              failures++; $display("steal col/row q%0d t%0d", q, t_cyc);
            end
          end else begin
            checks++;
            if (int'(pe_col[q]) != q || in_rd_row[0] != pe_row[q]) begin
              failures++; $display("normal col/row q%0d", q);
            end
          end
        end
      t_cyc++;
    end
    if (!running && prev_running) begin
      checks++;
      for (int r = 0; r < T_R; r++)
        for (int c = 0; c < T_C; c++)
          if (hits[r][c] != ((r < cur_rv && c < cur_cp) ? 1 : 0)) begin
            failures++; $display("coverage r%0d c%0d = %0d", r, c, hits[r][c]);
          end
      checks++;
      if (t_cyc != ref_run(cur_cp, cur_rv, lc.steal_rows)) begin
        failures++; $display("run length %0d exp %0d", t_cyc, ref_run(cur_cp, cur_rv, lc.steal_rows));
      end
      exp_pt++;
      if (exp_pt == lc.n_ptiles) begin
        exp_pt = 0; ect++;
        if (ect == lc.n_ctiles) begin ect = 0; ert++; end
      end
    end
    prev_running <= running;
  end

  task automatic run_layer(input layer_cfg_t c);
    lc = c; ert = 0; ect = 0; exp_pt = 0;
    @(negedge clk); cfg = c; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++; if (ert != c.n_rtiles) begin failures++; $display("tile count"); end
  endtask

  initial begin
    start = 0; cfg = '0; w_full = 0; in_full = 0; wdelay = '{0, 0}; idelay = '{0, 0};
    prev_running = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    begin
      layer_cfg_t c = '0;
      c.n_ptiles = 2; c.n_ctiles = 2; c.n_rtiles = 2; c.c_last = 2; c.r_last = 5; c.steal_rows = 2;
      run_layer(c);
      c.c_last = 1; c.r_last = 8; c.steal_rows = 4;
      run_layer(c);
      c.n_ptiles = 3; c.c_last = 6; c.r_last = 3; c.steal_rows = 0;
      run_layer(c);
      c.n_ptiles = 1; c.n_ctiles = 1; c.c_last = 4; c.r_last = 7; c.steal_rows = 3;
      run_layer(c);
    end
    checks++; if (n_steal == 0 || n_stall_w == 0 || n_stall_in == 0 || n_stall_out == 0) begin
      failures++; $display("mechanism not seen");
    end
    $display("stealing cycles %0d, stalls w/in/out %0d/%0d/%0d", n_steal, n_stall_w, n_stall_in, n_stall_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
