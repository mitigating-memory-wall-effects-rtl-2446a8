// engine_ctrl: schedules the CNN engine (PE array, input/weights/output
// buffers) for one layer, including the input-selective PE work stealing.
//
// Order: for each R tile, for each C tile (one output tile), for each P tile
// the engine waits until the weights tile and the input tile are both in
// their buffers (and, at the first P tile, until the host has drained the
// previous output tile), runs the tile, spends one bubble cycle and then
// releases both buffers. Within a tile the Valid rows (Rv) of the input tile
// are pipelined through the array, one row per cycle; all busy PEs share the
// row, so a tile takes Rv cycles without stealing.
//
// Stealing (this design's concrete schedule for the paper's mechanism): when
// the tile has C' < T_C valid columns, the I = min(T_C - C', N_SEL) last PEs
// join in. The busy PEs 0..C'-1 process rows 0..T_A-1 (T_A = Rv -
// cfg.steal_rows); stealing PE number e (position q) starts at cycle q, sees
// weight column (q - t) mod C' at cycle t through the forwarding chain, and
// spends C' cycles on each of its rows T_A+e, T_A+e+I, ... so it finishes one
// row for all C' columns every C' cycles. The host picks steal_rows to
// balance T_A against the stealing PEs' finishing time.
//
// Timing: a tile occupies RUN for (last valid cycle + 2) cycles, then one
// BUBBLE cycle (lets the last partial sums land before the next tile reads
// them). "done" pulses after the last output tile has been released.
//
// The column outputs (pe_col) of the PEs without a switch always name the
// PE's own column, so those bits are constants by design.
//
// Lint note: the assertions below use rst_n in 'disable iff' while the flops
// use it as an asynchronous reset, so lint reports rst_n as both synchronous
// and asynchronous; the assertions are not part of the circuit.
module engine_ctrl import unzip_pkg::*; #(
  parameter int T_R   = 32,
  parameter int T_C   = 32,
  parameter int N_SEL = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  layer_cfg_t                        cfg,
  output logic                              busy,
  output logic                              done,
  // weights buffer
  input  logic [1:0]                        w_full,
  output logic                              w_rd_bank,
  output logic                              w_release,
  // input buffer
  input  logic [1:0]                        in_full,
  output logic                              in_rd_bank,
  output logic                              in_release,
  output logic [N_SEL:0][$clog2(T_R)-1:0]   in_rd_row,
  // output tile hand-off
  output logic                              out_ready,
  output logic [11:0]                       out_rt,
  output logic [11:0]                       out_ct,
  input  logic                              out_release,
  // PE array control
  output logic [T_C-1:0]                    pe_valid,
  output logic [T_C-1:0][$clog2(T_R)-1:0]   pe_row,
  output logic [T_C-1:0][$clog2(T_C)-1:0]   pe_col,
  output logic                              pe_clear,
  output logic [T_C-1:0]                    fwd_own,
  output logic [N_SEL-1:0]                  use_r,
  // status
  output logic                              running,
  output logic                              stealing,
  output logic                              stall_w,
  output logic                              stall_in,
  output logic                              stall_out
);
  localparam int FIRST_SEL = T_C - N_SEL;
  localparam int RB = $clog2(T_R);
  localparam int CB = $clog2(T_C);

  typedef enum logic [2:0] {IDLE, WAIT, RUN, BUBBLE, FINISH} state_e;
  state_e state;

  layer_cfg_t  c;
  logic [11:0] rt, ct, pt;
  logic        wrb, irb, out_pending;
  logic [15:0] t, tmod, cp, rv, ta, ni, base_q;
  logic        steal;
  logic [15:0] srow [N_SEL];
  logic [15:0] scol [N_SEL];
  logic [15:0] scol_nx [N_SEL];   // column a stealing PE takes next
  logic [N_SEL-1:0] part;

  // Tile geometry of the tile about to start.
  logic [15:0] cp_n, rv_n, ta_n, ni_n, sr_n;
  logic        steal_n;
  always_comb begin
    cp_n    = (ct == c.n_ctiles - 1'b1) ? 16'(c.c_last) : 16'(T_C);
    rv_n    = (rt == c.n_rtiles - 1'b1) ? 16'(c.r_last) : 16'(T_R);
    ni_n    = (16'(T_C) - cp_n > 16'(N_SEL)) ? 16'(N_SEL) : 16'(T_C) - cp_n;
    steal_n = (ni_n != 0) && (c.steal_rows != 0);
    sr_n    = (16'(c.steal_rows) > rv_n) ? rv_n : 16'(c.steal_rows);
    ta_n    = steal_n ? rv_n - sr_n : rv_n;
  end

  logic go, last_pt, any_pending;
  assign last_pt = (pt == c.n_ptiles - 1'b1);
  assign go = (state == WAIT) && w_full[wrb] && in_full[irb] && !(pt == 0 && out_pending);

  always_comb begin
    any_pending = (t < ta);
    for (int s = 0; s < N_SEL; s++)
      if (part[s]) begin
        if (t < 16'(FIRST_SEL + s)) begin
          if (ta + 16'(FIRST_SEL + s) - base_q < rv) any_pending = 1'b1;
        end else if (srow[s] < rv) any_pending = 1'b1;
      end
  end

  // PE and buffer control for the current cycle.
  always_comb begin
    pe_valid = '0;
    pe_row   = '0;
    pe_col   = '0;
    fwd_own  = '0;
    use_r    = '0;
    in_rd_row = '0;
    in_rd_row[0] = RB'(t);
    for (int q = 0; q < T_C; q++) begin
      pe_row[q] = RB'(t);
      pe_col[q] = CB'(q);
      if (state == RUN && 16'(q) < cp && t < ta) pe_valid[q] = 1'b1;
      if (16'(q) < cp && tmod == 0) fwd_own[q] = 1'b1;
    end
    for (int s = 0; s < N_SEL; s++)
      if (part[s]) begin
        use_r[s] = 1'b1;
        in_rd_row[s+1] = RB'(srow[s]);
        pe_row[FIRST_SEL + s] = RB'(srow[s]);
        pe_col[FIRST_SEL + s] = CB'(scol[s]);
        if (state == RUN && t >= 16'(FIRST_SEL + s) && srow[s] < rv)
          pe_valid[FIRST_SEL + s] = 1'b1;
      end
  end

  assign pe_clear   = (pt == 0);
  assign w_rd_bank  = wrb;
  assign in_rd_bank = irb;
  assign w_release  = (state == BUBBLE);
  assign in_release = (state == BUBBLE);
  assign out_ready  = out_pending;
  assign busy       = (state != IDLE);
  assign running    = (state == RUN);
  assign stealing   = (state == RUN) && steal;
  assign stall_w    = (state == WAIT) && !w_full[wrb];
  assign stall_in   = (state == WAIT) && !in_full[irb];
  assign stall_out  = (state == WAIT) && (pt == 0) && out_pending;

  always_comb
    for (int s = 0; s < N_SEL; s++)
      scol_nx[s] = (scol[s] == 0) ? cp - 1'b1 : scol[s] - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      c <= '0;
      rt <= '0; ct <= '0; pt <= '0;
      wrb <= 1'b0; irb <= 1'b0; out_pending <= 1'b0;
      out_rt <= '0; out_ct <= '0;
      t <= '0; tmod <= '0; cp <= '0; rv <= '0; ta <= '0; ni <= '0; base_q <= '0;
      steal <= 1'b0; part <= '0;
      done <= 1'b0;
      for (int s = 0; s < N_SEL; s++) begin
        srow[s] <= '0;
        scol[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (out_release) out_pending <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= WAIT;
          c <= cfg;
          rt <= '0; ct <= '0; pt <= '0;
        end
        WAIT: if (go) begin
          state <= RUN;
          t <= '0; tmod <= '0;
          cp <= cp_n; rv <= rv_n; ta <= ta_n; ni <= ni_n; steal <= steal_n;
          base_q <= (cp_n > 16'(FIRST_SEL)) ? cp_n : 16'(FIRST_SEL);
          for (int s = 0; s < N_SEL; s++) begin
            part[s] <= steal_n && (16'(FIRST_SEL + s) >= cp_n);
            srow[s] <= ta_n + 16'(FIRST_SEL + s) -
                       ((cp_n > 16'(FIRST_SEL)) ? cp_n : 16'(FIRST_SEL));
            scol[s] <= '0;
          end
        end
        RUN: begin
          t    <= t + 1'b1;
          tmod <= (tmod == cp - 1'b1) ? '0 : tmod + 1'b1;
          for (int s = 0; s < N_SEL; s++)
            if (part[s] && t >= 16'(FIRST_SEL + s)) begin
              scol[s] <= scol_nx[s];
              if (scol_nx[s] == 0) srow[s] <= srow[s] + ni;
            end
          if (!any_pending) state <= BUBBLE;
        end
        BUBBLE: begin
          wrb  <= ~wrb;
          irb  <= ~irb;
          part <= '0;
          state <= WAIT;
          if (!last_pt) pt <= pt + 1'b1;
          else begin
            pt <= '0;
            out_pending <= 1'b1;
            out_rt <= rt;
            out_ct <= ct;
            if (ct != c.n_ctiles - 1'b1) ct <= ct + 1'b1;
            else begin
              ct <= '0;
              if (rt != c.n_rtiles - 1'b1) rt <= rt + 1'b1;
              else state <= FINISH;
            end
          end
        end
        FINISH: if (!out_pending || out_release) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && state == IDLE |-> cfg.c_last != 0 && 32'(cfg.c_last) <= T_C
                   && cfg.r_last != 0 && 32'(cfg.r_last) <= T_R);
endmodule
