// cnn_wgen: the on-the-fly weights generator (OVSF generator, Alpha buffer,
// vector compute datapath and their control unit).
//
// The control unit runs the tiled weights-generation loops of one layer:
//   for each R tile, for each C tile, for each P tile      (weights tile)
//     for each of NS = ceil(T_P*T_C/M) subtiles             (subtile)
//       for each of nv = ceil(rho*K*K) basis vectors        (one cycle each)
//         M-wide multiply by alpha and accumulate           (unrolled)
// All loops are pipelined: one basis vector enters the datapath every cycle,
// so a tile takes NS*nv cycles and consecutive tiles follow back to back.
// The weights of a C tile are generated again for every R tile, because the
// engine consumes tiles in (R tile, C tile, P tile) order and the buffer holds
// only two tiles. Before the first subtile of a tile the unit claims the
// free weights-buffer bank; if neither is free it stalls (stall output high).
// The last subtile of a tile commits the bank.
//
// Per subtile the unit also tracks the phase, the offset of the subtile's
// first element inside its K*K kernel (advances by M mod K*K, 0 at each
// tile start), which steers the alpha lanes. Alpha-buffer rows are read in
// strictly increasing order from cfg.alpha_base, restarting at each R tile.
//
// Host side: clear/load the OVSF FIFO with the layer's nv basis vectors and
// write the Alpha buffer before "start"; "done" pulses once the last tile is
// committed. Latency: a subtile reaches the weights buffer 3 cycles after its
// last basis vector is issued.
//
// Lint note: the assertions below use rst_n in 'disable iff' while the flops
// use it as an asynchronous reset, so lint reports rst_n as both synchronous
// and asynchronous; the assertions are not part of the circuit.
// The generator's out_valid is left open: the control unit issues one
// step per cycle itself, and only some configuration fields are used here.
module cnn_wgen import unzip_pkg::*; #(
  parameter int M           = 192,
  parameter int T_P         = 18,
  parameter int T_C         = 32,
  parameter int ALPHA_DEPTH = 1024
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  layer_cfg_t                      cfg,
  output logic                            busy,
  output logic                            done,
  output logic                            stall,
  // OVSF FIFO load
  input  logic                            basis_clear,
  input  logic                            basis_load_valid,
  input  logic [KMAX2-1:0]                basis_load_vec,
  // Alpha buffer load
  input  logic                            alpha_wr_en,
  input  logic [$clog2(nf_for(M))-1:0]    alpha_wr_bank,
  input  logic [$clog2(ALPHA_DEPTH)-1:0]  alpha_wr_addr,
  input  word_t                           alpha_wr_data,
  // weights buffer side
  input  logic [1:0]                      bank_empty,
  output logic                            claim,
  output logic                            claim_bank,
  output logic                            wr_valid,
  output logic                            wr_bank,
  output logic [$clog2(((T_P*T_C+M-1)/M)+1)-1:0] wr_sub,
  output word_t [M-1:0]                   wr_data,
  output logic                            commit,
  output logic                            commit_bank
);
  localparam int TE    = T_P * T_C;
  localparam int NS    = (TE + M - 1) / M;
  localparam int NF    = nf_for(M);
  localparam int SW    = $clog2(NS + 1);
  localparam int AW    = $clog2(ALPHA_DEPTH);
  localparam int TAG_W = SW + 2;

  typedef enum logic [1:0] {IDLE, RUN, DRAIN} state_e;
  state_e state;

  layer_cfg_t          c;
  logic [11:0]         rt, ct, pt;
  logic [SW-1:0]       si;
  logic [NV_W-1:0]     vj;
  logic [PH_W-1:0]     ph;
  logic                wb;
  logic [AW-1:0]       addr;
  logic [2:0]          inflight;

  logic                issue, tile_start, sub_last, vec_last, tile_last, layer_last;
  logic [PH_W-1:0]     k2, s_adv, ph_next;

  // Stage-1 tags (aligned with the registered OVSF output and Alpha read).
  logic                d_valid, d_first, d_last;
  logic [PH_W-1:0]     d_ph;
  logic [TAG_W-1:0]    d_tag;
  logic [M-1:0]        bits;
  word_t [NF-1:0]      alphas;
  logic                dp_valid;
  logic [TAG_W-1:0]    dp_tag;
  logic [PH_W-1:0]     fifo_count;

  always_comb begin
    k2    = '0;
    s_adv = '0;
    for (int o = 0; o < NK; o++)
      if (c.ksel == KSEL_W'(o)) begin
        k2    = PH_W'(K2_OPT[o]);
        s_adv = PH_W'(M % K2_OPT[o]);
      end
    ph_next = (5'(ph) + 5'(s_adv) >= 5'(k2)) ? ph + s_adv - k2 : ph + s_adv;
  end

  assign tile_start = (si == '0) && (vj == '0);
  assign vec_last   = (vj == c.nv - 1'b1);
  assign sub_last   = (32'(si) == NS - 1);
  assign tile_last  = vec_last && sub_last;
  assign layer_last = tile_last && (pt == c.n_ptiles - 1'b1) &&
                      (ct == c.n_ctiles - 1'b1) && (rt == c.n_rtiles - 1'b1);
  assign issue      = (state == RUN) && (!tile_start || bank_empty[wb]);
  assign stall      = (state == RUN) && !issue;
  assign busy       = (state != IDLE);
  assign claim      = issue && tile_start;
  assign claim_bank = wb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      c     <= '0;
      rt <= '0; ct <= '0; pt <= '0; si <= '0; vj <= '0; ph <= '0; wb <= 1'b0;
      addr  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= RUN;
          c     <= cfg;
          rt <= '0; ct <= '0; pt <= '0; si <= '0; vj <= '0; ph <= '0;
          addr  <= AW'(cfg.alpha_base);
        end
        RUN: if (issue) begin
          addr <= addr + 1'b1;
          if (!vec_last) vj <= vj + 1'b1;
          else begin
            vj <= '0;
            if (!sub_last) begin
              si <= si + 1'b1;
              ph <= ph_next;
            end else begin
              si <= '0;
              ph <= '0;
              wb <= ~wb;
              if (pt != c.n_ptiles - 1'b1) pt <= pt + 1'b1;
              else begin
                pt <= '0;
                if (ct != c.n_ctiles - 1'b1) ct <= ct + 1'b1;
                else begin
                  ct   <= '0;
                  rt   <= rt + 1'b1;
                  addr <= AW'(c.alpha_base);
                end
              end
              if (layer_last) state <= DRAIN;
            end
          end
        end
        DRAIN: if (inflight == '0) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Tiles claimed but not yet committed.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + 3'(claim) - 3'(commit);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0; d_ph <= '0; d_tag <= '0;
    end else begin
      d_valid <= issue;
      d_first <= (vj == '0);
      d_last  <= vec_last;
      d_ph    <= ph;
      d_tag   <= {tile_last, wb, si};
    end
  end

  ovsf_generator #(.M(M), .TILE_ELEMS(TE)) u_ovsf (
    .clk, .rst_n,
    .clear(basis_clear), .load_valid(basis_load_valid), .load_vec(basis_load_vec),
    .ksel(c.ksel), .step(issue), .tile_end(sub_last),
    .out_valid(), .out_bits(bits), .count(fifo_count)
  );

  alpha_buffer #(.NF(NF), .DEPTH(ALPHA_DEPTH)) u_alpha (
    .clk,
    .wr_en(alpha_wr_en), .wr_bank(alpha_wr_bank), .wr_addr(alpha_wr_addr),
    .wr_data(alpha_wr_data),
    .rd_en(issue), .rd_addr(addr), .rd_data(alphas)
  );

  wgen_datapath #(.M(M), .NF(NF), .TAG_W(TAG_W)) u_dp (
    .clk, .rst_n,
    .in_valid(d_valid), .in_first(d_first), .in_last(d_last), .in_ksel(c.ksel),
    .in_phase(d_ph), .in_bits(bits), .in_alpha(alphas), .in_tag(d_tag),
    .out_valid(dp_valid), .out_tag(dp_tag), .out_w(wr_data)
  );

  assign wr_valid    = dp_valid;
  assign wr_bank     = dp_tag[SW];
  assign wr_sub      = dp_tag[SW-1:0];
  assign commit      = dp_valid && dp_tag[SW+1];
  assign commit_bank = dp_tag[SW];

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && state == IDLE |-> cfg.nv != 0 && 32'(cfg.nv) <= KMAX2);
endmodule
