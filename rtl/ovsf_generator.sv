// ovsf_generator: OVSF FIFO, basis vector aligner and output register.
//
// Feeds the weights generator's multiplier array with one M-bit basis-vector
// subtile per cycle. The FIFO holds the layer's nv basis vectors (each K*K
// bits, K*K <= KMAX2). Every "step" pops the head vector v, drives the output
// register with v repeated along M bits (out[k] = v[k mod K*K]), and pushes v
// back rotated so that, when it comes round again nv steps later (next
// subtile), its bit 0 lines up with the first element of that subtile. The
// rotation moves bit (n + S) mod K*K to bit n, with S = M mod K*K; for M <= K*K
// this is the M-bit shift and for M > K*K the mod(M,K*K) shift of the paper's
// two cases, written here in bit-index terms. During the last subtile of a
// tile the rotation instead restores phase 0 (S_END), so every tile starts
// aligned even when the tile size is not a multiple of M; this end-of-tile
// option is this design's own addition (it equals S for the default sizes).
// Only the shifts of the kernel areas in K2_OPT are built; ksel picks one.
//
// Interface: "clear" empties the FIFO, "load_valid/load_vec" append a basis
// vector (host, before the layer; never together with step). "step" with
// "tile_end" (step belongs to the last subtile of a tile) advances.
// Timing: out_bits/out_valid are registered, valid the cycle after step.
//
// Lint note: the assertions below use rst_n in 'disable iff' while the flops
// use it as an asynchronous reset, so lint reports rst_n as both synchronous
// and asynchronous; the assertions are not part of the circuit.
module ovsf_generator import unzip_pkg::*; #(
  parameter int M          = 192,   // subtile size (TiWGen M)
  parameter int TILE_ELEMS = 576    // T_P*T_C elements per weights tile
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              load_valid,
  input  logic [KMAX2-1:0]  load_vec,
  input  logic [KSEL_W-1:0] ksel,
  input  logic              step,
  input  logic              tile_end,
  output logic              out_valid,
  output logic [M-1:0]      out_bits,
  output logic [PH_W-1:0]   count
);
  localparam int NS = (TILE_ELEMS + M - 1) / M;   // subtiles per tile
  localparam int PW = $clog2(KMAX2);

  logic [KMAX2-1:0] fifo [KMAX2];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [KMAX2-1:0] head;
  logic [M-1:0]     rep  [NK];
  logic [KMAX2-1:0] rot  [NK];
  logic [KMAX2-1:0] rote [NK];

  assign head = fifo[rd_ptr];

  // Replication and rotation per supported kernel area (constant indices only).
  always_comb begin
    for (int o = 0; o < NK; o++) begin
      rep[o]  = '0;
      rot[o]  = '0;
      rote[o] = '0;
      for (int k = 0; k < M; k++)
        rep[o][k] = head[k % K2_OPT[o]];
      for (int n = 0; n < K2_OPT[o]; n++) begin
        rot[o][n]  = head[(n + (M % K2_OPT[o])) % K2_OPT[o]];
        rote[o][n] = head[(n + ((K2_OPT[o] - (((NS - 1) * M) % K2_OPT[o])) % K2_OPT[o]))
                          % K2_OPT[o]];
      end
    end
  end

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(KMAX2 - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      count     <= '0;
      out_valid <= 1'b0;
      out_bits  <= '0;
    end else begin
      out_valid <= step;
      if (clear) begin
        rd_ptr <= '0;
        wr_ptr <= '0;
        count  <= '0;
      end else if (load_valid) begin
        fifo[wr_ptr] <= load_vec;
        wr_ptr       <= inc(wr_ptr);
        count        <= count + 1'b1;
      end else if (step) begin
        out_bits     <= rep[ksel];
        fifo[wr_ptr] <= tile_end ? rote[ksel] : rot[ksel];
        rd_ptr       <= inc(rd_ptr);
        wr_ptr       <= inc(wr_ptr);
      end
    end
  end

  // A step needs a loaded FIFO; a load must not collide with a step.
  assert property (@(posedge clk) disable iff (!rst_n) step |-> (count != 0));
  assert property (@(posedge clk) disable iff (!rst_n) !(step && load_valid));
  assert property (@(posedge clk) disable iff (!rst_n)
                   load_valid |-> (count < PH_W'(KMAX2)));
endmodule
