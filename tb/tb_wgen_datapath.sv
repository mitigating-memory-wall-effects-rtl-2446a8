// tb_wgen_datapath: drives random subtiles (nv random M-bit code vectors,
// random alpha lanes, random phase, both kernel-area options) into the
// vector compute datapath and checks every output weight against
// sum_j (+/-) alpha[filter of element k], saturated to 16 bits, where the
// filter of element k is floor((phase + k) / K*K). Also checks that the
// subtile appears on the second clock edge after its last basis vector is presented.
module tb_wgen_datapath;
  import unzip_pkg::*;
  localparam int M = 20;
  localparam int NF = nf_for(M);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_first, in_last;
  logic [KSEL_W-1:0] in_ksel;
  logic [PH_W-1:0] in_phase;
  logic [M-1:0] in_bits;
  word_t [NF-1:0] in_alpha;
  logic [7:0] in_tag, out_tag;
  logic out_valid;
  word_t [M-1:0] out_w;

  wgen_datapath #(.M(M), .NF(NF), .TAG_W(8)) dut (.clk, .rst_n, .in_valid, .in_first,
    .in_last, .in_ksel, .in_phase, .in_bits, .in_alpha, .in_tag, .out_valid, .out_tag, .out_w);

  longint expw [M];
  int cyc = 0, last_cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_ksel = 0; in_phase = 0; in_bits = 0;
    in_alpha = '0; in_tag = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      automatic int sel = $urandom_range(0, NK-1);
      automatic int k2  = K2_OPT[sel];
      automatic int nv  = $urandom_range(1, KMAX2);
      automatic int ph  = $urandom_range(0, k2-1);
      automatic bit big = (n % 5 == 0);
      for (int k = 0; k < M; k++) expw[k] = 0;
      for (int j = 0; j < nv; j++) begin
        in_valid = 1; in_first = (j == 0); in_last = (j == nv-1);
        in_ksel = KSEL_W'(sel); in_phase = PH_W'(ph); in_tag = 8'(n);
        in_bits = M'({$urandom, $urandom});
        for (int f = 0; f < NF; f++)
          in_alpha[f] = big ? word_t'(($urandom & 1) ? 32767 : -32768)
                            : word_t'($urandom_range(0, 8000) - 4000);
        for (int k = 0; k < M; k++) begin
          automatic int f = (ph + k) / k2;
          expw[k] += in_bits[k] ? -longint'(in_alpha[f]) : longint'(in_alpha[f]);
        end
        @(negedge clk);
      end
      last_cyc = cyc;
      in_valid = 0; in_first = 0; in_last = 0;
      // wait for the subtile
      while (!out_valid) @(negedge clk);
      checks++;
      if (cyc - last_cyc != 1) begin
        failures++; $display("latency %0d", cyc - last_cyc);
      end
      checks++;
      if (out_tag != 8'(n)) failures++;
      for (int k = 0; k < M; k++) begin
        automatic longint e = expw[k];
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (out_w[k] != word_t'(e)) begin
          failures++; $display("n%0d k%0d got %0d exp %0d", n, k, out_w[k], e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
