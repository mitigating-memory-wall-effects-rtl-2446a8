// tb_ovsf_generator: checks the OVSF FIFO + basis vector aligner in both of
// its regimes, M <= K*K (M=4, K=3) and M > K*K (M=20, K=3), and for K=1.
// For every step the expected subtile is recomputed from the loaded basis
// vectors: element k of subtile i of a tile is bit ((i*M + k) mod K*K) of
// the basis vector in use. Tiles hold 36 elements, so M=4 gives 9 subtiles
// and M=20 gives 2 (the end-of-tile realignment is exercised by M=20).
module tb_ovsf_generator;
  import unzip_pkg::*;
  localparam int TE = 36;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, load_valid, step, tile_end;
  logic [KMAX2-1:0] load_vec;
  logic [KSEL_W-1:0] ksel;
  logic va, vb;
  logic [3:0]  oa;
  logic [19:0] ob;
  logic [PH_W-1:0] ca, cb;

  ovsf_generator #(.M(4),  .TILE_ELEMS(TE)) dut_a (.clk, .rst_n, .clear, .load_valid,
    .load_vec, .ksel, .step, .tile_end, .out_valid(va), .out_bits(oa), .count(ca));
  ovsf_generator #(.M(20), .TILE_ELEMS(TE)) dut_b (.clk, .rst_n, .clear, .load_valid,
    .load_vec, .ksel, .step, .tile_end, .out_valid(vb), .out_bits(ob), .count(cb));

  logic [KMAX2-1:0] vecs [KMAX2];

  task automatic run(input int sel, input int nv, input int ntiles);
    int k2 = K2_OPT[sel];
    ksel = KSEL_W'(sel);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int j = 0; j < nv; j++) begin
      vecs[j] = KMAX2'($urandom);
      load_vec = vecs[j]; load_valid = 1;
      @(negedge clk);
    end
    load_valid = 0;
    checks++; if (ca != PH_W'(nv) || cb != PH_W'(nv)) begin failures++; $display("count wrong"); end
    // dut_a: NS = 9, dut_b: NS = 2; drive each with its own loop length by
    // stepping both over the same number of tiles of their own subtile count
    for (int t = 0; t < ntiles; t++) begin
      for (int i = 0; i < 9; i++)
        for (int j = 0; j < nv; j++) begin
          step = 1; tile_end = (i == 8);
          @(negedge clk);
          step = 0;
          checks++;
          for (int k = 0; k < 4; k++)
            if (oa[k] != vecs[j][(i*4 + k) % k2]) begin
              failures++; $display("A mismatch t%0d i%0d j%0d k%0d", t, i, j, k); break;
            end
          if (!va) failures++;
        end
    end
    // reload for dut_b (dut_a's FIFO state is irrelevant now)
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int j = 0; j < nv; j++) begin
      load_vec = vecs[j]; load_valid = 1; @(negedge clk);
    end
    load_valid = 0;
    for (int t = 0; t < ntiles; t++)
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < nv; j++) begin
          step = 1; tile_end = (i == 1);
          @(negedge clk);
          step = 0;
          checks++;
          for (int k = 0; k < 20; k++)
            if (ob[k] != vecs[j][(i*20 + k) % k2]) begin
              failures++; $display("B mismatch t%0d i%0d j%0d k%0d", t, i, j, k); break;
            end
        end
  endtask

  initial begin
    clear = 0; load_valid = 0; step = 0; tile_end = 0; load_vec = '0; ksel = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 3, 3);
    run(0, 9, 2);
    run(0, 1, 2);
    run(1, 1, 2);
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
