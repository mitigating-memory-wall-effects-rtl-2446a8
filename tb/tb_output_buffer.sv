// tb_output_buffer: every cycle each port writes a random value to a
// distinct random element and reads another; checks reads against a shadow
// copy and the host row port after each burst.
module tb_output_buffer;
  import unzip_pkg::*;
  localparam int T_R = 4, T_C = 4, NP = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NP-1:0][1:0] rd_row, rd_col, wr_row, wr_col;
  acc_t [NP-1:0] rd_psum, wr_psum;
  logic [NP-1:0] wr_valid;
  logic [1:0] host_row;
  acc_t [T_C-1:0] host_data;
  acc_t shadow [T_R][T_C];

  output_buffer #(.T_R(T_R), .T_C(T_C), .NP(NP)) dut (.clk, .rd_row, .rd_col, .rd_psum,
    .wr_valid, .wr_row, .wr_col, .wr_psum, .host_row, .host_data);

  initial begin
    wr_valid = '0; rd_row = '0; rd_col = '0; wr_row = '0; wr_col = '0; wr_psum = '0; host_row = 0;
    // initialise every element
    for (int r = 0; r < T_R; r++)
      for (int c = 0; c < T_C; c++) begin
        @(negedge clk);
        wr_valid = 3'b001; wr_row[0] = 2'(r); wr_col[0] = 2'(c);
        wr_psum[0] = acc_t'($urandom); shadow[r][c] = wr_psum[0];
      end
    @(negedge clk); wr_valid = '0;
    for (int n = 0; n < 200; n++) begin
      automatic int used [NP];
      for (int p = 0; p < NP; p++) begin
        automatic int e;
        automatic bit ok;
        do begin
          e = $urandom_range(0, T_R*T_C-1);
          ok = 1;
          for (int q = 0; q < p; q++) if (used[q] == e) ok = 0;
        end while (!ok);
        used[p] = e;
        wr_valid[p] = $urandom_range(0, 1);
        wr_row[p] = 2'(e / T_C); wr_col[p] = 2'(e % T_C);
        wr_psum[p] = acc_t'({$urandom, $urandom});
        rd_row[p] = 2'($urandom); rd_col[p] = 2'($urandom);
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (rd_psum[p] != shadow[rd_row[p]][rd_col[p]]) failures++;
      end
      @(negedge clk);
      for (int p = 0; p < NP; p++) if (wr_valid[p]) shadow[wr_row[p]][wr_col[p]] = wr_psum[p];
      wr_valid = '0;
      host_row = 2'($urandom);
      #1;
      for (int c = 0; c < T_C; c++) begin
        checks++;
        if (host_data[c] != shadow[host_row][c]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
