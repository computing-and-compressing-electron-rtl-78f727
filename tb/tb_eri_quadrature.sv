// tb_eri_quadrature: self-checking testbench for the quadrature loops.
//
// A model of the I buffer holds random intermediates and weights for one
// quartet at a time and answers the stage's (k, l) read addresses. Every
// row written to the [ab|cd] buffer is compared with the quadrature sum in
// double precision; epsilon is compared with b_max / (2^15 - 1). The test
// checks n_GQ = NGC*NGD cycles per quartet, the row numbering, and that the
// stage waits while either side has no slot.
module tb_eri_quadrature;
  import eri_ref_pkg::*;

  localparam int LA = 1, LB = 1, LC = 1, LD = 1, NBITS = 16;
  localparam int NR = (LA + LB + LC + LD) / 2 + 1;
  localparam int NI = LA + LB + 1, NJ = LB + 1, NK = LC + LD + 1, NL = LD + 1;
  localparam int NGA = 3, NGB = 3, NGC = 3, NGD = 3, NGAB = 9, NROWS = 9;

  logic clk = 0, rst_n = 0;
  logic i_ok = 0, i_release, o_ok = 0, wr_en, o_commit;
  logic [$clog2(NK)-1:0] rd_k [3];
  logic [$clog2(NL)-1:0] rd_l [3];
  logic [31:0] rd_data [3][NI][NJ][NR];
  logic [31:0] rd_w [NR];
  logic [$clog2(NROWS)-1:0] wr_row;
  logic [31:0] wr_data [NGAB];
  logic [31:0] o_eps;
  int checks = 0, failures = 0;

  eri_quadrature #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .NBITS(NBITS)) dut (.*);

  always #5 clk = ~clk;

  // I buffer model
  logic [31:0] ibuf [3][NR][NI][NJ][NK][NL];
  always_comb begin
    for (int x = 0; x < 3; x++)
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < NJ; j++)
          for (int m = 0; m < NR; m++)
            rd_data[x][i][j][m] = ibuf[x][m][i][j][rd_k[x]][rd_l[x]];
  end

  real rows [NROWS][NGAB];
  int  row_seen [NROWS];
  int  nwr, stall_bad;
  always @(posedge clk) begin
    if (wr_en) begin
      nwr++;
      row_seen[wr_row]++;
      for (int e = 0; e < NGAB; e++) rows[wr_row][e] = fp2real(wr_data[e]);
    end
    if (rst_n && !(i_ok && o_ok) && (wr_en || i_release || o_commit)) stall_bad++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real eps_got, ref_v, bmax;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 15; n++) begin
      foreach (ibuf[x, m, i, j, k, l]) ibuf[x][m][i][j][k][l] = rnd_fp(-1.5, 1.5);
      foreach (rd_w[m]) rd_w[m] = rnd_fp(0.0, 1.0);
      if (n == 3) foreach (rd_w[m]) rd_w[m] = 32'd0;         // all-zero quartet
      foreach (row_seen[r]) row_seen[r] = 0;
      nwr = 0;
      @(negedge clk);
      forever begin
        i_ok = ($urandom % 5) != 0;
        o_ok = ($urandom % 5) != 0;
        @(posedge clk);
        if (o_commit) begin
          eps_got = fp2real(o_eps);
          checks++;
          if (!i_release) begin failures++; $display("FAIL release not with commit"); end
          break;
        end
        @(negedge clk);
      end
      @(negedge clk);
      i_ok = 0;
      o_ok = 0;
      checks++;
      if (nwr != NGC * NGD) begin failures++; $display("FAIL n_GQ %0d", nwr); end
      bmax = 0.0;
      for (int d = 0; d < NGD; d++)
        for (int c = 0; c < NGC; c++) begin
          checks++;
          if (row_seen[d * NGC + c] != 1) begin failures++; $display("FAIL row %0d written %0d times", d * NGC + c, row_seen[d * NGC + c]); end
          for (int b = 0; b < NGB; b++)
            for (int a = 0; a < NGA; a++) begin
              ref_v = 0.0;
              for (int m = 0; m < NR; m++) begin
                real p;
                p = fp2real(rd_w[m]);
                for (int x = 0; x < 3; x++)
                  p = p * fp2real(ibuf[x][m][comp(LA, a, x)][comp(LB, b, x)][comp(LC, c, x)][comp(LD, d, x)]);
                ref_v = ref_v + p;
              end
              if (rabs(ref_v) > bmax) bmax = rabs(ref_v);
              checks++;
              if (rabs(rows[d * NGC + c][b * NGA + a] - ref_v) > 1e-5) begin
                failures++;
                $display("FAIL [%0d %0d|%0d %0d] = %g expected %g", a, b, c, d, rows[d * NGC + c][b * NGA + a], ref_v);
              end
            end
        end
      checks++;
      if (rabs(eps_got - bmax / 32767.0) > 1e-5 * bmax / 32767.0 + 1e-30) begin
        failures++;
        $display("FAIL eps %g expected %g", eps_got, bmax / 32767.0);
      end
    end
    checks++;
    if (stall_bad != 0) begin failures++; $display("FAIL activity while stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
