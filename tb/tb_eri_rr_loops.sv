// tb_eri_rr_loops: self-checking testbench for the recurrence-relation loops.
//
// Feeds random B, C and centre differences for several quartets, toggles
// the "free slot" signal to force stalls, records every write into a model
// of the I buffer, and at each commit compares all I(i,j,k,l,mu,xi) with
// the double-precision recurrences. It checks that one quartet takes
// exactly n_RR = 3 * NRYS * (LD+1) write cycles, that nothing is written
// while no slot is free, and that the weights leave with the commit.
module tb_eri_rr_loops;
  import eri_ref_pkg::*;

  localparam int LA = 1, LB = 1, LC = 1, LD = 1;
  localparam int NR = (LA + LB + LC + LD) / 2 + 1;
  localparam int NI = LA + LB + 1, NJ = LB + 1, NK = LC + LD + 1, NL = LD + 1;
  localparam int NRR = 3 * NR * NL;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, slot_ok = 0;
  logic [31:0] b_arr [3][NR];
  logic [31:0] c_arr [6][NR];
  logic [31:0] w_arr [NR];
  logic [31:0] ab_d [3], cd_d [3];
  logic wr_en, commit, busy;
  logic [1:0] wr_xi;
  logic [$clog2(NR)-1:0] wr_mu;
  logic [(NL > 1 ? $clog2(NL) : 1)-1:0] wr_l;
  logic [31:0] wr_data [NI][NJ][NK];
  logic [31:0] commit_w [NR];
  int checks = 0, failures = 0;

  eri_rr_loops #(.LA(LA), .LB(LB), .LC(LC), .LD(LD)) dut (.*);

  always #5 clk = ~clk;

  real model [3][NR][NI][NJ][NK][NL];
  int  writes, stall_cycles, stall_writes;

  always @(posedge clk) begin
    if (wr_en) begin
      writes++;
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < NJ; j++)
          for (int k = 0; k < NK; k++)
            model[wr_xi][wr_mu][i][j][k][wr_l] = fp2real(wr_data[i][j][k]);
    end
    if (rst_n && in_valid && !slot_ok) begin
      stall_cycles++;
      if (wr_en) stall_writes++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real b [3][NR], c [6][NR], dab [3], dcd [3];
    iset_t ref_i;
    real   got, exp, scale;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      for (int m = 0; m < NR; m++) begin
        for (int i = 0; i < 3; i++) begin b[i][m] = fp2real(rnd_fp(0.05, 0.5)); b_arr[i][m] = real2fp(b[i][m]); end
        for (int i = 0; i < 6; i++) begin c[i][m] = fp2real(rnd_fp(-1.0, 1.0)); c_arr[i][m] = real2fp(c[i][m]); end
        w_arr[m] = rnd_fp(0.0, 1.0);
      end
      for (int x = 0; x < 3; x++) begin
        dab[x] = fp2real(rnd_fp(-2.0, 2.0)); ab_d[x] = real2fp(dab[x]);
        dcd[x] = fp2real(rnd_fp(-2.0, 2.0)); cd_d[x] = real2fp(dcd[x]);
      end
      writes = 0;
      @(negedge clk);
      in_valid = 1;
      // run until commit, with the slot signal toggling randomly
      forever begin
        slot_ok = ($urandom % 4) != 0;
        @(posedge clk);
        if (commit) begin
          checks++;
          if (commit_w != w_arr) begin failures++; $display("FAIL commit weights"); end
          checks++;
          if (!in_ready) begin failures++; $display("FAIL in_ready not with commit"); end
          break;
        end
        @(negedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      slot_ok  = 0;
      checks++;
      if (writes != NRR) begin failures++; $display("FAIL n_RR: %0d writes, expected %0d", writes, NRR); end
      for (int x = 0; x < 3; x++)
        for (int m = 0; m < NR; m++) begin
          ref_i = ref_rr(LA, LB, LC, LD, b[0][m], b[1][m], b[2][m], c[x][m], c[3 + x][m], dab[x], dcd[x]);
          scale = 0.0;
          foreach (ref_i[i, j, k, l]) if (rabs(ref_i[i][j][k][l]) > scale) scale = rabs(ref_i[i][j][k][l]);
          for (int i = 0; i < NI; i++)
            for (int j = 0; j < NJ; j++)
              for (int k = 0; k < NK; k++)
                for (int l = 0; l < NL; l++) begin
                  got = model[x][m][i][j][k][l];
                  exp = (i + j < NI && k + l < NK) ? ref_i[i][j][k][l] : 0.0;
                  checks++;
                  if (rabs(got - exp) > 1e-5 * scale) begin
                    failures++;
                    $display("FAIL I(%0d,%0d,%0d,%0d,mu=%0d,xi=%0d) = %g expected %g", i, j, k, l, m, x, got, exp);
                  end
                end
        end
    end
    checks++;
    if (stall_cycles == 0 || stall_writes != 0) begin
      failures++;
      $display("FAIL stall: %0d stall cycles, %0d writes during stall", stall_cycles, stall_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
