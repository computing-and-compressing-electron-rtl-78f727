// tb_eri_setup: self-checking testbench for the setup stage.
//
// Sends random quartets (word G, then word R) with random gaps and random
// back-pressure, and compares B, C, the weights and the centre differences
// with the double-precision reference (relative error below 1e-5 of the
// array's scale). Also checks that a quartet costs two input beats and that
// out_valid rises right after the second beat.
module tb_eri_setup;
  import eri_ref_pkg::*;

  localparam int LA = 1, LB = 1, LC = 1, LD = 1;
  localparam int NR = (LA + LB + LC + LD) / 2 + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [511:0] in_data = '0;
  logic [31:0] b_arr [3][NR];
  logic [31:0] c_arr [6][NR];
  logic [31:0] w_arr [NR];
  logic [31:0] ab_d [3], cd_d [3];
  int checks = 0, failures = 0;

  eri_setup #(.LA(LA), .LB(LB), .LC(LC), .LD(LD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check_close(input string what, input real got, input real exp, input real scale);
    checks++;
    if (rabs(got - exp) > 1e-5 * scale + 1e-30) begin
      failures++;
      $display("FAIL %s: got %g expected %g", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    quartet_t q;
    aux_t     r;
    int       beats;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      q = rnd_quartet();
      r = ref_setup(q, NR);
      // send the two words
      beats = 0;
      for (int w = 0; w < 2; w++) begin
        @(negedge clk);
        in_valid = 1;
        in_data  = (w == 0) ? word_g(q) : word_r(q);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        beats++;
        #1;
        in_valid = 0;
        if (w == 0) begin
          checks++;
          if (out_valid) begin failures++; $display("FAIL out_valid after one beat"); end
        end
        if ($urandom % 2 == 0) repeat ($urandom % 3) @(posedge clk);
      end
      checks++;
      if (!out_valid || beats != 2) begin failures++; $display("FAIL no result after two beats"); end
      // compare
      for (int m = 0; m < NR; m++) begin
        for (int i = 0; i < 3; i++) check_close("B", fp2real(b_arr[i][m]), r.b[i][m], 1.0);
        for (int i = 0; i < 6; i++) check_close("C", fp2real(c_arr[i][m]), r.c[i][m], 4.0);
        check_close("w", fp2real(w_arr[m]), q.w[m], 1.0);
      end
      for (int x = 0; x < 3; x++) begin
        check_close("AB", fp2real(ab_d[x]), r.ab[x], 4.0);
        check_close("CD", fp2real(cd_d[x]), r.cd[x], 4.0);
      end
      // consume with some delay
      @(negedge clk);
      repeat ($urandom % 3) @(negedge clk);
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
