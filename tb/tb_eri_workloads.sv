// tb_eri_workloads: quartet classes from the published trip-count tables,
// each on a kernel built for it, plus the 12-bit compression format.
//
//   [ss|ss]        16-bit   n_RR 3,  n_GQ 1, n_CS 1
//   [dd|ps]        16-bit   n_RR 9,  n_GQ 3, n_CS 4  (a row exceeds a chunk)
//   [fd|ps]        16-bit   n_RR 12, n_GQ 3, n_CS 6
//   [pp|pp]        12-bit   42 codes per chunk, n_CS 2
// Each class streams random quartets and checks every decompressed ERI, the
// chunk counts and the steady-state rate (see eri_class_run).
module tb_eri_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NRUN = 4;
  logic done [NRUN];
  int   chk [NRUN], fl [NRUN];

  eri_class_run #(.LA(0), .LB(0), .LC(0), .LD(0), .NBITS(16), .NQ(16)) r_ssss (.clk, .done(done[0]), .checks(chk[0]), .failures(fl[0]));
  eri_class_run #(.LA(2), .LB(2), .LC(1), .LD(0), .NBITS(16), .NQ(16)) r_ddps (.clk, .done(done[1]), .checks(chk[1]), .failures(fl[1]));
  eri_class_run #(.LA(3), .LB(2), .LC(1), .LD(0), .NBITS(16), .NQ(12)) r_fdps (.clk, .done(done[2]), .checks(chk[2]), .failures(fl[2]));
  eri_class_run #(.LA(1), .LB(1), .LC(1), .LD(1), .NBITS(12), .NQ(16)) r_pp12 (.clk, .done(done[3]), .checks(chk[3]), .failures(fl[3]));

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < NRUN; i++) all &= done[i];
    end while (!all);
    for (int i = 0; i < NRUN; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
