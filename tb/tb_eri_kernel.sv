// tb_eri_kernel: end-to-end testbench of the ERI kernel at its default
// parameters ([pp|pp], 16-bit codes, 8 private copies).
//
// Streams random quartets (centres on a unit lattice, exponents 1..2,
// random roots and weights) through the kernel in three phases:
//   A  continuous input, store always ready: checks the steady-state rate of
//      one quartet per max(n_RR, n_GQ, n_CS) = 18 cycles;
//   B  store stream held off for long stretches: the buffers fill up, so the
//      stages stall one after another back to the input;
//   C  random input gaps and random store back-pressure.
// Every compressed ERI is decompressed (code * epsilon) and compared with a
// double-precision evaluation of the same quartet: the error must stay
// within epsilon/2 plus a small single-precision allowance; epsilon itself
// must match b_max / (2^15 - 1). One quartet has all-zero weights.
// The mechanisms the design has are counted and each must occur: store
// back-pressure, recurrence stall (I buffer full), quadrature stall
// ([ab|cd] buffer full), input stall, several quartets in flight, a chunk
// that starts with a carried remainder, and an all-zero quartet.
module tb_eri_kernel;
  import eri_ref_pkg::*;

  localparam int LA = 1, LB = 1, LC = 1, LD = 1, NBITS = 16, CMAX = 8;
  localparam int NR = (LA + LB + LC + LD) / 2 + 1;
  localparam int NERI = 81, EPC = 32, NCS = 3;
  localparam int NRR = 3 * NR * (LD + 1), NGQ = 9;
  localparam int NQ = 48;
  localparam int QMAX = (1 << (NBITS - 1)) - 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [511:0] in_data = '0;
  logic st_valid, st_ready = 1, st_last, eps_valid;
  logic [511:0] st_data;
  logic [31:0] st_addr, eps_data, eps_addr;
  logic [3:0] i_used, abcd_used;
  logic rr_stall, gq_stall, cs_carry;
  int checks = 0, failures = 0;

  eri_kernel dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ reference
  quartet_t quartets [NQ];
  real      ref_eri  [NQ][];
  real      ref_bmax [NQ];

  // ------------------------------------------------------------ monitor
  int  codes [NQ][NERI];
  int  nchunk [NQ];
  real eps_got [NQ];
  int  eps_cnt [NQ];
  longint eps_cycle [NQ];
  longint cycle = 0;
  int  n_bp = 0, n_rr_stall = 0, n_gq_stall = 0, n_in_stall = 0, n_overlap = 0, n_carry = 0;

  always @(posedge clk) begin
    cycle++;
    if (st_valid && !st_ready) n_bp++;
    if (rr_stall) n_rr_stall++;
    if (gq_stall) n_gq_stall++;
    if (in_valid && !in_ready) n_in_stall++;
    if (i_used >= 2 || abcd_used >= 2) n_overlap++;
    if (rst_n && st_valid && st_ready) begin
      int q, ch;
      q  = int'(st_addr) / NCS;
      ch = int'(st_addr) % NCS;
      if (cs_carry) n_carry++;
      if (q >= 0 && q < NQ) begin
        for (int e = 0; e < EPC; e++)
          if (ch * EPC + e < NERI) codes[q][ch * EPC + e] = int'($signed(st_data[e * NBITS +: NBITS]));
        nchunk[q]++;
      end
      if (eps_valid && eps_addr < NQ) begin
        eps_got[eps_addr]   = fp2real(eps_data);
        eps_cnt[eps_addr]++;
        eps_cycle[eps_addr] = cycle;
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // store-side throttling
  int phase = 0;
  always @(negedge clk) begin
    case (phase)
      0: st_ready = 1;
      1: st_ready = ((cycle / 150) % 2 == 1);
      default: st_ready = ($urandom % 3) != 0;
    endcase
  end

  task automatic send_word(input logic [511:0] w);
    @(negedge clk);
    in_valid = 1;
    in_data  = w;
    // in_ready does not depend on in_valid: sample it mid-cycle
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1;
    in_valid = 0;
  endtask

  initial begin
    bit done;
    for (int n = 0; n < NQ; n++) begin
      quartets[n] = rnd_quartet();
      if (n == 20) for (int m = 0; m < 8; m++) quartets[n].w[m] = 0.0;
      ref_quartet(LA, LB, LC, LD, quartets[n], ref_eri[n], ref_bmax[n]);
      nchunk[n] = 0;
      eps_cnt[n] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NQ; n++) begin
      if (n == 12) while (eps_cnt[11] == 0) @(negedge clk);
      if (n == 12) phase = 1;
      if (n == 30) phase = 2;
      if (phase == 2 && ($urandom % 3) == 0) repeat ($urandom % 40) @(negedge clk);
      send_word(word_g(quartets[n]));
      send_word(word_r(quartets[n]));
    end
    // drain
    done = 0;
    while (!done) begin
      @(posedge clk);
      done = (eps_cnt[NQ - 1] != 0);
    end
    repeat (5) @(posedge clk);

    // ------------------------------------------------------------ results
    for (int n = 0; n < NQ; n++) begin
      real eps_ref, tol, err, worst;
      checks++;
      if (nchunk[n] != NCS || eps_cnt[n] != 1) begin
        failures++;
        $display("FAIL quartet %0d: %0d chunks, %0d epsilon stores", n, nchunk[n], eps_cnt[n]);
      end
      eps_ref = ref_bmax[n] / real'(QMAX);
      checks++;
      if (rabs(eps_got[n] - eps_ref) > 1e-4 * eps_ref + 1e-30) begin
        failures++;
        $display("FAIL quartet %0d: epsilon %g expected %g", n, eps_got[n], eps_ref);
      end
      tol = 0.5 * eps_ref + 2e-5 * ref_bmax[n] + 1e-30;
      worst = 0.0;
      for (int e = 0; e < NERI; e++) begin
        err = rabs(real'(codes[n][e]) * eps_got[n] - ref_eri[n][e]);
        if (err > worst) worst = err;
        checks++;
        if (err > tol) begin
          failures++;
          $display("FAIL quartet %0d ERI %0d: decompressed %g reference %g", n, e,
                   real'(codes[n][e]) * eps_got[n], ref_eri[n][e]);
        end
      end
      if (n < 3) $display("quartet %0d: b_max %g epsilon %g max abs error %g", n, ref_bmax[n], eps_got[n], worst);
    end
    // steady-state rate in phase A (quartets 3..11)
    for (int n = 4; n < 12; n++) begin
      checks++;
      if (eps_cycle[n] - eps_cycle[n - 1] != longint'(NRR)) begin
        failures++;
        $display("FAIL rate: quartet %0d left %0d cycles after the previous one, expected %0d",
                 n, eps_cycle[n] - eps_cycle[n - 1], NRR);
      end
    end
    $display("mechanisms: store back-pressure %0d, RR stall %0d, GQ stall %0d, input stall %0d, overlap %0d, carried chunks %0d",
             n_bp, n_rr_stall, n_gq_stall, n_in_stall, n_overlap, n_carry);
    checks++; if (n_bp == 0)       begin failures++; $display("FAIL no store back-pressure"); end
    checks++; if (n_rr_stall == 0) begin failures++; $display("FAIL no recurrence stall"); end
    checks++; if (n_gq_stall == 0) begin failures++; $display("FAIL no quadrature stall"); end
    checks++; if (n_in_stall == 0) begin failures++; $display("FAIL no input stall"); end
    checks++; if (n_overlap == 0)  begin failures++; $display("FAIL quartets never overlapped"); end
    checks++; if (n_carry == 0)    begin failures++; $display("FAIL remainder never carried"); end
    checks++; if (eps_got[20] != 0.0) begin failures++; $display("FAIL zero quartet epsilon"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
