// eri_class_run: runs one quartet class through an eri_kernel built for
// it and checks the result; instantiated by tb_eri_workloads.
//
// Streams NQ random quartets with random store back-pressure, decompresses
// every code with the stored epsilon and compares it with the
// double-precision reference (error within epsilon/2 plus a small fp32
// allowance), checks n_CS chunks and one epsilon per quartet, and checks the
// steady-state interval between quartets against max(2, n_RR, n_GQ, n_CS)
// over a stretch with the store always ready. Reports through its ports.
module eri_class_run
  import eri_ref_pkg::*;
#(
  parameter int LA = 0, parameter int LB = 0, parameter int LC = 0, parameter int LD = 0,
  parameter int NBITS = 16, parameter int NQ = 16
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int NGA = (LA + 1) * (LA + 2) / 2, NGB = (LB + 1) * (LB + 2) / 2;
  localparam int NGC = (LC + 1) * (LC + 2) / 2, NGD = (LD + 1) * (LD + 2) / 2;
  localparam int NERI = NGA * NGB * NGC * NGD;
  localparam int NR   = (LA + LB + LC + LD) / 2 + 1;
  localparam int EPC  = 512 / NBITS;
  localparam int NCS  = (NERI + EPC - 1) / EPC;
  localparam int NRR  = 3 * NR * (LD + 1);
  localparam int NGQ  = NGC * NGD;
  localparam int RATE = (NRR > NGQ ? (NRR > NCS ? NRR : NCS) : (NGQ > NCS ? NGQ : NCS)) > 2 ?
                        (NRR > NGQ ? (NRR > NCS ? NRR : NCS) : (NGQ > NCS ? NGQ : NCS)) : 2;
  localparam int QMAX = (1 << (NBITS - 1)) - 1;

  logic rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [511:0] in_data = '0;
  logic st_valid, st_ready = 1, st_last, eps_valid;
  logic [511:0] st_data;
  logic [31:0] st_addr, eps_data, eps_addr;
  logic [3:0] i_used, abcd_used;
  logic rr_stall, gq_stall, cs_carry;

  eri_kernel #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .NBITS(NBITS)) dut (.*);

  quartet_t quartets [NQ];
  real      ref_eri  [NQ][];
  real      ref_bmax [NQ];
  int       codes [NQ][NERI];
  int       nchunk [NQ], eps_cnt [NQ];
  real      eps_got [NQ];
  longint   eps_cycle [NQ];
  longint   cycle = 0;
  logic     throttle = 0;

  always @(posedge clk) begin
    cycle++;
    if (rst_n && st_valid && st_ready) begin
      int q, ch;
      q  = int'(st_addr) / NCS;
      ch = int'(st_addr) % NCS;
      if (q >= 0 && q < NQ) begin
        for (int e = 0; e < EPC; e++)
          if (ch * EPC + e < NERI) codes[q][ch * EPC + e] = int'($signed(st_data[e * NBITS +: NBITS]));
        nchunk[q]++;
      end
      if (eps_valid && eps_addr < NQ) begin
        eps_got[eps_addr] = fp2real(eps_data);
        eps_cnt[eps_addr]++;
        eps_cycle[eps_addr] = cycle;
      end
    end
  end

  // throttling starts once the first half of the quartets has been stored,
  // so the rate check below only sees unthrottled quartets
  always @(negedge clk) begin
    if (eps_cnt[NQ / 2 - 1] != 0) throttle = 1;
    st_ready = throttle ? (($urandom % 3) != 0) : 1'b1;
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    for (int n = 0; n < NQ; n++) begin
      quartets[n] = rnd_quartet();
      ref_quartet(LA, LB, LC, LD, quartets[n], ref_eri[n], ref_bmax[n]);
      nchunk[n] = 0;
      eps_cnt[n] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NQ; n++) begin
      for (int w = 0; w < 2; w++) begin
        // in_ready does not depend on in_valid: sample it mid-cycle
        @(negedge clk);
        in_valid = 1;
        in_data  = w == 0 ? word_g(quartets[n]) : word_r(quartets[n]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1;
        in_valid = 0;
      end
    end
    while (eps_cnt[NQ - 1] == 0) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int n = 0; n < NQ; n++) begin
      real eps_ref, tol, err;
      checks++;
      if (nchunk[n] != NCS || eps_cnt[n] != 1) begin
        failures++;
        $display("FAIL [%0d%0d|%0d%0d] quartet %0d: %0d chunks, %0d epsilons", LA, LB, LC, LD, n, nchunk[n], eps_cnt[n]);
      end
      eps_ref = ref_bmax[n] / real'(QMAX);
      checks++;
      if (rabs(eps_got[n] - eps_ref) > 1e-4 * eps_ref + 1e-30) begin
        failures++;
        $display("FAIL [%0d%0d|%0d%0d] quartet %0d: epsilon %g expected %g", LA, LB, LC, LD, n, eps_got[n], eps_ref);
      end
      tol = 0.5 * eps_ref + 2e-5 * ref_bmax[n] + 1e-30;
      for (int e = 0; e < NERI; e++) begin
        err = rabs(real'(codes[n][e]) * eps_got[n] - ref_eri[n][e]);
        checks++;
        if (err > tol) begin
          failures++;
          if (failures < 10)
            $display("FAIL [%0d%0d|%0d%0d] quartet %0d ERI %0d: %g vs %g", LA, LB, LC, LD, n, e,
                     real'(codes[n][e]) * eps_got[n], ref_eri[n][e]);
        end
      end
    end
    for (int n = 3; n < NQ / 2; n++) begin
      checks++;
      if (eps_cycle[n] - eps_cycle[n - 1] != RATE) begin
        failures++;
        $display("FAIL [%0d%0d|%0d%0d] interval %0d cycles, expected %0d", LA, LB, LC, LD,
                 eps_cycle[n] - eps_cycle[n - 1], RATE);
      end
    end
    $display("class [%0d%0d|%0d%0d] %0d-bit: n_RR=%0d n_GQ=%0d n_CS=%0d, %0d cycles per quartet, %0d quartets checked",
             LA, LB, LC, LD, NBITS, NRR, NGQ, NCS, RATE, NQ);
    done = 1;
  end
endmodule
