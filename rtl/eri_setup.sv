// eri_setup: setup stage of the ERI kernel.
//
// Takes the two 512-bit input words of one quartet from global memory, word
// G (the four GTO centres and exponents) first and word R (Rys roots and
// weights) second, so a quartet costs two input cycles. From them it builds
// the auxiliary arrays B (3 x NRYS) and C (6 x NRYS), held in registers, and
// the centre differences used by the horizontal recurrences. All loops
// (3 axes x NRYS roots) are unrolled into parallel fp32 operators.
//
// The paper defers the formulas for B and C to Rys, Dupuis and King; this
// block uses the standard ones, with A = alpha+beta, B' = gamma+delta,
// P = (alpha R_A + beta R_B)/A, Q = (gamma R_C + delta R_D)/B', and the
// root t2 = t_mu^2 as delivered by the host:
//   B[0] (B1, "B00") = t2 / (2(A+B'))
//   B[1] (B2, "B10") = 1/(2A)  - B' t2 / (2A(A+B'))
//   B[2] (B3, "B01") = 1/(2B') - A  t2 / (2B'(A+B'))
//   C[xi]   = (P - R_A)_xi - B' (P - Q)_xi t2 / (A+B')
//   C[3+xi] = (Q - R_C)_xi + A  (P - Q)_xi t2 / (A+B')
// Three divisions are used (1/A, 1/B', 1/(A+B')).
//
// Interface: in_valid/in_ready carry the 512-bit words; out_valid/out_ready
// hand one quartet's arrays to the recurrence stage. Word G is registered;
// the arrays are computed from it and word R as R arrives and are held in
// output registers until out_ready, so the next quartet's word G can be
// taken while the current one is still in use, and its word R in the cycle
// the current one is released. The stage thus never adds bubbles between
// quartets.
module eri_setup
  import fp32_pkg::*;
  import eri_pkg::*;
#(
  parameter int LA = 1,
  parameter int LB = 1,
  parameter int LC = 1,
  parameter int LD = 1,
  localparam int NRYS = nrys(LA, LB, LC, LD)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [WORD_BITS-1:0]  in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output fp32_t                 b_arr  [3][NRYS],
  output fp32_t                 c_arr  [6][NRYS],
  output fp32_t                 w_arr  [NRYS],
  output fp32_t                 ab_d   [3],     // R_A - R_B
  output fp32_t                 cd_d   [3]      // R_C - R_D
);
  localparam fp32_t FP_HALF = 32'h3F00_0000;

  logic [WORD_BITS-1:0] g_word;
  logic                 have_g, full;
  logic                 take_g, take_r;

  // Word G can always be taken (the results are held in separate registers);
  // word R only when the result registers are free or being emptied.
  assign in_ready  = have_g ? (!full || out_ready) : 1'b1;
  assign take_g    = in_valid && in_ready && !have_g;
  assign take_r    = in_valid && in_ready && have_g;
  assign out_valid = full;

  fp32_t b_n [3][NRYS];
  fp32_t c_n [6][NRYS];
  fp32_t w_n [NRYS];
  fp32_t ab_n [3], cd_n [3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_g <= 1'b0;
      full   <= 1'b0;
      g_word <= '0;
    end else begin
      if (full && out_ready) full <= 1'b0;
      if (take_g) begin
        g_word <= in_data;
        have_g <= 1'b1;
      end
      if (take_r) begin
        have_g <= 1'b0;
        full   <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take_r) begin
      b_arr <= b_n;
      c_arr <= c_n;
      w_arr <= w_n;
      ab_d  <= ab_n;
      cd_d  <= cd_n;
    end
  end

  function automatic fp32_t fld(input logic [WORD_BITS-1:0] w, input int f);
    return w[32*f +: 32];
  endfunction

  always_comb begin
    fp32_t ra [3], rb [3], rc [3], rd [3];
    fp32_t al, be, ga, de, pa, pb, pab, inv_a, inv_b, inv_ab;
    fp32_t p [3], q [3], pq [3];
    fp32_t t2, ht, b1, b2, b3;
    for (int x = 0; x < 3; x++) begin
      ra[x] = fld(g_word, x);
      rb[x] = fld(g_word, 3 + x);
      rc[x] = fld(g_word, 6 + x);
      rd[x] = fld(g_word, 9 + x);
    end
    al = fld(g_word, 12);
    be = fld(g_word, 13);
    ga = fld(g_word, 14);
    de = fld(g_word, 15);
    pa     = fp_add(al, be);
    pb     = fp_add(ga, de);
    pab    = fp_add(pa, pb);
    inv_a  = fp_div(FP_ONE, pa);
    inv_b  = fp_div(FP_ONE, pb);
    inv_ab = fp_div(FP_ONE, pab);
    for (int x = 0; x < 3; x++) begin
      p[x]  = fp_mul(fp_add(fp_mul(al, ra[x]), fp_mul(be, rb[x])), inv_a);
      q[x]  = fp_mul(fp_add(fp_mul(ga, rc[x]), fp_mul(de, rd[x])), inv_b);
      pq[x] = fp_sub(p[x], q[x]);
      ab_n[x] = fp_sub(ra[x], rb[x]);
      cd_n[x] = fp_sub(rc[x], rd[x]);
    end
    for (int m = 0; m < NRYS; m++) begin
      t2 = fld(in_data, m);
      w_n[m] = fld(in_data, MAX_RYS + m);
      ht = fp_mul(t2, inv_ab);                       // t2/(A+B')
      b1 = fp_mul(FP_HALF, ht);
      b2 = fp_mul(FP_HALF, fp_mul(inv_a, fp_sub(FP_ONE, fp_mul(pb, ht))));
      b3 = fp_mul(FP_HALF, fp_mul(inv_b, fp_sub(FP_ONE, fp_mul(pa, ht))));
      b_n[0][m] = b1;
      b_n[1][m] = b2;
      b_n[2][m] = b3;
      for (int x = 0; x < 3; x++) begin
        c_n[x][m]     = fp_sub(fp_sub(p[x], ra[x]), fp_mul(fp_mul(pb, pq[x]), ht));
        c_n[3 + x][m] = fp_add(fp_sub(q[x], rc[x]), fp_mul(fp_mul(pa, pq[x]), ht));
      end
    end
  end

endmodule
