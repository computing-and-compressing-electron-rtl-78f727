// eri_quadrature: quadrature loops of the ERI kernel.
//
// Computes every ERI of the quartet by Gaussian quadrature,
//   [ab|cd] = sum_mu w_mu * I(a_x,b_x,c_x,d_x,mu,x) * I(..,y) * I(..,z),
// with the xi and mu loops and the loops over the GTOs a and b unrolled:
// each cycle produces the whole row [**|cd] of NGA*NGB ERIs for one (c, d)
// pair. The sequential loops run over d (outer) and c (inner), so a quartet
// takes n_GQ = NGC*NGD cycles. For each (c, d) the stage addresses the I
// buffer with k = c_xi and l = d_xi per axis. Products are formed as
// ((Ix*Iy)*Iz)*w_mu and accumulated over mu in ascending order.
//
// The stage also reduces b_max = max |[ab|cd]| over the quartet (a parallel
// reduction over the row plus a running maximum) and, with the last row,
// hands epsilon = b_max * (2^(NBITS-1) - 1)^-1 to the [ab|cd] buffer.
//
// Interface: i_ok/i_slot/i_release talk to the private copies of the I
// buffer, o_ok/o_commit to those of the [ab|cd] buffer; wr_* is the
// [ab|cd] buffer's write port (row = d*NGC + c, lane = b*NGA + a).
module eri_quadrature
  import fp32_pkg::*;
  import eri_pkg::*;
#(
  parameter int LA    = 1,
  parameter int LB    = 1,
  parameter int LC    = 1,
  parameter int LD    = 1,
  parameter int NBITS = 16,
  localparam int NRYS  = nrys(LA, LB, LC, LD),
  localparam int NI    = LA + LB + 1,
  localparam int NJ    = LB + 1,
  localparam int NK    = LC + LD + 1,
  localparam int NL    = LD + 1,
  localparam int NGA   = ng(LA),
  localparam int NGB   = ng(LB),
  localparam int NGC   = ng(LC),
  localparam int NGD   = ng(LD),
  localparam int NGAB  = NGA * NGB,
  localparam int NROWS = NGC * NGD
) (
  input  logic   clk,
  input  logic   rst_n,
  // I buffer (consumer side)
  input  logic   i_ok,
  output logic   i_release,
  output logic [clog2(NK)-1:0] rd_k [3],
  output logic [clog2(NL)-1:0] rd_l [3],
  input  fp32_t  rd_data [3][NI][NJ][NRYS],
  input  fp32_t  rd_w [NRYS],
  // [ab|cd] buffer (producer side)
  input  logic   o_ok,
  output logic   wr_en,
  output logic [clog2(NROWS)-1:0] wr_row,
  output fp32_t  wr_data [NGAB],
  output logic   o_commit,
  output fp32_t  o_eps
);
  localparam int CW = clog2(NGC);
  localparam int DW = clog2(NGD);

  logic [CW-1:0] c_cnt;
  logic [DW-1:0] d_cnt;
  logic          run, last;
  fp32_t         bmax_q, row_max, bmax_all, inv_qmax;

  assign run       = i_ok && o_ok;
  assign last      = (c_cnt == CW'(NGC - 1)) && (d_cnt == DW'(NGD - 1));
  assign wr_en     = run;
  assign wr_row    = clog2(NROWS)'(int'(d_cnt) * NGC + int'(c_cnt));
  assign i_release = run && last;
  assign o_commit  = run && last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_cnt  <= '0;
      d_cnt  <= '0;
      bmax_q <= FP_ZERO;
    end else if (run) begin
      bmax_q <= last ? FP_ZERO : bmax_all;
      if (c_cnt != CW'(NGC - 1)) begin
        c_cnt <= c_cnt + 1'b1;
      end else begin
        c_cnt <= '0;
        d_cnt <= (d_cnt == DW'(NGD - 1)) ? '0 : d_cnt + 1'b1;
      end
    end
  end

  // I buffer addresses: k = c_xi, l = d_xi.
  always_comb begin
    for (int x = 0; x < 3; x++) begin
      rd_k[x] = '0;
      rd_l[x] = '0;
      for (int c = 0; c < NGC; c++)
        if (int'(c_cnt) == c) rd_k[x] = clog2(NK)'(gto_comp(LC, c, x));
      for (int d = 0; d < NGD; d++)
        if (int'(d_cnt) == d) rd_l[x] = clog2(NL)'(gto_comp(LD, d, x));
    end
  end

  // Unrolled quadrature over xi, mu, a, b, and the row maximum.
  always_comb begin
    fp32_t acc, prod;
    row_max = FP_ZERO;
    for (int a = 0; a < NGA; a++) begin
      for (int b = 0; b < NGB; b++) begin
        acc = FP_ZERO;
        for (int m = 0; m < NRYS; m++) begin
          prod = fp_mul(rd_data[0][gto_comp(LA, a, 0)][gto_comp(LB, b, 0)][m],
                        rd_data[1][gto_comp(LA, a, 1)][gto_comp(LB, b, 1)][m]);
          prod = fp_mul(prod, rd_data[2][gto_comp(LA, a, 2)][gto_comp(LB, b, 2)][m]);
          acc  = fp_add(acc, fp_mul(prod, rd_w[m]));
        end
        wr_data[b * NGA + a] = acc;
        if (fp_abs_gt(acc, row_max)) row_max = fp_abs(acc);
      end
    end
  end

  assign bmax_all = fp_abs_gt(row_max, bmax_q) ? row_max : bmax_q;
  assign inv_qmax = fp_div(FP_ONE, fp_from_uint((1 << (NBITS - 1)) - 1));
  assign o_eps    = fp_mul(bmax_all, inv_qmax);

endmodule
