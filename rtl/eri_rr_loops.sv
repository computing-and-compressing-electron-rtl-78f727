// eri_rr_loops: recurrence-relation loops of the ERI kernel.
//
// For every Cartesian axis xi and Rys root mu this stage builds the whole
// register set I_FF(i, j, k, l) in one fully unrolled combinational datapath:
//   VRR (build i and k on the "origin" I(0,0,0,0) = 1):
//     I(i+1,0,k,0) = i B2 I(i-1,0,k,0) + k B1 I(i,0,k-1,0) + C[xi]   I(i,0,k,0)
//     I(i,0,k+1,0) = k B3 I(i,0,k-1,0) + i B1 I(i-1,0,k,0) + C[3+xi] I(i,0,k,0)
//   HRR (transfer to b, then to d):
//     I(i,j,k,0) = I(i+1,j-1,k,0) + (R_A-R_B)_xi I(i,j-1,k,0)
//     I(i,j,k,l) = I(i,j,k+1,l-1) + (R_C-R_D)_xi I(i,j,k,l-1)
// with i <= La+Lb, j <= Lb, k <= Lc+Ld, l <= Ld. Entries the recurrences
// never reach (i+j > La+Lb or k+l > Lc+Ld) are written as zero.
//
// In the default ("ijk-unrolled") configuration the sequential loops run
// over xi (outer), mu, and l (inner): each cycle stores the I_FF(*,*,*,l)
// slice for one (xi, mu, l) into the I buffer, in parallel over i, j, k.
// One quartet therefore takes n_RR = 3 * NRYS * (LD+1) cycles, and the next
// quartet starts in the following cycle when setup data and a free buffer
// slot are there.
//
// Interface: in_valid/in_ready take one quartet's B, C, w and centre
// differences from the setup stage (in_ready pulses on the last cycle).
// slot_ok says the I buffer has a free private copy; wr_* is the buffer's
// write port; commit pulses with the last write and carries the weights w
// for the quadrature stage. Setting I(0,0,0,0,mu,xi) = 1 and keeping the
// weights for the quadrature stage is this design's reading of the paper's
// quadrature formula, which applies w_mu explicitly.
module eri_rr_loops
  import fp32_pkg::*;
  import eri_pkg::*;
#(
  parameter int LA = 1,
  parameter int LB = 1,
  parameter int LC = 1,
  parameter int LD = 1,
  localparam int NRYS = nrys(LA, LB, LC, LD),
  localparam int NI   = LA + LB + 1,
  localparam int NJ   = LB + 1,
  localparam int NK   = LC + LD + 1,
  localparam int NL   = LD + 1
) (
  input  logic   clk,
  input  logic   rst_n,
  // from setup
  input  logic   in_valid,
  output logic   in_ready,
  input  fp32_t  b_arr [3][NRYS],
  input  fp32_t  c_arr [6][NRYS],
  input  fp32_t  w_arr [NRYS],
  input  fp32_t  ab_d  [3],
  input  fp32_t  cd_d  [3],
  // to the I buffer
  input  logic   slot_ok,
  output logic   wr_en,
  output logic [1:0]               wr_xi,
  output logic [clog2(NRYS)-1:0] wr_mu,
  output logic [clog2(NL)-1:0]   wr_l,
  output fp32_t  wr_data [NI][NJ][NK],
  output logic   commit,
  output fp32_t  commit_w [NRYS],
  output logic   busy
);
  localparam int MW = clog2(NRYS);
  localparam int LW = clog2(NL);

  logic [1:0]    xi_c;
  logic [MW-1:0] mu_c;
  logic [LW-1:0] l_c;
  logic          run;
  logic          last;

  assign run    = in_valid && slot_ok;
  assign last   = (xi_c == 2'd2) && (mu_c == MW'(NRYS - 1)) && (l_c == LW'(NL - 1));
  assign wr_en  = run;
  assign wr_xi  = xi_c;
  assign wr_mu  = mu_c;
  assign wr_l   = l_c;
  assign commit = run && last;
  assign in_ready = run && last;
  assign commit_w = w_arr;
  assign busy   = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xi_c <= '0;
      mu_c <= '0;
      l_c  <= '0;
    end else if (run) begin
      if (l_c != LW'(NL - 1)) begin
        l_c <= l_c + 1'b1;
      end else begin
        l_c <= '0;
        if (mu_c != MW'(NRYS - 1)) begin
          mu_c <= mu_c + 1'b1;
        end else begin
          mu_c <= '0;
          xi_c <= (xi_c == 2'd2) ? 2'd0 : xi_c + 2'd1;
        end
      end
    end
  end

  // Fully unrolled VRR + HRR for the current (xi, mu).
  fp32_t i_ff [NI][NJ][NK][NL];

  always_comb begin
    fp32_t v [NI][NK];
    fp32_t b1, b2, b3, c0, c1, dab, dcd, t;
    b1  = b_arr[0][mu_c];
    b2  = b_arr[1][mu_c];
    b3  = b_arr[2][mu_c];
    c0  = c_arr[xi_c][mu_c];
    c1  = c_arr[3'(xi_c) + 3'd3][mu_c];
    dab = ab_d[xi_c];
    dcd = cd_d[xi_c];
    // VRR along i with k = 0
    for (int i = 0; i < NI; i++) for (int k = 0; k < NK; k++) v[i][k] = FP_ZERO;
    v[0][0] = FP_ONE;
    for (int i = 0; i + 1 < NI; i++) begin
      t = fp_mul(c0, v[i][0]);
      if (i > 0) t = fp_add(t, fp_mul(fp_mul(fp_from_uint(i), b2), v[i-1][0]));
      v[i+1][0] = t;
    end
    // VRR along k for every i
    for (int i = 0; i < NI; i++) begin
      for (int k = 0; k + 1 < NK; k++) begin
        t = fp_mul(c1, v[i][k]);
        if (k > 0) t = fp_add(t, fp_mul(fp_mul(fp_from_uint(k), b3), v[i][k-1]));
        if (i > 0) t = fp_add(t, fp_mul(fp_mul(fp_from_uint(i), b1), v[i-1][k]));
        v[i][k+1] = t;
      end
    end
    // HRR: j = 0, l = 0 plane from the VRR result
    for (int i = 0; i < NI; i++)
      for (int j = 0; j < NJ; j++)
        for (int k = 0; k < NK; k++)
          for (int l = 0; l < NL; l++)
            i_ff[i][j][k][l] = FP_ZERO;
    for (int i = 0; i < NI; i++)
      for (int k = 0; k < NK; k++)
        i_ff[i][0][k][0] = v[i][k];
    // HRR along j
    for (int j = 1; j < NJ; j++)
      for (int i = 0; i + j < NI; i++)
        for (int k = 0; k < NK; k++)
          i_ff[i][j][k][0] = fp_add(i_ff[i+1][j-1][k][0], fp_mul(dab, i_ff[i][j-1][k][0]));
    // HRR along l
    for (int l = 1; l < NL; l++)
      for (int k = 0; k + l < NK; k++)
        for (int i = 0; i < NI; i++)
          for (int j = 0; j < NJ; j++)
            if (i + j < NI)
              i_ff[i][j][k][l] = fp_add(i_ff[i][j][k+1][l-1], fp_mul(dcd, i_ff[i][j][k][l-1]));
  end

  always_comb begin
    for (int i = 0; i < NI; i++)
      for (int j = 0; j < NJ; j++)
        for (int k = 0; k < NK; k++)
          wr_data[i][j][k] = i_ff[i][j][k][l_c];
  end

endmodule
