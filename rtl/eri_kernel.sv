// eri_kernel: ERI computation and compression kernel for one quartet class.
//
// The [ab|cd] quartets loop: a stream of quartets, each given as two 512-bit
// words (G: centres and exponents, R: Rys roots and weights), runs through
// four stages that overlap on different quartets:
//
//   setup --> recurrence loops --[I buffer, CMAX copies]--> quadrature loops
//         --[[ab|cd] buffer, CMAX copies]--> compress-store loops --> store
//
// The class is fixed at elaboration by LA, LB, LC, LD (the default is
// [pp|pp]); NBITS is the width of the compressed integers (16 by default)
// and CMAX the number of private copies of each buffer (the max_concurrency
// of the outer loop). In steady state a quartet costs
// max(2, n_RR, n_GQ, n_CS) cycles with
//   n_RR = 3 * NRYS * (LD+1),  n_GQ = NGC * NGD,  n_CS = ceil(NERIQ / floor(512/NBITS)),
// i.e. 18, 9 and 3 cycles for the default [pp|pp] with 16-bit codes.
// Back-pressure on the store stream stalls compress-store, and full
// buffers stall the stages before it.
//
// Ports: in_* is the 512-bit load stream (valid/ready), st_* the 512-bit
// store stream of compressed chunks and eps_* the 32-bit store of the
// quantum value epsilon per quartet; both stores share st_ready. The status
// outputs show buffer occupancy and stalls. Global memory and the host link
// sit outside this module.
// The reset also disables the handshake assertions of the slot controllers
// and of compress-store (disable iff), which is why a linter may report
// rst_n as used both synchronously and asynchronously.
module eri_kernel
  import fp32_pkg::*;
  import eri_pkg::*;
#(
  parameter int LA    = 1,
  parameter int LB    = 1,
  parameter int LC    = 1,
  parameter int LD    = 1,
  parameter int NBITS = 16,
  parameter int CMAX  = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [WORD_BITS-1:0]  in_data,
  output logic                  st_valid,
  input  logic                  st_ready,
  output logic [WORD_BITS-1:0]  st_data,
  output logic [31:0]           st_addr,
  output logic                  st_last,
  output logic                  eps_valid,
  output logic [31:0]           eps_data,
  output logic [31:0]           eps_addr,
  // status
  output logic [clog2(CMAX):0]  i_used,
  output logic [clog2(CMAX):0]  abcd_used,
  output logic                  rr_stall,     // setup data waiting, no free I copy
  output logic                  gq_stall,     // I copy ready, no free [ab|cd] copy
  output logic                  cs_carry      // chunk starts with a carried remainder
);
  localparam int NRYS  = nrys(LA, LB, LC, LD);
  localparam int NI    = LA + LB + 1;
  localparam int NJ    = LB + 1;
  localparam int NK    = LC + LD + 1;
  localparam int NL    = LD + 1;
  localparam int NGAB  = ng(LA) * ng(LB);
  localparam int NROWS = ng(LC) * ng(LD);
  localparam int EPC   = WORD_BITS / NBITS;
  localparam int RPC   = (cdiv(EPC, NGAB) < NROWS) ? cdiv(EPC, NGAB) : NROWS;
  localparam int SW    = clog2(CMAX);

  // setup -> recurrence loops
  logic  su_valid, su_ready;
  fp32_t b_arr [3][NRYS];
  fp32_t c_arr [6][NRYS];
  fp32_t w_arr [NRYS];
  fp32_t ab_d [3], cd_d [3];

  eri_setup #(.LA(LA), .LB(LB), .LC(LC), .LD(LD)) u_setup (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(su_valid), .out_ready(su_ready),
    .b_arr, .c_arr, .w_arr, .ab_d, .cd_d
  );

  // recurrence loops -> I buffer
  logic              i_prod_ok, i_commit, i_cons_ok, i_release, rr_wr_en, rr_busy;
  logic [SW-1:0]     i_prod_slot, i_cons_slot;
  logic [1:0]        rr_xi;
  logic [clog2(NRYS)-1:0] rr_mu;
  logic [clog2(NL)-1:0]   rr_l;
  fp32_t             rr_data [NI][NJ][NK];
  fp32_t             rr_w [NRYS];

  eri_rr_loops #(.LA(LA), .LB(LB), .LC(LC), .LD(LD)) u_rr (
    .clk, .rst_n,
    .in_valid(su_valid), .in_ready(su_ready),
    .b_arr, .c_arr, .w_arr, .ab_d, .cd_d,
    .slot_ok(i_prod_ok),
    .wr_en(rr_wr_en), .wr_xi(rr_xi), .wr_mu(rr_mu), .wr_l(rr_l), .wr_data(rr_data),
    .commit(i_commit), .commit_w(rr_w), .busy(rr_busy)
  );

  eri_slot_ctrl #(.CMAX(CMAX)) u_i_slots (
    .clk, .rst_n,
    .prod_ok(i_prod_ok), .prod_slot(i_prod_slot), .prod_commit(i_commit),
    .cons_ok(i_cons_ok), .cons_slot(i_cons_slot), .cons_release(i_release),
    .used(i_used)
  );

  logic [clog2(NK)-1:0] gq_k [3];
  logic [clog2(NL)-1:0] gq_l [3];
  fp32_t                i_rd [3][NI][NJ][NRYS];
  fp32_t                i_rd_w [NRYS];

  eri_i_buffer #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .CMAX(CMAX)) u_i_buf (
    .clk,
    .wr_en(rr_wr_en), .wr_slot(i_prod_slot), .wr_xi(rr_xi), .wr_mu(rr_mu), .wr_l(rr_l),
    .wr_data(rr_data), .wr_commit(i_commit), .wr_w(rr_w),
    .rd_slot(i_cons_slot), .rd_k(gq_k), .rd_l(gq_l), .rd_data(i_rd), .rd_w(i_rd_w)
  );

  // quadrature loops -> [ab|cd] buffer
  logic              a_prod_ok, a_commit, a_cons_ok, a_release, gq_wr_en;
  logic [SW-1:0]     a_prod_slot, a_cons_slot;
  logic [clog2(NROWS)-1:0] gq_row;
  fp32_t             gq_data [NGAB];
  fp32_t             gq_eps;

  eri_quadrature #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .NBITS(NBITS)) u_gq (
    .clk, .rst_n,
    .i_ok(i_cons_ok), .i_release, .rd_k(gq_k), .rd_l(gq_l), .rd_data(i_rd), .rd_w(i_rd_w),
    .o_ok(a_prod_ok), .wr_en(gq_wr_en), .wr_row(gq_row), .wr_data(gq_data),
    .o_commit(a_commit), .o_eps(gq_eps)
  );

  eri_slot_ctrl #(.CMAX(CMAX)) u_abcd_slots (
    .clk, .rst_n,
    .prod_ok(a_prod_ok), .prod_slot(a_prod_slot), .prod_commit(a_commit),
    .cons_ok(a_cons_ok), .cons_slot(a_cons_slot), .cons_release(a_release),
    .used(abcd_used)
  );

  logic [clog2(NROWS+1)-1:0] cs_row;
  fp32_t                     a_rd [RPC][NGAB];
  fp32_t                     a_rd_eps;

  eri_abcd_buffer #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .CMAX(CMAX), .RPC(RPC)) u_abcd_buf (
    .clk,
    .wr_en(gq_wr_en), .wr_slot(a_prod_slot), .wr_row(gq_row), .wr_data(gq_data),
    .wr_commit(a_commit), .wr_eps(gq_eps),
    .rd_slot(a_cons_slot), .rd_row(cs_row), .rd_data(a_rd), .rd_eps(a_rd_eps)
  );

  eri_compress_store #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .NBITS(NBITS)) u_cs (
    .clk, .rst_n,
    .cs_ok(a_cons_ok), .cs_release(a_release), .rd_row(cs_row), .rd_data(a_rd), .rd_eps(a_rd_eps),
    .st_valid, .st_ready, .st_data, .st_addr, .st_last,
    .eps_valid, .eps_data, .eps_addr, .carry(cs_carry)
  );

  assign rr_stall = su_valid && !i_prod_ok;
  assign gq_stall = i_cons_ok && !a_prod_ok;

endmodule
