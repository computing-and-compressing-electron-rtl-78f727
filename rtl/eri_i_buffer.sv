// eri_i_buffer: on-chip buffer for the recursive intermediates I(i,j,k,l,mu,xi).
//
// Layout follows the default banking of the kernel: mu is the bank width
// (padded to a power of two), xi (padded to 4), i, j and k (each padded to a
// power of two) select the bank, and l is the only address (depth) bit
// field. On top of that the buffer holds CMAX private copies, one per quartet
// in flight, which add to the depth.
//
// Write port (recurrence loops): one (slot, xi, mu, l) per cycle, all
// i, j, k banks in parallel; only lane mu of each bank word is written.
// Read port (quadrature loops): for one (c, d) GTO pair the reader gives
// per axis xi the k = c_xi and l = d_xi it needs; it gets back every
// i, j and mu for all three axes at once. Reads are combinational
// (register/MLAB style); writes land at the clock edge.
//
// The slot's Rys weights w_mu are kept beside the data (written on commit)
// so that they travel with the quartet to the quadrature stage.
module eri_i_buffer
  import fp32_pkg::*;
  import eri_pkg::*;
#(
  parameter int LA   = 1,
  parameter int LB   = 1,
  parameter int LC   = 1,
  parameter int LD   = 1,
  parameter int CMAX = 8,
  localparam int NRYS = nrys(LA, LB, LC, LD),
  localparam int NI   = LA + LB + 1,
  localparam int NJ   = LB + 1,
  localparam int NK   = LC + LD + 1,
  localparam int NL   = LD + 1,
  localparam int SW   = clog2(CMAX)
) (
  input  logic          clk,
  // write side
  input  logic          wr_en,
  input  logic [SW-1:0] wr_slot,
  input  logic [1:0]    wr_xi,
  input  logic [clog2(NRYS)-1:0] wr_mu,
  input  logic [clog2(NL)-1:0]   wr_l,
  input  fp32_t         wr_data [NI][NJ][NK],
  input  logic          wr_commit,
  input  fp32_t         wr_w [NRYS],
  // read side
  input  logic [SW-1:0] rd_slot,
  input  logic [clog2(NK)-1:0] rd_k [3],
  input  logic [clog2(NL)-1:0] rd_l [3],
  output fp32_t         rd_data [3][NI][NJ][NRYS],
  output fp32_t         rd_w [NRYS]
);
  // Padded geometry of the banks.
  localparam int NMU_P = pow2ceil(NRYS);
  localparam int NI_P  = pow2ceil(NI);
  localparam int NJ_P  = pow2ceil(NJ);
  localparam int NK_P  = pow2ceil(NK);
  localparam int NXI_P = 4;

  // mem[slot][l][xi][i][j][k] is one bank word of NMU_P lanes.
  fp32_t mem  [CMAX][NL][NXI_P][NI_P][NJ_P][NK_P][NMU_P];
  fp32_t wmem [CMAX][NRYS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < NJ; j++)
          for (int k = 0; k < NK; k++)
            mem[wr_slot][wr_l][wr_xi][i][j][k][wr_mu] <= wr_data[i][j][k];
    end
    if (wr_commit) wmem[wr_slot] <= wr_w;
  end

  always_comb begin
    for (int x = 0; x < 3; x++)
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < NJ; j++)
          for (int m = 0; m < NRYS; m++)
            rd_data[x][i][j][m] = mem[rd_slot][rd_l[x]][x][i][j][rd_k[x]][m];
    rd_w = wmem[rd_slot];
  end

endmodule
