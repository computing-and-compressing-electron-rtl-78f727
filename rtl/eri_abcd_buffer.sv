// eri_abcd_buffer: on-chip buffer for the ERIs [ab|cd] of a quartet.
//
// The a and b dimensions are fused into one bank dimension of NGA*NGB lanes
// (padded to a power of two); the c and d dimensions are fused into the
// depth (row = d*NGC + c). CMAX private copies (slots) hold successive
// quartets. Each slot also keeps its quantum value epsilon, written when the
// quadrature stage commits the slot.
//
// Write port: one row of NGA*NGB fp32 ERIs per cycle (quadrature loops).
// Read port: RPC consecutive rows starting at rd_row (compress-store loops);
// rows past the end read as zero. RPC > 1 only for classes whose row holds
// fewer ERIs than one 512-bit output chunk, so that a chunk can be filled in
// a single cycle; this multi-row read is this design's choice for how the
// compress-store loop keeps one chunk per cycle on small classes.
// Reads are combinational; writes land at the clock edge.
module eri_abcd_buffer
  import fp32_pkg::*;
  import eri_pkg::*;
#(
  parameter int LA    = 1,
  parameter int LB    = 1,
  parameter int LC    = 1,
  parameter int LD    = 1,
  parameter int CMAX  = 8,
  parameter int RPC   = 1,
  localparam int NGAB  = ng(LA) * ng(LB),
  localparam int NROWS = ng(LC) * ng(LD),
  localparam int SW    = clog2(CMAX),
  localparam int RW    = clog2(NROWS + 1)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [SW-1:0] wr_slot,
  input  logic [clog2(NROWS)-1:0] wr_row,
  input  fp32_t         wr_data [NGAB],
  input  logic          wr_commit,
  input  fp32_t         wr_eps,
  input  logic [SW-1:0] rd_slot,
  input  logic [RW-1:0] rd_row,
  output fp32_t         rd_data [RPC][NGAB],
  output fp32_t         rd_eps
);
  localparam int NGAB_P = pow2ceil(NGAB);

  fp32_t mem  [CMAX][NROWS][NGAB_P];
  fp32_t emem [CMAX];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int e = 0; e < NGAB; e++) mem[wr_slot][wr_row][e] <= wr_data[e];
    if (wr_commit) emem[wr_slot] <= wr_eps;
  end

  always_comb begin
    for (int r = 0; r < RPC; r++)
      for (int e = 0; e < NGAB; e++)
        rd_data[r][e] = (int'(rd_row) + r < NROWS) ? mem[rd_slot][int'(rd_row) + r][e] : FP_ZERO;
    rd_eps = emem[rd_slot];
  end

endmodule
