// eri_compress_store: compress-store loops of the ERI kernel.
//
// Turns the fp32 ERIs of one quartet into NBITS-bit signed integers,
//   q = ANINT([ab|cd] * epsilon^-1),  epsilon^-1 from one fp32 division,
// and streams them out in 512-bit chunks, EPC = floor(512/NBITS) ERIs per
// chunk (ERI e of a chunk at bits e*NBITS +: NBITS, the unused top bits
// zero). ERIs leave in the order the quadrature produced them (row by row,
// lane by lane), so a quartet takes exactly n_CS = ceil(NGA*NGB*NGC*NGD/EPC)
// chunk cycles.
//
// Each iteration (one cycle, when the store stream is ready):
//   * if the remainder register Y holds fewer than EPC ERIs and rows are
//     left, RPC rows are loaded from the [ab|cd] buffer and compressed in
//     parallel into X;
//   * the chunk Z is the first EPC ERIs of Y followed by X;
//   * what is left over stays in Y for the next chunk.
// With the last (possibly partial) chunk the slot is released and epsilon is
// presented on the 32-bit output. Values that round past the largest code
// (possible through fp32 rounding) saturate at +/-(2^(NBITS-1)-1); a quartet
// whose ERIs are all zero (epsilon = 0) is written as zeros.
//
// Interface: cs_ok/cs_release talk to the [ab|cd] buffer's private copies;
// st_valid/st_ready/st_data/st_addr is the 512-bit store to global memory,
// st_addr counting chunks over the whole run; eps_valid/eps_data/eps_addr
// (quartet number) is the 32-bit store and shares st_ready.
// The reset also disables the handshake assertions (disable iff), which is
// why a linter may report rst_n as used both synchronously and asynchronously.
module eri_compress_store
  import fp32_pkg::*;
  import eri_pkg::*;
#(
  parameter int LA    = 1,
  parameter int LB    = 1,
  parameter int LC    = 1,
  parameter int LD    = 1,
  parameter int NBITS = 16,
  localparam int NGAB  = ng(LA) * ng(LB),
  localparam int NROWS = ng(LC) * ng(LD),
  localparam int EPC   = WORD_BITS / NBITS,
  localparam int RPC   = (cdiv(EPC, NGAB) < NROWS) ? cdiv(EPC, NGAB) : NROWS,
  localparam int XN    = RPC * NGAB,
  localparam int NCS   = cdiv(NGAB * NROWS, EPC),
  localparam int RW    = clog2(NROWS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // [ab|cd] buffer (consumer side)
  input  logic                  cs_ok,
  output logic                  cs_release,
  output logic [RW-1:0]         rd_row,
  input  fp32_t                 rd_data [RPC][NGAB],
  input  fp32_t                 rd_eps,
  // store streams to global memory
  output logic                  st_valid,
  input  logic                  st_ready,
  output logic [WORD_BITS-1:0]  st_data,
  output logic [31:0]           st_addr,
  output logic                  st_last,
  output logic                  eps_valid,
  output fp32_t                 eps_data,
  output logic [31:0]           eps_addr,
  output logic                  carry      // chunk used ERIs left over from the previous one
);
  localparam int YMAX = (EPC > XN) ? EPC : XN;
  localparam int ZN   = YMAX + XN;
  localparam int QMAX = (1 << (NBITS - 1)) - 1;
  localparam int CNW  = clog2(ZN + 1);

  typedef logic [NBITS-1:0] code_t;

  logic [RW-1:0]  rp;
  code_t          y [YMAX];
  logic [CNW-1:0] ycnt;
  logic [31:0]    chunk_no, quartet_no;

  code_t          x [XN];
  code_t          z [ZN];
  logic           load, done, go;
  int             xcnt, total;
  fp32_t          eps_inv;

  assign go       = cs_ok && st_ready;
  assign rd_row   = rp;
  assign load     = (int'(ycnt) < EPC) && (int'(rp) < NROWS);
  assign eps_inv  = fp_div(FP_ONE, rd_eps);

  // Compress the loaded rows (unrolled).
  always_comb begin
    for (int r = 0; r < RPC; r++)
      for (int e = 0; e < NGAB; e++)
        x[r * NGAB + e] = fp_is_zero(rd_eps) ? '0
                        : NBITS'(fp_to_int(fp_mul(rd_data[r][e], eps_inv), QMAX));
  end

  // Y followed by X.
  always_comb begin
    xcnt = 0;
    if (load) xcnt = ((NROWS - int'(rp) < RPC) ? NROWS - int'(rp) : RPC) * NGAB;
    total = int'(ycnt) + xcnt;
    for (int i = 0; i < ZN; i++) begin
      z[i] = '0;
      if (i < int'(ycnt) && i < YMAX) z[i] = y[i];
      else if (i - int'(ycnt) >= 0 && i - int'(ycnt) < xcnt) z[i] = x[i - int'(ycnt)];
    end
    done = (int'(rp) + (load ? RPC : 0) >= NROWS) && (total <= EPC);
  end

  always_comb begin
    st_data = '0;
    for (int e = 0; e < EPC; e++)
      if (e < total) st_data[e * NBITS +: NBITS] = z[e];
  end

  assign st_valid   = cs_ok;
  assign st_addr    = quartet_no * NCS + chunk_no;
  assign st_last    = done;
  assign eps_valid  = cs_ok && done;
  assign eps_data   = rd_eps;
  assign eps_addr   = quartet_no;
  assign cs_release = go && done;
  assign carry      = cs_ok && (ycnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp         <= '0;
      ycnt       <= '0;
      chunk_no   <= '0;
      quartet_no <= '0;
      for (int i = 0; i < YMAX; i++) y[i] <= '0;
    end else if (go) begin
      if (done) begin
        rp         <= '0;
        ycnt       <= '0;
        chunk_no   <= '0;
        quartet_no <= quartet_no + 1;
      end else begin
        if (load) rp <= RW'(int'(rp) + RPC);
        ycnt     <= CNW'(total - EPC);
        chunk_no <= chunk_no + 1;
        for (int i = 0; i < YMAX; i++) y[i] <= z[i + EPC < ZN ? i + EPC : ZN - 1];
      end
    end
  end

  // A quartet always leaves in exactly NCS chunks.
  a_ncs: assert property (@(posedge clk) disable iff (!rst_n)
                          (go && done) |-> (chunk_no == 32'(NCS - 1)));

endmodule
