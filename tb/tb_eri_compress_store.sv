// tb_eri_compress_store: self-checking testbench for the compress-store loops.
//
// A model of the [ab|cd] buffer holds one quartet of random ERIs and its
// epsilon; the store stream is throttled at random. The chunks are unpacked
// and every code is compared with ANINT(x / epsilon) worked out in double
// precision (off by at most one code for fp32 rounding), padding lanes must
// be zero, the quartet must take exactly n_CS chunks with consecutive
// addresses, and epsilon must be stored once with the last chunk. One
// quartet has epsilon = 0, one has values that round past the largest code.
module tb_eri_compress_store;
  import eri_ref_pkg::*;

  localparam int LA = 1, LB = 1, LC = 1, LD = 1, NBITS = 16;
  localparam int NGAB = 9, NROWS = 9, NERI = 81;
  localparam int EPC = 512 / NBITS;
  localparam int RPC = (EPC + NGAB - 1) / NGAB;
  localparam int NCS = (NERI + EPC - 1) / EPC;
  localparam int QMAX = (1 << (NBITS - 1)) - 1;

  logic clk = 0, rst_n = 0;
  logic cs_ok = 0, cs_release;
  logic [$clog2(NROWS + 1)-1:0] rd_row;
  logic [31:0] rd_data [RPC][NGAB];
  logic [31:0] rd_eps;
  logic st_valid, st_ready = 0, st_last, eps_valid, carry;
  logic [511:0] st_data;
  logic [31:0] st_addr, eps_data, eps_addr;
  int checks = 0, failures = 0;

  eri_compress_store #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .NBITS(NBITS)) dut (.*);

  always #5 clk = ~clk;

  logic [31:0] abuf [NROWS][NGAB];
  always_comb
    for (int r = 0; r < RPC; r++)
      for (int e = 0; e < NGAB; e++)
        rd_data[r][e] = (int'(rd_row) + r < NROWS) ? abuf[int'(rd_row) + r][e] : 32'd0;

  int codes [$];
  int nchunks, neps, exp_addr, carries;
  always @(posedge clk) begin
    if (st_valid && st_ready) begin
      int n_in;
      n_in = (NERI - nchunks * EPC < EPC) ? NERI - nchunks * EPC : EPC;
      checks++;
      if (st_addr != exp_addr) begin failures++; $display("FAIL addr %0d expected %0d", st_addr, exp_addr); end
      exp_addr++;
      for (int e = 0; e < EPC; e++) begin
        if (e < n_in) codes.push_back(int'($signed(st_data[e * NBITS +: NBITS])));
        else begin
          checks++;
          if (st_data[e * NBITS +: NBITS] != '0) begin failures++; $display("FAIL padding lane %0d", e); end
        end
      end
      checks++;
      if (st_data[511:EPC * NBITS] != '0 && EPC * NBITS < 512) begin failures++; $display("FAIL top padding"); end
      nchunks++;
      if (eps_valid) begin
        neps++;
        checks++;
        if (eps_data != rd_eps || !st_last) begin failures++; $display("FAIL eps store"); end
      end
      if (carry) carries++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x [NERI], bmax, eps, inv;
    int  q_ref, start_addr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    exp_addr = 0;
    for (int n = 0; n < 12; n++) begin
      bmax = 0.0;
      for (int i = 0; i < NERI; i++) begin
        x[i] = (n == 2) ? 0.0 : fp2real(rnd_fp(-3.0, 3.0)) * ((n % 3 == 1) ? 1e-4 : 1.0);
        if (rabs(x[i]) > bmax) bmax = rabs(x[i]);
        abuf[i / NGAB][i % NGAB] = real2fp(x[i]);
      end
      eps = bmax / real'(QMAX);
      if (n == 5) eps = eps * 0.999;          // forces saturation of the largest value
      rd_eps = real2fp(eps);
      eps = fp2real(rd_eps);
      codes.delete();
      nchunks = 0;
      neps = 0;
      start_addr = exp_addr;
      @(negedge clk);
      cs_ok = 1;
      forever begin
        st_ready = ($urandom % 3) != 0;
        @(posedge clk);
        if (cs_release) break;
        @(negedge clk);
      end
      @(negedge clk);
      cs_ok = 0;
      st_ready = 0;
      checks++;
      if (nchunks != NCS || neps != 1) begin failures++; $display("FAIL %0d chunks (expected %0d), %0d eps", nchunks, NCS, neps); end
      checks++;
      if (eps_addr != 32'(n + 1) || start_addr != n * NCS) begin failures++; $display("FAIL quartet numbering"); end
      for (int i = 0; i < NERI && i < codes.size(); i++) begin
        if (eps == 0.0) q_ref = 0;
        else begin
          inv = x[i] / eps;
          q_ref = (inv >= 0.0) ? int'($floor(inv + 0.5)) : -int'($floor(-inv + 0.5));
          if (q_ref > QMAX) q_ref = QMAX;
          if (q_ref < -QMAX) q_ref = -QMAX;
        end
        checks++;
        if (codes[i] - q_ref > 1 || q_ref - codes[i] > 1) begin
          failures++;
          $display("FAIL quartet %0d ERI %0d: code %0d expected %0d", n, i, codes[i], q_ref);
        end
      end
      checks++;
      if (codes.size() != NERI) begin failures++; $display("FAIL %0d codes", codes.size()); end
    end
    checks++;
    if (carries == 0) begin failures++; $display("FAIL remainder never carried"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
