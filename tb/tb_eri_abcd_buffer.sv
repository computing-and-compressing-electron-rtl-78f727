// tb_eri_abcd_buffer: self-checking testbench for the [ab|cd] buffer.
//
// Writes every row of every private copy with values that encode slot, row
// and lane, commits an epsilon per slot, and then reads random row windows
// of RPC rows, checking each lane, the zero rows past the end and epsilon.
module tb_eri_abcd_buffer;
  localparam int LA = 1, LB = 1, LC = 1, LD = 1, CMAX = 8, RPC = 4;
  localparam int NGAB = 9, NROWS = 9;

  logic clk = 0;
  logic wr_en = 0, wr_commit = 0;
  logic [2:0] wr_slot = 0, rd_slot = 0;
  logic [3:0] wr_row = 0;
  logic [31:0] wr_data [NGAB];
  logic [31:0] wr_eps = 0;
  logic [3:0] rd_row = 0;
  logic [31:0] rd_data [RPC][NGAB];
  logic [31:0] rd_eps;
  int checks = 0, failures = 0;

  eri_abcd_buffer #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .CMAX(CMAX), .RPC(RPC)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] tag(int s, int r, int e);
    return 32'((s * 16 + r) * 16 + e + 5);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < CMAX; s++)
      for (int r = 0; r < NROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_slot = 3'(s); wr_row = 4'(r);
        for (int e = 0; e < NGAB; e++) wr_data[e] = tag(s, r, e);
        wr_commit = (r == NROWS - 1);
        wr_eps = 32'(77 * s + 3);
      end
    @(negedge clk);
    wr_en = 0; wr_commit = 0;
    for (int t = 0; t < 300; t++) begin
      int s, r0;
      s = $urandom % CMAX;
      r0 = $urandom % NROWS;
      rd_slot = 3'(s);
      rd_row = 4'(r0);
      #1;
      for (int r = 0; r < RPC; r++)
        for (int e = 0; e < NGAB; e++) begin
          checks++;
          if (rd_data[r][e] != ((r0 + r < NROWS) ? tag(s, r0 + r, e) : 32'd0)) begin
            failures++;
            $display("FAIL slot %0d row %0d lane %0d", s, r0 + r, e);
          end
        end
      checks++;
      if (rd_eps != 32'(77 * s + 3)) begin failures++; $display("FAIL eps slot %0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
