// tb_eri_i_buffer: self-checking testbench for the I(i,j,k,l,mu,xi) buffer.
//
// Fills every private copy through the write port exactly as the recurrence
// loops do (one (xi, mu, l) per cycle, all i, j, k at once) with values that
// encode their own coordinates, then reads random (slot, k_xi, l_xi)
// combinations and checks every returned lane, and checks that the weights
// stored with a commit come back for the right slot.
module tb_eri_i_buffer;
  localparam int LA = 1, LB = 1, LC = 1, LD = 1, CMAX = 8;
  localparam int NR = 3, NI = 3, NJ = 2, NK = 3, NL = 2;

  logic clk = 0;
  logic wr_en = 0, wr_commit = 0;
  logic [2:0] wr_slot = 0, rd_slot = 0;
  logic [1:0] wr_xi = 0;
  logic [1:0] wr_mu = 0;
  logic [0:0] wr_l = 0;
  logic [31:0] wr_data [NI][NJ][NK];
  logic [31:0] wr_w [NR];
  logic [1:0] rd_k [3];
  logic [0:0] rd_l [3];
  logic [31:0] rd_data [3][NI][NJ][NR];
  logic [31:0] rd_w [NR];
  int checks = 0, failures = 0;

  eri_i_buffer #(.LA(LA), .LB(LB), .LC(LC), .LD(LD), .CMAX(CMAX)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] tag(int s, int x, int m, int i, int j, int k, int l);
    return 32'(((((((s * 4 + x) * 4 + m) * 4 + i) * 4 + j) * 4 + k) * 4 + l) * 7 + 1);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < CMAX; s++) begin
      for (int x = 0; x < 3; x++)
        for (int m = 0; m < NR; m++)
          for (int l = 0; l < NL; l++) begin
            @(negedge clk);
            wr_en = 1; wr_slot = 3'(s); wr_xi = 2'(x); wr_mu = 2'(m); wr_l = 1'(l);
            for (int i = 0; i < NI; i++)
              for (int j = 0; j < NJ; j++)
                for (int k = 0; k < NK; k++)
                  wr_data[i][j][k] = tag(s, x, m, i, j, k, l);
            wr_commit = (x == 2 && m == NR - 1 && l == NL - 1);
            for (int m2 = 0; m2 < NR; m2++) wr_w[m2] = 32'(1000 * s + m2);
          end
    end
    @(negedge clk);
    wr_en = 0; wr_commit = 0;
    for (int t = 0; t < 400; t++) begin
      int s;
      s = $urandom % CMAX;
      rd_slot = 3'(s);
      for (int x = 0; x < 3; x++) begin rd_k[x] = 2'($urandom % NK); rd_l[x] = 1'($urandom % NL); end
      #1;
      for (int x = 0; x < 3; x++)
        for (int i = 0; i < NI; i++)
          for (int j = 0; j < NJ; j++)
            for (int m = 0; m < NR; m++) begin
              checks++;
              if (rd_data[x][i][j][m] != tag(s, x, m, i, j, int'(rd_k[x]), int'(rd_l[x]))) begin
                failures++;
                $display("FAIL slot %0d xi %0d i %0d j %0d mu %0d", s, x, i, j, m);
              end
            end
      for (int m = 0; m < NR; m++) begin
        checks++;
        if (rd_w[m] != 32'(1000 * s + m)) begin failures++; $display("FAIL weight slot %0d", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
