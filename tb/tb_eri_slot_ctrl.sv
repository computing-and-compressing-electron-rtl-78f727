// tb_eri_slot_ctrl: self-checking testbench for the private-copy bookkeeping.
//
// Drives random commits and releases (only when the controller allows them)
// and compares prod_ok, cons_ok, the slot numbers and the fill count with a
// simple queue model every cycle. Both the full and the empty state must be
// reached, and a commit and a release in the same cycle must keep the count.
module tb_eri_slot_ctrl;
  localparam int CMAX = 8;

  logic clk = 0, rst_n = 0;
  logic prod_ok, cons_ok, prod_commit = 0, cons_release = 0;
  logic [2:0] prod_slot, cons_slot;
  logic [3:0] used;
  int checks = 0, failures = 0;

  eri_slot_ctrl #(.CMAX(CMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt, wp, rp, full_seen, empty_seen, both_seen;
    cnt = 0; wp = 0; rp = 0; full_seen = 0; empty_seen = 0; both_seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (prod_ok != (cnt < CMAX) || cons_ok != (cnt > 0) || int'(used) != cnt ||
          int'(prod_slot) != wp || int'(cons_slot) != rp) begin
        failures++;
        $display("FAIL t=%0d cnt=%0d used=%0d wp=%0d/%0d rp=%0d/%0d", t, cnt, used, wp, prod_slot, rp, cons_slot);
      end
      if (cnt == CMAX) full_seen++;
      if (cnt == 0) empty_seen++;
      // phases bias the traffic towards filling or draining
      prod_commit  = prod_ok && (($urandom % 100) < ((t / 300) % 2 != 0 ? 30 : 70));
      cons_release = cons_ok && (($urandom % 100) < ((t / 300) % 2 != 0 ? 70 : 30));
      if (prod_commit && cons_release) both_seen++;
      if (prod_commit)  begin cnt++; wp = (wp + 1) % CMAX; end
      if (cons_release) begin cnt--; rp = (rp + 1) % CMAX; end
    end
    checks++;
    if (full_seen == 0 || empty_seen == 0 || both_seen == 0) begin
      failures++;
      $display("FAIL coverage full=%0d empty=%0d both=%0d", full_seen, empty_seen, both_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
