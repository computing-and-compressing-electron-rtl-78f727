// eri_slot_ctrl: bookkeeping of the private copies of one local buffer.
//
// Successive quartets overlap in the pipeline of the outer quartets loop, so
// each buffer between two stages holds CMAX private copies (slots), one per
// quartet in flight. The producing stage fills slot prod_slot and pulses
// prod_commit when the quartet is complete; the consuming stage reads slot
// cons_slot and pulses cons_release when it is done with it. Slots are used
// in ring order, so quartets leave in the order they came.
//
//   prod_ok  : a free slot exists (the producer stalls otherwise)
//   cons_ok  : a filled slot exists (the consumer waits otherwise)
//   used     : number of committed, not yet released slots
//
// Commit and release take effect at the next clock edge; both may happen in
// the same cycle. The slot count CMAX corresponds to the max_concurrency
// value of the kernel (the paper starts its search at 8).
// The reset also disables the handshake assertions (disable iff), which is
// why a linter may report rst_n as used both synchronously and asynchronously.
module eri_slot_ctrl
  import eri_pkg::*;
#(
  parameter int CMAX = 8,
  localparam int PW = clog2(CMAX)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  output logic                        prod_ok,
  output logic [PW-1:0]               prod_slot,
  input  logic                        prod_commit,
  output logic                        cons_ok,
  output logic [PW-1:0]               cons_slot,
  input  logic                        cons_release,
  output logic [PW:0]                 used
);
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;

  assign prod_ok   = cnt < (PW+1)'(CMAX);
  assign cons_ok   = cnt != '0;
  assign prod_slot = wp;
  assign cons_slot = rp;
  assign used      = cnt;

  function automatic logic [PW-1:0] nxt(input logic [PW-1:0] p);
    return (p == PW'(CMAX - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (prod_commit)  wp <= nxt(wp);
      if (cons_release) rp <= nxt(rp);
      cnt <= cnt + (PW+1)'(prod_commit) - (PW+1)'(cons_release);
    end
  end

  // Handshake rules: never commit into a full ring, never release an empty one.
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) prod_commit |-> prod_ok;
  endproperty
  property p_no_underflow;
    @(posedge clk) disable iff (!rst_n) cons_release |-> cons_ok;
  endproperty
  a_no_overflow:  assert property (p_no_overflow);
  a_no_underflow: assert property (p_no_underflow);

endmodule
