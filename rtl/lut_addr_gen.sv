// lut_addr_gen: cyclic read pointer into the phasor pool.
//
// The pool is drawn from strictly in sequence: 0, 1, ..., N_LUT-1, 0, 1, ...
// Each accepted pixel advances the pointer by one, and, as the paper
// describes, successive sub-frames and frames simply continue from where the
// previous one stopped; the pointer is only returned to 0 by reset. Because
// the order is fixed, the next address is known in advance and needs no
// arithmetic beyond an increment and a compare (no modulo divider).
//
// Interface and timing: addr is the entry for the next pixel. A high step at
// a rising edge moves addr to (addr+1) mod N_LUT. wrap is high while addr is
// N_LUT-1, so step && wrap marks the cycle in which the pool is exhausted.
// Reset (rst_n low, synchronous) and its value are this design's choice.
module lut_addr_gen
  import lutpr_pkg::*;
#(
  parameter int unsigned N_LUT = N_LUT_DEFAULT,
  localparam int unsigned AW   = $clog2(N_LUT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          step,
  output logic [AW-1:0] addr,
  output logic          wrap
);

  localparam logic [AW-1:0] LAST = AW'(N_LUT - 1);

  assign wrap = (addr == LAST);

  always_ff @(posedge clk) begin
    if (!rst_n)    addr <= '0;
    else if (step) addr <= wrap ? '0 : addr + 1'b1;
  end

endmodule
