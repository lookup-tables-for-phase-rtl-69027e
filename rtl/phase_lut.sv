// phase_lut: the pool of random phasors, a read-only memory of N_LUT entries.
//
// Entry k holds {cos(2*pi*L_k), sin(2*pi*L_k)} as two signed PH_W-bit numbers
// scaled by A = 2^(PH_W-1)-1, where L_k is a uniform random number on [0,1).
// Following the paper, the numbers are fixed when the design is compiled:
// each entry is a constant computed at elaboration by lutpr_pkg::pool_entry
// (L_k = hash(SEED + k)/2^32, then an integer CORDIC), so the circuit holds
// only the memory and its output register. Storing the phasor, rather than
// the phase, is what removes the sine and cosine from the datapath. The
// generator, seed and component width are this design's choices.
//
// Interface and timing: synchronous read. When rd_en is high at a rising
// clock edge, cos_q/sin_q show entry rd_addr from that edge on; with rd_en
// low they hold. rd_addr must be below N_LUT.
module phase_lut
  import lutpr_pkg::*;
#(
  parameter int unsigned N_LUT = N_LUT_DEFAULT,
  parameter int unsigned PH_W  = PH_W_DEFAULT,
  parameter logic [31:0] SEED  = SEED_DEFAULT,
  localparam int unsigned AW   = $clog2(N_LUT)
) (
  input  logic                   clk,
  input  logic                   rd_en,
  input  logic [AW-1:0]          rd_addr,
  output logic signed [PH_W-1:0] cos_q,
  output logic signed [PH_W-1:0] sin_q
);

  logic [2*PH_W-1:0] rom [N_LUT];

  // One constant per entry, computed independently at elaboration.
  for (genvar k = 0; k < N_LUT; k++) begin : g_pool
    localparam logic [63:0] CS = pool_entry(SEED, k, PH_W);
    assign rom[k] = {CS[32 +: PH_W], CS[0 +: PH_W]};
  end

  always_ff @(posedge clk) begin
    if (rd_en) {cos_q, sin_q} <= rom[rd_addr];
  end

endmodule
