// Two-stage accumulator signature generator.
//
// Stage 1 (combinational) compacts the five router output links into one
// flit-wide word by adding their flits modulo 2^SIG_W; an output whose valid
// bit is low adds zero. Stage 2 is an SIG_W-bit accumulator that adds the
// compacted word every cycle in which enable is high (test mode). clear sets
// the accumulator to zero and takes priority over enable. sig is the
// accumulator register, so an output flit seen in cycle t is in sig from
// cycle t+1.
//
// The add-then-accumulate structure and the 42-bit width (one flit, wider
// than a 32-bit register) follow the paper; gating by the valid bit is this
// design's choice. Reset: synchronous, active low, clears the signature.
module signature_gen
  import noc_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   enable,
  input  link_t [NPORTS-1:0]     out_link,
  output logic  [SIG_W-1:0]      sig
);
  logic [SIG_W-1:0] compact;

  always_comb begin
    compact = '0;
    for (int o = 0; o < NPORTS; o++)
      if (out_link[o].valid) compact = compact + SIG_W'(out_link[o].flit);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) sig <= '0;
    else if (enable)     sig <= sig + compact;
  end
endmodule
