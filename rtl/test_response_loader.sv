// Instruction-controlled test response loader.
//
// Executes the test-gather instructions. A gather (gather_valid) completes
// in the cycle in which the router has no flit left anywhere (drained) or
// the router is in normal mode; until then gather_ready is low and the core
// stalls. On completion it writes the high part (gather_hi: signature bits
// SIG_W-1..32, zero-extended) or the low 32 bits of the signature to core
// register gather_rd through wb_valid/wb_rd/wb_data, and, if the router was
// in test mode, raises exit_test for one cycle so the router returns to
// normal mode. The signature only changes in test mode, so a second gather
// after the first still reads the same value. Combinational.
//
// The HI/LO split of a signature wider than 32 bits follows the paper;
// waiting for the drain and ending test mode on a gather are this design's.
module test_response_loader
  import noc_pkg::*;
(
  input  logic               gather_valid,
  input  logic               gather_hi,
  input  logic [4:0]         gather_rd,
  input  logic               drained,
  input  logic               test_mode,
  input  logic [SIG_W-1:0]   sig,
  output logic               gather_ready,
  output logic               wb_valid,
  output logic [4:0]         wb_rd,
  output logic [31:0]        wb_data,
  output logic               exit_test
);
  assign gather_ready = gather_valid && (drained || !test_mode);
  assign wb_valid     = gather_ready;
  assign wb_rd        = gather_rd;
  assign wb_data      = gather_hi ? 32'(sig[SIG_W-1:32]) : sig[31:0];
  assign exit_test    = gather_ready && test_mode;
endmodule
