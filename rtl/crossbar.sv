// 5x5 crossbar with one register stage per output.
//
// Output o copies the flit and VC id of input sel[o] when sel_valid[o] is
// high; the result appears on out_link[o] one clock later. The output ports
// hold no buffer beyond this single stage (the paper's router has bufferless
// outputs; the register stage is this design's reading of the crossbar's
// flip-flops in the paper's gate counts). Reset: synchronous, active low.
module crossbar
  import noc_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  flit_t [NPORTS-1:0]               in_flit,
  input  logic  [NPORTS-1:0][VC_W-1:0]     in_vc,
  input  logic  [NPORTS-1:0]               sel_valid,
  input  logic  [NPORTS-1:0][PID_W-1:0]   sel,
  output link_t [NPORTS-1:0]               out_link
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_link <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        out_link[o].valid <= sel_valid[o];
        out_link[o].vc    <= in_vc[sel[o]];
        out_link[o].flit  <= in_flit[sel[o]];
      end
    end
  end
endmodule
