// Instruction-controlled test packet generator.
//
// Turns one test-apply instruction into up to five test packets, one per
// router input port whose valid bit is set, all entering the router in the
// same cycle. Each packet is a single flit (type HEAD+TAIL) written into the
// VC given by the instruction. Its destination is the neighbour of this
// router in the requested direction (N: row-1, S: row+1, W: col-1, E: col+1,
// LC or an unused code: this router), so XY routing sends it to the requested
// output. Source coordinates and data are filled with the instruction's fill
// bit.
//
// Mode control: the first test-apply in normal mode raises test_req, which
// closes the input ports to new packets from the neighbours, and waits (apply_ready low) until
// the router and its input links are empty (drained). It then enters test
// mode, pulses sig_clear for the signature generator and, from the next
// cycle, accepts test-apply instructions. An instruction is accepted
// (apply_ready high for one cycle) only when every VC it writes has room;
// its flits appear on tpg_link in the following cycle. exit_test (from the
// response loader) returns to normal mode.
//
// The paper gives the instruction fields, the single instruction for five
// simultaneous messages and the destination computed from the requested
// port; the drain step, the stall handshake, the fill bit and the register
// on the output links (the published generator has no flip-flops) are this
// design's. Reset: synchronous, active low, to normal mode.
module test_packet_gen
  import noc_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [COORD_W-1:0]           my_row,
  input  logic [COORD_W-1:0]           my_col,
  input  logic                         apply_valid,
  input  apply_t                       apply,
  output logic                         apply_ready,
  input  vc_ready_t [NPORTS-1:0]       router_in_ready,
  input  logic                         drained,
  input  logic                         exit_test,
  output logic                         test_mode,
  output logic                         test_req,
  output logic                         sig_clear,
  output link_t     [NPORTS-1:0]       tpg_link
);
  typedef enum logic [1:0] {S_NORMAL, S_DRAIN, S_TEST} state_e;
  state_e state_q;

  logic  space_ok, fire;
  flit_t flit [NPORTS];

  always_comb begin
    space_ok = 1'b1;
    for (int p = 0; p < NPORTS; p++)
      if (apply.port_valid[p] && !router_in_ready[p][apply.vc]) space_ok = 1'b0;
  end

  assign fire        = (state_q == S_TEST) && apply_valid && space_ok && !exit_test;
  assign apply_ready = fire;
  assign test_mode   = (state_q == S_TEST);
  assign test_req    = (state_q == S_DRAIN);
  assign sig_clear   = (state_q == S_DRAIN) && drained;

  for (genvar p = 0; p < NPORTS; p++) begin : g_flit
    always_comb begin
      flit[p].ftype   = FLIT_SINGLE;
      flit[p].dst_row = my_row;
      flit[p].dst_col = my_col;
      flit[p].src_row = {COORD_W{apply.fill}};
      flit[p].src_col = {COORD_W{apply.fill}};
      flit[p].data    = {DATA_W{apply.fill}};
      case (apply.out_req[p])
        PORT_N:  flit[p].dst_row = my_row - 1'b1;
        PORT_S:  flit[p].dst_row = my_row + 1'b1;
        PORT_W:  flit[p].dst_col = my_col - 1'b1;
        PORT_E:  flit[p].dst_col = my_col + 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q  <= S_NORMAL;
      tpg_link <= '0;
    end else begin
      case (state_q)
        S_NORMAL: if (apply_valid) state_q <= S_DRAIN;
        S_DRAIN:  if (drained)     state_q <= S_TEST;
        S_TEST:   if (exit_test)   state_q <= S_NORMAL;
        default:                   state_q <= S_NORMAL;
      endcase
      for (int p = 0; p < NPORTS; p++) begin
        tpg_link[p].valid <= fire && apply.port_valid[p];
        tpg_link[p].vc    <= apply.vc;
        tpg_link[p].flit  <= flit[p];
      end
    end
  end

  a_mode_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(test_mode && test_req));
endmodule
