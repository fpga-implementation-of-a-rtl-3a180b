// One NoC node's router together with its built-in test hardware.
//
// The router is surrounded by the normal/test multiplexers; the test packet
// generator feeds its inputs in test mode and the signature generator
// observes its outputs. The core of the node hands every instruction word
// it decodes to this block (instr_valid/instr): the test-instruction decoder
// recognises test-apply and test-gather HI/LO, test-apply goes to the packet
// generator and test-gather to the response loader. instr_ready low means
// the instruction has not completed and the core must stall; instr_is_test
// tells the core whether the word was a test instruction at all (a non-test
// word completes at once with no effect here). A gather result is returned
// on wb_valid/wb_rd/wb_data in the cycle the gather completes.
//
// A test program is a run of test-apply instructions followed by a
// test-gather LO and a test-gather HI. The first apply drains the router and
// enters test mode; the first gather waits for the router to drain, returns
// the signature and leaves test mode. No flit travels to another node during
// the test.
module testable_router
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [COORD_W-1:0]           my_row,
  input  logic [COORD_W-1:0]           my_col,
  // links to the neighbours and the local core
  input  link_t     [NPORTS-1:0]       nbr_in_link,
  output vc_ready_t [NPORTS-1:0]       nbr_in_ready,
  output link_t     [NPORTS-1:0]       nbr_out_link,
  input  vc_ready_t [NPORTS-1:0]       nbr_ds_ready,
  // core side: test instructions
  input  logic                         instr_valid,
  input  logic [31:0]                  instr,
  output logic                         instr_ready,
  output logic                         instr_is_test,
  output logic                         wb_valid,
  output logic [4:0]                   wb_rd,
  output logic [31:0]                  wb_data,
  output logic                         test_mode
);
  link_t     [NPORTS-1:0] tpg_link, rtr_in_link, rtr_out_link;
  vc_ready_t [NPORTS-1:0] rtr_in_ready, rtr_in_open, rtr_ds_ready;
  logic                   rtr_idle, drained, test_req, sig_clear, exit_test;
  logic                   is_apply, is_gather_hi, is_gather_lo, apply_ready, gather_ready;
  logic [NPORTS-1:0]      in_valid;
  apply_t                 apply;
  logic [4:0]             rd;
  logic [SIG_W-1:0]       sig;

  test_instr_decoder u_dec (
    .instr, .is_apply, .is_gather_hi, .is_gather_lo, .apply, .rd
  );

  test_packet_gen u_tpg (
    .clk, .rst_n, .my_row, .my_col,
    .apply_valid     (instr_valid && is_apply),
    .apply,
    .apply_ready,
    .router_in_ready (rtr_in_ready),
    .drained,
    .exit_test,
    .test_mode,
    .test_req,
    .sig_clear,
    .tpg_link
  );

  test_mux u_mux (
    .test_mode, .test_req,
    .nbr_in_link, .nbr_in_ready, .nbr_out_link, .nbr_ds_ready,
    .tpg_link,
    .rtr_in_link, .rtr_in_ready, .rtr_in_open, .rtr_out_link, .rtr_ds_ready
  );

  router #(.DEPTH(DEPTH)) u_router (
    .clk, .rst_n, .my_row, .my_col,
    .in_link  (rtr_in_link),
    .in_ready (rtr_in_ready),
    .in_open  (rtr_in_open),
    .out_link (rtr_out_link),
    .ds_ready (rtr_ds_ready),
    .idle     (rtr_idle)
  );

  for (genvar p = 0; p < NPORTS; p++) begin : g_inv
    assign in_valid[p] = rtr_in_link[p].valid;
  end
  assign drained = rtr_idle && !(|in_valid);

  signature_gen u_sg (
    .clk, .rst_n,
    .clear    (sig_clear),
    .enable   (test_mode),
    .out_link (rtr_out_link),
    .sig
  );

  test_response_loader u_trl (
    .gather_valid (instr_valid && (is_gather_hi || is_gather_lo)),
    .gather_hi    (is_gather_hi),
    .gather_rd    (rd),
    .drained,
    .test_mode,
    .sig,
    .gather_ready,
    .wb_valid, .wb_rd, .wb_data,
    .exit_test
  );

  assign instr_is_test = is_apply || is_gather_hi || is_gather_lo;
  always_comb begin
    if (is_apply)                          instr_ready = apply_ready;
    else if (is_gather_hi || is_gather_lo) instr_ready = gather_ready;
    else                                   instr_ready = 1'b1;
  end
endmodule
