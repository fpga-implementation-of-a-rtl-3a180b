// Self-checking testbench of test_packet_gen (router at row 2, col 1).
//
// Several rounds of: a test-apply in normal mode, which must raise test_req
// and wait while the router is not drained, then enter test mode with one
// sig_clear pulse; a run of random test-apply instructions under random VC
// back-pressure, each of which must be accepted exactly when every VC it
// writes has room and must put the expected single-flit packets (destination
// = neighbour in the requested direction, other fields = fill bit) on the
// generator's links in the next cycle; and exit_test, which must return to
// normal mode. Counts stalled instructions and drain waits.
module tb_test_packet_gen;
  import noc_pkg::*;
  localparam logic [COORD_W-1:0] ROW = 2, COL = 1;
  logic clk = 0, rst_n = 0;
  logic apply_valid, apply_ready, drained, exit_test, test_mode, test_req, sig_clear;
  apply_t apply;
  vc_ready_t [NPORTS-1:0] router_in_ready;
  link_t [NPORTS-1:0] tpg_link;
  int checks = 0, failures = 0, stalls = 0, drain_waits = 0, accepted = 0;

  test_packet_gen dut (.clk, .rst_n, .my_row(ROW), .my_col(COL), .apply_valid, .apply, .apply_ready,
                       .router_in_ready, .drained, .exit_test, .test_mode, .test_req, .sig_clear, .tpg_link);
  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic flit_t exp_flit(apply_t a, int p);
    flit_t f;
    int r = int'(ROW), c = int'(COL);
    case (a.out_req[p])
      3'd0: r = r - 1;
      3'd1: r = r + 1;
      3'd2: c = c - 1;
      3'd3: c = c + 1;
      default: ;
    endcase
    f.ftype = FLIT_SINGLE;
    f.dst_row = COORD_W'(r); f.dst_col = COORD_W'(c);
    f.src_row = a.fill ? '1 : '0; f.src_col = a.fill ? '1 : '0;
    f.data = a.fill ? '1 : '0;
    return f;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply_valid = 0; apply = '0; drained = 0; exit_test = 0; router_in_ready = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      automatic int wait_cycles = $urandom_range(0, 5);
      @(negedge clk);
      check(!test_mode && !test_req, "normal mode at start of round");
      for (int p = 0; p < NPORTS; p++) check(!tpg_link[p].valid, "no test flit in normal mode");
      apply_valid = 1; apply = apply_t'($urandom); drained = 0;
      @(negedge clk);
      check(test_req && !test_mode && !apply_ready, "test_req while draining");
      for (int k = 0; k < wait_cycles; k++) begin
        #1 check(!sig_clear && !apply_ready, "waits while not drained");
        drain_waits++;
        @(negedge clk);
      end
      drained = 1;
      #1 check(sig_clear && !apply_ready, "sig_clear when drained");
      @(negedge clk);
      drained = 0;
      check(test_mode && !test_req && !sig_clear, "test mode entered");
      for (int t = 0; t < 100; t++) begin
        automatic bit ok = 1;
        apply = apply_t'($urandom);
        for (int p = 0; p < NPORTS; p++) router_in_ready[p] = vc_ready_t'($urandom_range(0, 5) == 0 ? $urandom : 3);
        for (int p = 0; p < NPORTS; p++) if (apply.port_valid[p] && !router_in_ready[p][apply.vc]) ok = 0;
        apply_valid = $urandom_range(0, 3) != 0;
        #1;
        check(apply_ready == (apply_valid && ok), "apply_ready follows VC room");
        if (apply_valid && !ok) stalls++;
        if (apply_ready) begin
          automatic apply_t a = apply;
          accepted++;
          @(negedge clk);
          for (int p = 0; p < NPORTS; p++) begin
            check(tpg_link[p].valid == a.port_valid[p], "link valid = port valid bit");
            if (a.port_valid[p])
              check(tpg_link[p].vc == a.vc && tpg_link[p].flit == exp_flit(a, p), "test flit contents");
          end
        end else begin
          @(negedge clk);
          check(tpg_link[0].valid == 0 && tpg_link[4].valid == 0, "no flit without acceptance");
        end
      end
      apply_valid = 0;
      exit_test = 1;
      @(negedge clk);
      exit_test = 0;
      check(!test_mode, "exit to normal mode");
    end
    check(stalls > 0 && drain_waits > 0, "stall and drain wait both happened");
    $display("accepted %0d, stalled %0d, drain waits %0d", accepted, stalls, drain_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
