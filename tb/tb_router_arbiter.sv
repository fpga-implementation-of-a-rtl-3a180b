// Self-checking testbench of router_arbiter: random bids from the five input
// ports (heads, bodies, tails, single-flit packets) are checked every cycle
// against a reference arbiter kept in the testbench (round robin per output
// starting after the last winner, output held from head to tail by the same
// input and VC). Counts how often an output was contended and how often a
// held output refused a head.
module tb_router_arbiter;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0;
  sw_req_t [NPORTS-1:0] req;
  logic [NPORTS-1:0] grant, sel_valid, out_locked;
  logic [NPORTS-1:0][PID_W-1:0] sel;
  int checks = 0, failures = 0, contended = 0, held = 0;

  // reference state
  bit m_locked [NPORTS];
  int m_owner [NPORTS], m_vc [NPORTS], m_ptr [NPORTS];

  router_arbiter dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    foreach (m_locked[o]) begin m_locked[o] = 0; m_owner[o] = 0; m_vc[o] = 0; m_ptr[o] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      bit e_sv [NPORTS];
      int e_sel [NPORTS];
      bit e_grant [NPORTS];
      @(negedge clk);
      for (int i = 0; i < NPORTS; i++) begin
        req[i].valid = $urandom_range(0, 2) != 0;
        req[i].vc    = VC_W'($urandom);
        req[i].port  = PID_W'($urandom_range(0, NPORTS - 1));
        req[i].head  = $urandom_range(0, 1);
        req[i].tail  = $urandom_range(0, 2) == 0;
      end
      // Reference decision.
      foreach (e_grant[i]) e_grant[i] = 0;
      for (int o = 0; o < NPORTS; o++) begin
        automatic int n_heads = 0;
        e_sv[o] = 0; e_sel[o] = 0;
        for (int i = 0; i < NPORTS; i++)
          if (req[i].valid && req[i].head && int'(req[i].port) == o) n_heads++;
        if (m_locked[o]) begin
          automatic int i = m_owner[o];
          if (n_heads > 0) held++;
          if (req[i].valid && int'(req[i].port) == o && int'(req[i].vc) == m_vc[o]) begin
            e_sv[o] = 1; e_sel[o] = i;
          end
        end else begin
          if (n_heads > 1) contended++;
          for (int k = 0; k < NPORTS && !e_sv[o]; k++) begin
            automatic int i = (m_ptr[o] + k) % NPORTS;
            if (req[i].valid && req[i].head && int'(req[i].port) == o) begin
              e_sv[o] = 1; e_sel[o] = i;
            end
          end
        end
        if (e_sv[o]) e_grant[e_sel[o]] = 1;
      end
      #1;
      for (int o = 0; o < NPORTS; o++) begin
        checks++;
        if (sel_valid[o] !== e_sv[o] || (e_sv[o] && int'(sel[o]) != e_sel[o]) || out_locked[o] !== m_locked[o]) begin
          failures++;
          $display("FAIL t=%0d out %0d: sv=%0b sel=%0d lock=%0b, expected %0b %0d %0b",
                   t, o, sel_valid[o], sel[o], out_locked[o], e_sv[o], e_sel[o], m_locked[o]);
        end
      end
      for (int i = 0; i < NPORTS; i++) begin
        checks++;
        if (grant[i] !== e_grant[i]) begin failures++; $display("FAIL t=%0d grant %0d", t, i); end
      end
      // Reference state update.
      for (int o = 0; o < NPORTS; o++) begin
        if (e_sv[o]) begin
          automatic int i = e_sel[o];
          if (m_locked[o]) begin
            if (req[i].tail) m_locked[o] = 0;
          end else begin
            m_ptr[o] = (i + 1) % NPORTS;
            if (!req[i].tail) begin m_locked[o] = 1; m_owner[o] = i; m_vc[o] = int'(req[i].vc); end
          end
        end
      end
    end
    checks++;
    if (contended == 0 || held == 0) begin
      failures++;
      $display("FAIL: contention %0d, held output %0d", contended, held);
    end
    $display("contended outputs %0d, heads refused by a held output %0d", contended, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
