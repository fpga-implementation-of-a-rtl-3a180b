// End-to-end testbench of the 4x4 self-testing mesh at its default size.
//
// Every node's core injects random packets (1 to 4 flits, random VC, random
// destination anywhere in the mesh) on its local port and receives on its
// local output. Each flit carries its packet number and index. Checked:
// every packet arrives at its destination node, unchanged, its flits back to
// back, and every packet is delivered.
//
// While this traffic runs, the cores of nodes 5 and 10 run test programs on
// their routers again and again (so packets part-way through a router must
// finish before it enters test mode, and neighbours are held back while it
// is in test mode). After the traffic, all sixteen routers run a test
// program at once. Each test program is a run of random test-apply
// instructions and a test-gather LO and HI; the signature must equal the sum
// modulo 2^42 of all the test flits the program generated.
//
// Mechanisms counted (each must happen at least once): test-mode entries
// and exits, drain cycles, drains in which a started packet was let in,
// stalled test-apply instructions, gathers that waited, local injections
// held back, and multi-flit packets delivered.
module tb_noc_mesh;
  import noc_pkg::*;
  localparam int ROWS = 4, COLS = 4, N = ROWS * COLS;
  localparam int NPKT = 60;          // packets injected per node

  logic clk = 0, rst_n = 0;
  link_t     [N-1:0] local_in_link, local_out_link;
  vc_ready_t [N-1:0] local_in_ready, local_ds_ready;
  logic [N-1:0] instr_valid, instr_ready, instr_is_test, wb_valid, test_mode;
  logic [N-1:0][31:0] instr, wb_data;
  logic [N-1:0][4:0] wb_rd;

  int checks = 0, failures = 0, cycle = 0;
  int delivered = 0, multi_flit = 0, inject_stalls = 0, programs = 0;
  int apply_stalls = 0, gather_waits = 0, entries = 0, exits = 0, drain_cycles = 0, drain_open = 0;
  bit traffic_done = 0, final_phase = 0;
  int max_in_test = 0;
  always @(posedge clk) if ($countones(test_mode) > max_in_test) max_in_test = $countones(test_mode);

  int    pkt_len [int], pkt_dst [int];
  flit_t pkt_head [int];
  int    cur_pkt [N], cur_idx [N];

  noc_mesh dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cycle, msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Ejection sinks and mode/drain monitors.
  logic [N-1:0] test_mode_d;
  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      local_ds_ready[n] = ($urandom_range(0, 5) == 0) ? vc_ready_t'($urandom) : '1;
      if (local_out_link[n].valid) begin
        automatic flit_t f = local_out_link[n].flit;
        automatic int id = int'(f.data[31:8]), idx = int'(f.data[7:0]);
        if (!pkt_len.exists(id)) check(0, $sformatf("unknown packet %0d at node %0d", id, n));
        else if (cur_pkt[n] < 0) begin
          check(idx == 0 && pkt_dst[id] == n && f == pkt_head[id], $sformatf("packet %0d head at node %0d", id, n));
          if (is_tail(f.ftype)) delivered++;
          else begin cur_pkt[n] = id; cur_idx[n] = 1; end
        end else begin
          check(id == cur_pkt[n] && idx == cur_idx[n] && !is_head(f.ftype) &&
                is_tail(f.ftype) == (idx == pkt_len[id] - 1), $sformatf("packet %0d flit %0d at node %0d", id, idx, n));
          cur_idx[n]++;
          if (is_tail(f.ftype)) begin delivered++; multi_flit++; cur_pkt[n] = -1; end
        end
      end
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_node
    localparam logic [1:0] ROW = 2'(n / COLS), COL = 2'(n % COLS);

    always @(posedge clk) begin
      test_mode_d[n] <= rst_n && test_mode[n];
      if (rst_n && test_mode[n] && !test_mode_d[n]) entries++;
      if (rst_n && !test_mode[n] && test_mode_d[n]) exits++;
      if (rst_n && dut.g_row[n / COLS].g_col[n % COLS].u_node.test_req) begin
        drain_cycles++;
        if (dut.g_row[n / COLS].g_col[n % COLS].u_node.rtr_in_open != '0) drain_open++;
      end
    end

    function automatic logic [41:0] test_flit(logic [31:0] w, int p);
      logic [1:0] r = ROW, c = COL;
      logic fill = w[4];
      case (w[5 + 3*p +: 3])
        3'd0: r = r - 1;
        3'd1: r = r + 1;
        3'd2: c = c - 1;
        3'd3: c = c + 1;
        default: ;
      endcase
      return {2'b11, r, c, {2{fill}}, {2{fill}}, {32{fill}}};
    endfunction

    // Core: executes one instruction, held until done; back to back.
    task automatic exec(input logic [31:0] w, output logic [31:0] data, output int waited);
      waited = 0;
      instr_valid[n] = 1; instr[n] = w;
      #1;
      while (!instr_ready[n]) begin waited++; @(negedge clk); #1; end
      data = wb_data[n];
      if (w[31:26] == 6'h00) check(wb_valid[n] && wb_rd[n] == w[15:11], "gather write-back");
      @(negedge clk);
    endtask

    task automatic run_program(int napply);
      automatic longint unsigned exp_sig = 0;
      logic [31:0] d, lo, hi;
      int waited;
      for (int k = 0; k < napply; k++) begin
        logic [31:0] w;
        w = {6'h3B, 22'($urandom), 4'h0};
        if ($urandom_range(0, 1) == 0) begin
          automatic logic [2:0] o = 3'($urandom_range(0, 4));
          w[19:5] = {o, o, o, o, o};
        end
        exec(w, d, waited);
        if (k > 0 && waited > 0) apply_stalls++;
        for (int p = 0; p < NPORTS; p++)
          if (w[21 + p]) exp_sig = (exp_sig + 64'(test_flit(w, p))) & ((64'd1 << 42) - 1);
      end
      exec({6'h00, 10'd0, 5'd2, 5'd0, 6'h29}, lo, waited);
      if (waited > 0) gather_waits++;
      exec({6'h00, 10'd0, 5'd3, 5'd0, 6'h28}, hi, waited);
      instr_valid[n] = 0;
      check({hi[9:0], lo} == 42'(exp_sig), $sformatf("node %0d signature %h_%h expected %h", n, hi, lo, exp_sig));
      check(!test_mode[n], "normal mode after the program");
      programs++;
    endtask

    // Local injection: one packet per VC in progress, registered link.
    initial begin
      int left [NVC], id [NVC], idx [NVC], made;
      made = 0;
      foreach (left[v]) begin left[v] = 0; id[v] = 0; idx[v] = 0; end
      local_in_link[n] = '0;
      wait (rst_n);
      while (made < NPKT || left[0] > 0 || left[1] > 0) begin
        automatic int v;
        @(negedge clk);
        local_in_link[n] = '0;
        #1;
        v = $urandom_range(0, NVC - 1);
        if (left[v] == 0 && made < NPKT && $urandom_range(0, 3) == 0) begin
          flit_t h;
          id[v] = (n * NPKT + made) * 2 + v + 1;
          made++;
          left[v] = $urandom_range(1, 4);
          idx[v] = 0;
          h = flit_t'({$urandom, $urandom});
          h.ftype = (left[v] == 1) ? FLIT_SINGLE : FLIT_HEAD;
          h.data = {24'(id[v]), 8'd0};
          pkt_len[id[v]] = left[v];
          pkt_dst[id[v]] = int'(h.dst_row) * COLS + int'(h.dst_col);
          pkt_head[id[v]] = h;
        end
        if (left[v] > 0) begin
          if (!local_in_ready[n][v]) inject_stalls++;
          else begin
            flit_t f;
            f = pkt_head[id[v]];
            if (idx[v] > 0) f.ftype = (left[v] == 1) ? FLIT_TAIL : FLIT_BODY;
            f.data = {24'(id[v]), 8'(idx[v])};
            local_in_link[n].valid = 1; local_in_link[n].vc = VC_W'(v); local_in_link[n].flit = f;
            idx[v]++; left[v]--;
          end
        end
      end
      @(negedge clk);
      local_in_link[n] = '0;
    end

    // Core test programs.
    initial begin
      instr_valid[n] = 0; instr[n] = '0;
      wait (rst_n);
      repeat (20) @(negedge clk);
      if (n == 5 || n == 10) begin
        while (!traffic_done) begin
          run_program($urandom_range(4, 30));
          repeat ($urandom_range(10, 60)) @(negedge clk);
        end
      end
      wait (final_phase);
      @(negedge clk);
      run_program($urandom_range(20, 40));
    end
  end

  initial begin
    foreach (cur_pkt[n]) cur_pkt[n] = -1;
    local_ds_ready = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (delivered == N * NPKT);
    traffic_done = 1;
    wait (programs >= 4);
    repeat (200) @(negedge clk);
    final_phase = 1;
    wait (programs >= 4 + N && test_mode == '0);
    check(max_in_test > 1, "several routers in test mode at once");
    $display("most routers in test mode at once: %0d", max_in_test);
    repeat (10) @(negedge clk);
    check(delivered == N * NPKT, "all packets delivered");
    check(entries == exits && entries == programs, "each program enters and leaves test mode once");
    check(drain_cycles > 0 && drain_open > 0, $sformatf("drain cycles %0d, with a started packet %0d", drain_cycles, drain_open));
    check(apply_stalls > 0 && gather_waits > 0, $sformatf("stalled applies %0d, waiting gathers %0d", apply_stalls, gather_waits));
    check(inject_stalls > 0 && multi_flit > 0, $sformatf("held injections %0d, multi-flit packets %0d", inject_stalls, multi_flit));
    $display("packets %0d (multi-flit %0d), held injections %0d, test programs %0d, mode entries %0d exits %0d",
             delivered, multi_flit, inject_stalls, programs, entries, exits);
    $display("drain cycles %0d (with a started packet %0d), stalled applies %0d, waiting gathers %0d, cycles %0d",
             drain_cycles, drain_open, apply_stalls, gather_waits, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
