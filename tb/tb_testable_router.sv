// Self-checking testbench of testable_router (router at row 1, col 1).
//
// The testbench plays the node's core and its four neighbours. Normal
// traffic (single-flit packets from the West neighbour to a node further
// East) flows through the router before, during the switch into, and after
// each test. Each test runs a test program: random test-apply instructions
// (the core stalls while instr_ready is low), then test-gather LO and HI.
// The expected signature is the sum, modulo 2^42, of every test flit the
// program generates, worked out from the instruction fields, because every
// test flit leaves the router exactly once and the signature adds all
// outputs. Also checked: no flit reaches a neighbour and the neighbours see
// no room while in test mode, a non-test instruction completes at once, and
// every normal packet is delivered unchanged (in any order, since the two
// VCs may overtake each other). Counts drain waits, stalled
// test-apply instructions, gathers that waited for the router to drain and
// mode switches.
module tb_testable_router;
  import noc_pkg::*;
  localparam logic [COORD_W-1:0] ROW = 1, COL = 1;
  logic clk = 0, rst_n = 0;
  link_t     [NPORTS-1:0] nbr_in_link, nbr_out_link;
  vc_ready_t [NPORTS-1:0] nbr_in_ready, nbr_ds_ready;
  logic instr_valid, instr_ready, instr_is_test, wb_valid, test_mode;
  logic [31:0] instr, wb_data;
  logic [4:0] wb_rd;
  int checks = 0, failures = 0, cycle = 0;
  int sent = 0, received = 0, apply_stalls = 0, gather_waits = 0, entries = 0, exits = 0, drain_cycles = 0;
  bit traffic_on = 1;
  flit_t pending [int];

  testable_router dut (.clk, .rst_n, .my_row(ROW), .my_col(COL), .nbr_in_link, .nbr_in_ready,
                       .nbr_out_link, .nbr_ds_ready, .instr_valid, .instr, .instr_ready, .instr_is_test,
                       .wb_valid, .wb_rd, .wb_data, .test_mode);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cycle, msg); end
  endtask

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

  // Executes one instruction word as the core would: issued at a falling
  // edge and held until done; returns at the falling edge after completion,
  // so instructions can follow back to back.
  task automatic exec(input logic [31:0] w, output logic [31:0] data, output int waited);
    waited = 0;
    instr_valid = 1; instr = w;
    #1;
    while (!instr_ready) begin
      waited++;
      @(negedge clk);
      #1;
    end
    data = wb_data;
    if (w[31:26] == 6'h00 && (w[5:0] == 6'h28 || w[5:0] == 6'h29))
      check(wb_valid && wb_rd == w[15:11], "gather writes back to rd");
    @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // West neighbour: registered sender of single-flit packets going East.
  initial begin
    nbr_in_link = '0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      nbr_in_link[PORT_W] = '0;
      #1;
      if (traffic_on && $urandom_range(0, 2) == 0) begin
        automatic int v = $urandom_range(0, 1);
        if (nbr_in_ready[PORT_W][v]) begin
          flit_t f;
          f = '0;
          f.ftype = FLIT_SINGLE; f.dst_row = ROW; f.dst_col = 3; f.src_row = ROW; f.src_col = 0;
          f.data = 32'(sent);
          pending[sent] = f;
          nbr_in_link[PORT_W].valid = 1; nbr_in_link[PORT_W].vc = VC_W'(v); nbr_in_link[PORT_W].flit = f;
          sent++;
        end
      end
    end
  end

  // Neighbour outputs: East receives the normal traffic; nothing else may appear.
  always @(negedge clk) if (rst_n) begin
    nbr_ds_ready = '1;
    nbr_ds_ready[PORT_E] = vc_ready_t'($urandom_range(0, 3) == 0 ? $urandom : 3);
    for (int o = 0; o < NPORTS; o++) if (nbr_out_link[o].valid) begin
      if (test_mode) check(0, "flit to a neighbour in test mode");
      else if (o != PORT_E) check(0, "normal flit on wrong output");
      else begin
        check(pending.exists(int'(nbr_out_link[o].flit.data)) &&
              nbr_out_link[o].flit == pending[int'(nbr_out_link[o].flit.data)], "normal packet delivered unchanged");
        pending.delete(int'(nbr_out_link[o].flit.data));
        received++;
      end
    end
    if (test_mode) check(nbr_in_ready == '0, "neighbours see no room in test mode");
    if (dut.test_req) drain_cycles++;
  end

  logic test_mode_d;
  always @(posedge clk) begin
    test_mode_d <= rst_n && test_mode;
    if (rst_n && test_mode && !test_mode_d) entries++;
    if (rst_n && !test_mode && test_mode_d) exits++;
  end

  initial begin
    logic [31:0] d, lo, hi;
    int waited;
    instr_valid = 0; instr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (30) @(negedge clk);
    exec(32'h0043_2020, d, waited);            // an ordinary add
    instr_valid = 0;
    check(!instr_is_test && waited == 0, "non-test instruction completes at once");
    for (int run = 0; run < 6; run++) begin
      automatic longint unsigned exp_sig = 0;
      automatic int napply = $urandom_range(5, 60);
      instr_valid = 0;
      repeat ($urandom_range(5, 40)) @(negedge clk);
      for (int k = 0; k < napply; k++) begin
        logic [31:0] w;
        w = {6'h3B, 22'($urandom), 4'h0};
        if (run == 0 && k == 0) w[25:21] = 5'h1F;  // all ports, for a full first instruction
        if ($urandom_range(0, 1) == 0) begin        // all ports ask for one output: contention
          automatic logic [2:0] o = 3'($urandom_range(0, 4));
          w[19:5] = {o, o, o, o, o};
        end
        exec(w, d, waited);
        if (k > 0 && waited > 0) apply_stalls++;
        for (int p = 0; p < NPORTS; p++)
          if (w[21 + p]) exp_sig = (exp_sig + 64'(test_flit(w, p))) & ((64'd1 << 42) - 1);
        check(test_mode, "test mode after test-apply");
      end
      begin
        automatic logic [4:0] rlo = 5'($urandom), rhi = 5'($urandom);
        exec({6'h00, 10'd0, rlo, 5'd0, 6'h29}, lo, waited);
        if (waited > 0) gather_waits++;
        check(!test_mode, "normal mode after first gather");
        exec({6'h00, 10'd0, rhi, 5'd0, 6'h28}, hi, waited);
      end
      check({hi[9:0], lo} == 42'(exp_sig) && hi[31:10] == '0,
            $sformatf("signature %h_%h expected %h", hi, lo, exp_sig));
    end
    traffic_on = 0;
    repeat (50) @(negedge clk);
    check(received == sent && sent > 0, $sformatf("normal packets: sent %0d received %0d", sent, received));
    check(entries == 6 && exits == 6, "six entries into and exits from test mode");
    check(apply_stalls > 0 && gather_waits > 0 && drain_cycles > 0,
          $sformatf("stalled applies %0d, waiting gathers %0d, drain cycles %0d", apply_stalls, gather_waits, drain_cycles));
    $display("normal packets %0d, stalled applies %0d, waiting gathers %0d, drain cycles %0d, mode switches %0d/%0d",
             sent, apply_stalls, gather_waits, drain_cycles, entries, exits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
