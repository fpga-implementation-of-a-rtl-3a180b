// Workload testbench: one router test program of 250 test patterns, the
// program length of the published evaluation on the 4x4 mesh, run on an
// interior router (row 1, col 1) at default parameters.
//
// Each pattern is one test-apply instruction obeying the XY-routing
// constraint on the arbiter's inputs: a packet entering from North or South
// never asks for West or East, and no packet asks to leave by the port it
// came in. The core issues the 250 instructions back to back, then
// test-gather LO and HI. Checked: the signature equals the sum modulo 2^42
// of the generated test flits, no flit reaches a neighbour, and the program
// takes at least one cycle per instruction. The cycle count from the first
// test-apply to the completed HI gather is printed.
module tb_test_program_250;
  import noc_pkg::*;
  localparam logic [COORD_W-1:0] ROW = 1, COL = 1;
  localparam int NPAT = 250;
  logic clk = 0, rst_n = 0;
  link_t     [NPORTS-1:0] nbr_in_link, nbr_out_link;
  vc_ready_t [NPORTS-1:0] nbr_in_ready, nbr_ds_ready;
  logic instr_valid, instr_ready, instr_is_test, wb_valid, test_mode;
  logic [31:0] instr, wb_data;
  logic [4:0] wb_rd;
  int checks = 0, failures = 0, cycle = 0, stalls = 0;

  testable_router dut (.clk, .rst_n, .my_row(ROW), .my_col(COL), .nbr_in_link, .nbr_in_ready,
                       .nbr_out_link, .nbr_ds_ready, .instr_valid, .instr, .instr_ready, .instr_is_test,
                       .wb_valid, .wb_rd, .wb_data, .test_mode);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cycle, msg); end
  endtask

  always @(negedge clk) if (rst_n)
    for (int o = 0; o < NPORTS; o++) if (nbr_out_link[o].valid) check(0, "flit left the router");

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

  // A random output allowed for input port p under XY routing.
  function automatic logic [2:0] legal_out(int p);
    int choices [$];
    case (p)
      0: choices = '{1, 4};          // from North: South or local
      1: choices = '{0, 4};          // from South: North or local
      2: choices = '{0, 1, 3, 4};    // from West
      3: choices = '{0, 1, 2, 4};    // from East
      default: choices = '{0, 1, 2, 3};
    endcase
    return 3'(choices[$urandom_range(0, choices.size() - 1)]);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic longint unsigned exp_sig = 0;
    logic [31:0] lo, hi, w;
    int t0;
    nbr_in_link = '0; nbr_ds_ready = '1; instr_valid = 0; instr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    t0 = cycle;
    for (int k = 0; k < NPAT; k++) begin
      w = {6'h3B, 5'($urandom), 1'($urandom), 15'd0, 1'($urandom), 4'd0};
      for (int p = 0; p < NPORTS; p++) w[5 + 3*p +: 3] = legal_out(p);
      instr_valid = 1; instr = w;
      #1;
      while (!instr_ready) begin stalls++; @(negedge clk); #1; end
      for (int p = 0; p < NPORTS; p++)
        if (w[21 + p]) exp_sig = (exp_sig + 64'(test_flit(w, p))) & ((64'd1 << 42) - 1);
      @(negedge clk);
    end
    instr = {6'h00, 10'd0, 5'd8, 5'd0, 6'h29};
    #1;
    while (!instr_ready) begin stalls++; @(negedge clk); #1; end
    lo = wb_data;
    @(negedge clk);
    instr = {6'h00, 10'd0, 5'd9, 5'd0, 6'h28};
    #1;
    check(instr_ready, "HI gather completes at once");
    hi = wb_data;
    @(negedge clk);
    instr_valid = 0;
    check({hi[9:0], lo} == 42'(exp_sig), $sformatf("signature %h_%h expected %h", hi, lo, exp_sig));
    check(cycle - t0 >= NPAT + 2, "at most one instruction per cycle");
    $display("%0d test patterns + 2 gathers: %0d cycles (%0d stall cycles, including the drain on entry)",
             NPAT, cycle - t0, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
