// Stuck-at fault simulation of the router self-test, in the manner of the
// published evaluation (serial fault simulation: one single stuck-at fault
// injected at a time, then the whole test program run).
//
// Fault sites are the 44 bits of each of the five crossbar output registers
// (valid, VC id and flit), each stuck at 0 and at 1: 440 faults. For each
// fault the testable router (row 1, col 1) is reset, the fault is forced,
// the same test program of 60 test-apply instructions is run, and the
// signature is compared with the fault-free one. A program that does not
// finish within a time limit also counts as detecting the fault. The
// fault-free run must match the signature worked out from the instruction
// fields; the coverage is printed. Faults on VC bits cannot be seen by the
// additive signature, so full coverage is not expected.
module tb_fault_coverage;
  import noc_pkg::*;
  localparam logic [COORD_W-1:0] ROW = 1, COL = 1;
  localparam int NAPPLY = 60;
  localparam int NSITE = NPORTS * 44;

  logic clk = 0, rst_n = 0;
  link_t     [NPORTS-1:0] nbr_in_link, nbr_out_link;
  vc_ready_t [NPORTS-1:0] nbr_in_ready, nbr_ds_ready;
  logic instr_valid, instr_ready, instr_is_test, wb_valid, test_mode;
  logic [31:0] instr, wb_data;
  logic [4:0] wb_rd;
  int checks = 0, failures = 0;
  int fault_id = -1;           // site * 2 + stuck value; -1 = fault free
  logic [31:0] program_words [NAPPLY];

  testable_router dut (.clk, .rst_n, .my_row(ROW), .my_col(COL), .nbr_in_link, .nbr_in_ready,
                       .nbr_out_link, .nbr_ds_ready, .instr_valid, .instr, .instr_ready, .instr_is_test,
                       .wb_valid, .wb_rd, .wb_data, .test_mode);
  always #5 clk = ~clk;

  // One force/release pair per fault site.
  for (genvar o = 0; o < NPORTS; o++) begin : g_o
    for (genvar b = 0; b < 44; b++) begin : g_b
      always @(fault_id) begin
        if (fault_id == (o * 44 + b) * 2)          force dut.u_router.u_xbar.out_link[o][b] = 1'b0;
        else if (fault_id == (o * 44 + b) * 2 + 1) force dut.u_router.u_xbar.out_link[o][b] = 1'b1;
        else                                       release dut.u_router.u_xbar.out_link[o][b];
      end
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

  // Runs the program; returns the signature, or ok = 0 if it did not finish.
  task automatic run(output logic [41:0] sig, output bit ok);
    logic [31:0] lo, hi;
    int guard;
    ok = 1;
    rst_n = 0; instr_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k <= NAPPLY + 1 && ok; k++) begin
      instr_valid = 1;
      instr = (k < NAPPLY) ? program_words[k] :
              (k == NAPPLY) ? {6'h00, 10'd0, 5'd2, 5'd0, 6'h29} : {6'h00, 10'd0, 5'd3, 5'd0, 6'h28};
      #1;
      guard = 0;
      while (!instr_ready && guard < 200) begin guard++; @(negedge clk); #1; end
      if (!instr_ready) ok = 0;
      if (k == NAPPLY) lo = wb_data;
      if (k == NAPPLY + 1) hi = wb_data;
      @(negedge clk);
    end
    instr_valid = 0;
    sig = {hi[9:0], lo};
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [41:0] good, sig;
    longint unsigned exp_sig = 0;
    bit ok;
    int detected = 0, vc_sites = 0, vc_detected = 0;
    nbr_in_link = '0; nbr_ds_ready = '1; instr_valid = 0; instr = '0;
    for (int k = 0; k < NAPPLY; k++) begin
      program_words[k] = {6'h3B, 22'($urandom), 4'h0};
      for (int p = 0; p < NPORTS; p++)
        if (program_words[k][21 + p]) exp_sig = (exp_sig + 64'(test_flit(program_words[k], p))) & ((64'd1 << 42) - 1);
    end
    fault_id = -1;
    run(good, ok);
    checks++;
    if (!ok || good != 42'(exp_sig)) begin
      failures++; $display("FAIL: fault-free signature %h expected %h", good, exp_sig);
    end
    for (int f = 0; f < NSITE * 2; f++) begin
      automatic int bit_index = (f / 2) % 44;
      fault_id = f;
      #1;
      run(sig, ok);
      if (!ok || sig != good) detected++;
      if (bit_index == 42) begin
        vc_sites++;
        if (!ok || sig != good) vc_detected++;
      end
    end
    fault_id = -1;
    checks++;
    if (detected == 0 || detected > NSITE * 2) begin failures++; $display("FAIL: no fault detected"); end
    $display("crossbar output stuck-at faults: %0d of %0d detected (%0.1f%%); VC-bit faults detected %0d of %0d",
             detected, NSITE * 2, 100.0 * detected / (NSITE * 2), vc_detected, vc_sites);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
