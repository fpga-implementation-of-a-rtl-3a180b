// Self-checking testbench of test_instr_decoder: hand-built test-apply and
// test-gather words, random words and near misses (non-zero RS/RT/SHAMT,
// wrong FUNC, wrong opcode) are decoded and compared with the field layout.
module tb_test_instr_decoder;
  import noc_pkg::*;
  logic [31:0] instr;
  logic        is_apply, is_gather_hi, is_gather_lo;
  apply_t      apply;
  logic [4:0]  rd;
  int checks = 0, failures = 0;

  test_instr_decoder dut (.*);

  task automatic expect_dec(string what, logic ea, logic eh, logic el);
    #1;
    checks++;
    if (is_apply !== ea || is_gather_hi !== eh || is_gather_lo !== el) begin
      failures++;
      $display("FAIL %s: %h -> apply=%0b hi=%0b lo=%0b", what, instr, is_apply, is_gather_hi, is_gather_lo);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [4:0]  pv, r;
      logic        vc, fill;
      logic [2:0]  oq [5];
      pv = 5'($urandom); vc = 1'($urandom); fill = 1'($urandom); r = 5'($urandom);
      instr = {6'h3B, pv, vc, 15'b0, fill, 4'b0};
      for (int p = 0; p < 5; p++) begin
        oq[p] = 3'($urandom);
        instr[5 + 3*p +: 3] = oq[p];
      end
      expect_dec("apply", 1, 0, 0);
      checks++;
      if (apply.port_valid !== pv || apply.vc !== vc || apply.fill !== fill) begin
        failures++; $display("FAIL apply fields %h", instr);
      end
      for (int p = 0; p < 5; p++) begin
        checks++;
        if (apply.out_req[p] !== oq[p]) begin failures++; $display("FAIL out_req[%0d]", p); end
      end
      instr = {6'h00, 5'd0, 5'd0, r, 5'd0, 6'h28};
      expect_dec("gather hi", 0, 1, 0);
      checks++;
      if (rd !== r) begin failures++; $display("FAIL rd"); end
      instr = {6'h00, 5'd0, 5'd0, r, 5'd0, 6'h29};
      expect_dec("gather lo", 0, 0, 1);
      instr = {6'h00, 5'd1 + 5'($urandom_range(0, 30)), 5'd0, r, 5'd0, 6'h29};
      expect_dec("gather with rs", 0, 0, 0);
      instr = {6'h00, 5'd0, 5'd0, r, 5'd1 + 5'($urandom_range(0, 30)), 6'h28};
      expect_dec("gather with shamt", 0, 0, 0);
      instr = {6'h00, 5'd0, 5'd0, r, 5'd0, 6'h20};
      expect_dec("add", 0, 0, 0);
      instr = {6'h3B, 22'($urandom), 4'h1 + 4'($urandom_range(0, 14))};
      expect_dec("apply low bits set", 0, 0, 0);
      instr = $urandom;
      if (instr[31:26] != 6'h3B && instr[31:26] != 6'h00) expect_dec("random", 0, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
