// Self-checking testbench of test_response_loader: random gathers, drain and
// mode states; completion, write-back data (HI = signature bits 41..32,
// LO = bits 31..0), destination register and the test-mode exit are compared
// with the rule.
module tb_test_response_loader;
  import noc_pkg::*;
  logic gather_valid, gather_hi, drained, test_mode;
  logic [4:0] gather_rd, wb_rd;
  logic [SIG_W-1:0] sig;
  logic gather_ready, wb_valid, exit_test;
  logic [31:0] wb_data;
  int checks = 0, failures = 0;

  test_response_loader dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic done;
      logic [31:0] exp_data;
      gather_valid = 1'($urandom); gather_hi = 1'($urandom); drained = 1'($urandom);
      test_mode = 1'($urandom); gather_rd = 5'($urandom); sig = SIG_W'({$urandom, $urandom});
      #1;
      done = gather_valid && (drained || !test_mode);
      exp_data = gather_hi ? {22'd0, sig[41:32]} : sig[31:0];
      checks++;
      if (gather_ready !== done || wb_valid !== done || exit_test !== (done && test_mode)) begin
        failures++;
        $display("FAIL handshake v=%0b d=%0b m=%0b", gather_valid, drained, test_mode);
      end
      if (done) begin
        checks++;
        if (wb_data !== exp_data || wb_rd !== gather_rd) begin
          failures++;
          $display("FAIL data %h expected %h", wb_data, exp_data);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
