// Self-checking testbench of signature_gen: random output links drive the
// generator with random enable and occasional clear; a reference signature
// is kept in the testbench with 64-bit arithmetic reduced modulo 2^42.
module tb_signature_gen;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0, clear, enable;
  link_t [NPORTS-1:0] out_link;
  logic [SIG_W-1:0] sig;
  longint unsigned ref_sig;
  int checks = 0, failures = 0;

  signature_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; enable = 0; out_link = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_sig = 0;
    for (int t = 0; t < 2000; t++) begin
      longint unsigned add;
      add = 0;
      @(negedge clk);
      checks++;
      if (64'(sig) != ref_sig) begin
        failures++;
        $display("FAIL t=%0d sig=%h expected %h", t, sig, ref_sig);
      end
      for (int o = 0; o < NPORTS; o++) begin
        out_link[o] = link_t'({$urandom, $urandom});
        if (out_link[o].valid) add += 64'(out_link[o].flit);
      end
      enable = $urandom_range(0, 7) != 0;
      clear  = $urandom_range(0, 99) == 0;
      if (clear)       ref_sig = 0;
      else if (enable) ref_sig = (ref_sig + add) & ((64'd1 << SIG_W) - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
