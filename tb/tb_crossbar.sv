// Self-checking testbench of crossbar: random flits and selections; each
// output must show, one clock later, the flit and VC of the selected input,
// with valid equal to the selection's valid bit.
module tb_crossbar;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0;
  flit_t [NPORTS-1:0]             in_flit;
  logic  [NPORTS-1:0][VC_W-1:0]   in_vc;
  logic  [NPORTS-1:0]             sel_valid;
  logic  [NPORTS-1:0][PID_W-1:0]  sel;
  link_t [NPORTS-1:0]             out_link;
  int checks = 0, failures = 0;

  crossbar dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    link_t [NPORTS-1:0] exp;
    in_flit = '0; in_vc = '0; sel_valid = '0; sel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int o = 0; o < NPORTS; o++) begin
      checks++;
      if (out_link[o].valid) begin failures++; $display("FAIL: valid after reset"); end
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int i = 0; i < NPORTS; i++) begin
        in_flit[i] = flit_t'({$urandom, $urandom});
        in_vc[i]   = VC_W'($urandom);
        sel[i]     = PID_W'($urandom_range(0, NPORTS - 1));
        sel_valid[i] = $urandom_range(0, 3) != 0;
      end
      for (int o = 0; o < NPORTS; o++) begin
        exp[o].valid = sel_valid[o];
        exp[o].vc    = in_vc[sel[o]];
        exp[o].flit  = in_flit[sel[o]];
      end
      @(posedge clk); #1;
      for (int o = 0; o < NPORTS; o++) begin
        checks++;
        if (out_link[o].valid !== exp[o].valid ||
            (exp[o].valid && (out_link[o].vc !== exp[o].vc || out_link[o].flit !== exp[o].flit))) begin
          failures++;
          $display("FAIL t=%0d output %0d", t, o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
