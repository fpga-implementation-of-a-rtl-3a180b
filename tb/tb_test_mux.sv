// Self-checking testbench of test_mux: random links, ready levels and
// open-packet flags in normal, requested (draining) and test mode; every routed signal is compared with the
// mode rule.
module tb_test_mux;
  import noc_pkg::*;
  logic test_mode, test_req;
  link_t     [NPORTS-1:0] nbr_in_link, nbr_out_link, tpg_link, rtr_in_link, rtr_out_link;
  vc_ready_t [NPORTS-1:0] nbr_in_ready, nbr_ds_ready, rtr_in_ready, rtr_in_open, rtr_ds_ready;
  int checks = 0, failures = 0;

  test_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int mode = $urandom_range(0, 2);
      test_mode = (mode == 2);
      test_req  = (mode == 1);
      for (int p = 0; p < NPORTS; p++) begin
        nbr_in_link[p]  = link_t'({$urandom, $urandom});
        tpg_link[p]     = link_t'({$urandom, $urandom});
        rtr_out_link[p] = link_t'({$urandom, $urandom});
        nbr_ds_ready[p] = vc_ready_t'($urandom);
        rtr_in_ready[p] = vc_ready_t'($urandom);
        rtr_in_open[p]  = vc_ready_t'($urandom);
      end
      #1;
      for (int p = 0; p < NPORTS; p++) begin
        link_t exp_out;
        exp_out = rtr_out_link[p];
        if (mode == 2) exp_out.valid = 0;
        checks++;
        if (rtr_in_link[p] !== (mode == 2 ? tpg_link[p] : nbr_in_link[p])) begin
          failures++; $display("FAIL rtr_in_link mode=%0d", mode);
        end
        checks++;
        if (nbr_in_ready[p] !== (mode == 0 ? rtr_in_ready[p] :
                                 mode == 1 ? (rtr_in_ready[p] & rtr_in_open[p]) : vc_ready_t'(0))) begin
          failures++; $display("FAIL nbr_in_ready mode=%0d", mode);
        end
        checks++;
        if (nbr_out_link[p] !== exp_out) begin
          failures++; $display("FAIL nbr_out_link mode=%0d", mode);
        end
        checks++;
        if (rtr_ds_ready[p] !== (mode == 2 ? vc_ready_t'('1) : nbr_ds_ready[p])) begin
          failures++; $display("FAIL rtr_ds_ready mode=%0d", mode);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
