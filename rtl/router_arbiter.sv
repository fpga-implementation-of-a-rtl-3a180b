// Switch arbiter of the five-port router.
//
// For every output port the arbiter picks, each cycle, at most one input port
// whose bid (req) names that output. A free output goes to the first input,
// in round-robin order starting after the last winner, that bids a head flit
// for it. If that head is not also the tail, the output is then held by that
// input and VC (out_locked) until the tail flit passes, so the flits of one
// packet leave the output back to back with no other packet in between
// (wormhole switching). grant[i] tells input i that its flit moves this cycle;
// sel/sel_valid drive the crossbar. Outputs are combinational from req and the
// state; the state changes at the clock edge.
//
// The arbiter's inputs (valid, VC and requested output per input port) are
// those of the paper; round robin and packet locking are this design's
// choices. Reset: synchronous, active low.
module router_arbiter
  import noc_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  sw_req_t [NPORTS-1:0]           req,
  output logic    [NPORTS-1:0]           grant,
  output logic    [NPORTS-1:0]           sel_valid,
  output logic    [NPORTS-1:0][PID_W-1:0] sel,
  output logic    [NPORTS-1:0]           out_locked
);
  logic [NPORTS-1:0]             locked_q;
  logic [NPORTS-1:0][PID_W-1:0] owner_q;
  logic [NPORTS-1:0][VC_W-1:0]   owner_vc_q;
  logic [NPORTS-1:0][PID_W-1:0] ptr_q;

  function automatic logic [PID_W-1:0] wrap_inc(logic [PID_W-1:0] i, int unsigned k);
    return PID_W'((32'(i) + k) % NPORTS);
  endfunction

  always_comb begin
    sel_valid = '0;
    sel       = '0;
    for (int o = 0; o < NPORTS; o++) begin
      if (locked_q[o]) begin
        if (req[owner_q[o]].valid && req[owner_q[o]].port == PID_W'(o)
            && req[owner_q[o]].vc == owner_vc_q[o]) begin
          sel_valid[o] = 1'b1;
          sel[o]       = owner_q[o];
        end
      end else begin
        for (int k = 0; k < NPORTS; k++) begin
          automatic logic [PID_W-1:0] i = wrap_inc(ptr_q[o], k);
          if (!sel_valid[o] && req[i].valid && req[i].head && req[i].port == PID_W'(o)) begin
            sel_valid[o] = 1'b1;
            sel[o]       = i;
          end
        end
      end
    end
  end

  always_comb begin
    grant = '0;
    for (int o = 0; o < NPORTS; o++)
      if (sel_valid[o]) grant[sel[o]] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked_q   <= '0;
      owner_q    <= '0;
      owner_vc_q <= '0;
      ptr_q      <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (sel_valid[o]) begin
          if (locked_q[o]) begin
            if (req[sel[o]].tail) locked_q[o] <= 1'b0;
          end else begin
            ptr_q[o] <= wrap_inc(sel[o], 1);
            if (!req[sel[o]].tail) begin
              locked_q[o]   <= 1'b1;
              owner_q[o]    <= sel[o];
              owner_vc_q[o] <= req[sel[o]].vc;
            end
          end
        end
      end
    end
  end

  assign out_locked = locked_q;

  // An input port has one crossbar input, so it may win at most one output.
  a_one_output_per_input: assert property (@(posedge clk) disable iff (!rst_n)
    $countones(sel_valid) == $countones(grant));
endmodule
