// ROWS x COLS 2D-mesh network on chip whose routers test themselves.
//
// Node n = row*COLS + col holds a testable_router at coordinates (row, col).
// Row 0 is the northern edge and column 0 the western edge. Each router's
// N/S/W/E ports are linked to its neighbours; ports on the mesh edge see no
// traffic and report no room. The local port of every router (injection and
// ejection for the node's core) and every core's test-instruction port are
// brought out as arrays indexed by n, since the cores themselves are not
// part of this block.
//
// Any router can be tested at any time by its own core, independently of and
// in parallel with the others; while one router is in test mode its
// neighbours are back-pressured (its input ready levels read zero) and no
// flit leaves it. The default 4x4 size is the paper's evaluation platform.
module noc_mesh
  import noc_pkg::*;
#(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned COLS  = 4,
  parameter int unsigned DEPTH = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // local port of every router
  input  link_t     [ROWS*COLS-1:0]          local_in_link,
  output vc_ready_t [ROWS*COLS-1:0]          local_in_ready,
  output link_t     [ROWS*COLS-1:0]          local_out_link,
  input  vc_ready_t [ROWS*COLS-1:0]          local_ds_ready,
  // test-instruction port of every core
  input  logic      [ROWS*COLS-1:0]          instr_valid,
  input  logic      [ROWS*COLS-1:0][31:0]    instr,
  output logic      [ROWS*COLS-1:0]          instr_ready,
  output logic      [ROWS*COLS-1:0]          instr_is_test,
  output logic      [ROWS*COLS-1:0]          wb_valid,
  output logic      [ROWS*COLS-1:0][4:0]     wb_rd,
  output logic      [ROWS*COLS-1:0][31:0]    wb_data,
  output logic      [ROWS*COLS-1:0]          test_mode
);
  localparam int unsigned N = ROWS * COLS;

  if (ROWS > (1 << COORD_W) || COLS > (1 << COORD_W)) begin : g_size_check
    $error("noc_mesh: ROWS and COLS must fit in COORD_W bits");
  end

  link_t     [N-1:0][NPORTS-1:0] in_link, out_link;
  vc_ready_t [N-1:0][NPORTS-1:0] in_ready, ds_ready;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned n = r * COLS + c;

      // North neighbour (r-1, c): its S output feeds our N input.
      if (r > 0) begin : g_n
        assign in_link[n][PORT_N]  = out_link[n-COLS][PORT_S];
        assign ds_ready[n][PORT_N] = in_ready[n-COLS][PORT_S];
      end else begin : g_n_edge
        assign in_link[n][PORT_N]  = '0;
        assign ds_ready[n][PORT_N] = '0;
      end
      if (r < ROWS - 1) begin : g_s
        assign in_link[n][PORT_S]  = out_link[n+COLS][PORT_N];
        assign ds_ready[n][PORT_S] = in_ready[n+COLS][PORT_N];
      end else begin : g_s_edge
        assign in_link[n][PORT_S]  = '0;
        assign ds_ready[n][PORT_S] = '0;
      end
      if (c > 0) begin : g_w
        assign in_link[n][PORT_W]  = out_link[n-1][PORT_E];
        assign ds_ready[n][PORT_W] = in_ready[n-1][PORT_E];
      end else begin : g_w_edge
        assign in_link[n][PORT_W]  = '0;
        assign ds_ready[n][PORT_W] = '0;
      end
      if (c < COLS - 1) begin : g_e
        assign in_link[n][PORT_E]  = out_link[n+1][PORT_W];
        assign ds_ready[n][PORT_E] = in_ready[n+1][PORT_W];
      end else begin : g_e_edge
        assign in_link[n][PORT_E]  = '0;
        assign ds_ready[n][PORT_E] = '0;
      end
      assign in_link[n][PORT_L]  = local_in_link[n];
      assign ds_ready[n][PORT_L] = local_ds_ready[n];
      assign local_in_ready[n]   = in_ready[n][PORT_L];
      assign local_out_link[n]   = out_link[n][PORT_L];

      testable_router #(.DEPTH(DEPTH)) u_node (
        .clk, .rst_n,
        .my_row        (COORD_W'(r)),
        .my_col        (COORD_W'(c)),
        .nbr_in_link   (in_link[n]),
        .nbr_in_ready  (in_ready[n]),
        .nbr_out_link  (out_link[n]),
        .nbr_ds_ready  (ds_ready[n]),
        .instr_valid   (instr_valid[n]),
        .instr         (instr[n]),
        .instr_ready   (instr_ready[n]),
        .instr_is_test (instr_is_test[n]),
        .wb_valid      (wb_valid[n]),
        .wb_rd         (wb_rd[n]),
        .wb_data       (wb_data[n]),
        .test_mode     (test_mode[n])
      );
    end
  end
endmodule
