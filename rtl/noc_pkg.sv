// Shared types and constants of the self-testing 2D-mesh NoC router.
//
// A flit is 42 bits: a 2-bit flit type, destination row/column, source
// row/column (2 bits each, enough for a 4x4 mesh) and 32 data bits. On a link
// the flit travels with a valid bit and the 1-bit virtual-channel (VC) id that
// selects the input buffer of the next router. Port numbering, flit type codes
// and the custom instruction codes are this design's own choices; the field
// list of the flit, the 2 VCs, the 5 ports and the 5/1/15-bit test-apply
// fields follow the paper.
package noc_pkg;

  localparam int unsigned NPORTS  = 5;   // N, S, W, E, local core
  localparam int unsigned NVC     = 2;   // virtual channels per input port
  localparam int unsigned VC_W    = 1;
  localparam int unsigned COORD_W = 2;   // row / column index width (4x4 mesh)
  localparam int unsigned DATA_W  = 32;
  localparam int unsigned PID_W  = 3;   // encoded output port

  typedef enum logic [PID_W-1:0] {
    PORT_N = 3'd0,
    PORT_S = 3'd1,
    PORT_W = 3'd2,
    PORT_E = 3'd3,
    PORT_L = 3'd4
  } port_e;

  typedef enum logic [1:0] {
    FLIT_BODY   = 2'b00,
    FLIT_HEAD   = 2'b01,
    FLIT_TAIL   = 2'b10,
    FLIT_SINGLE = 2'b11   // head and tail of a one-flit packet
  } flit_type_e;

  typedef struct packed {
    flit_type_e          ftype;
    logic [COORD_W-1:0]  dst_row;
    logic [COORD_W-1:0]  dst_col;
    logic [COORD_W-1:0]  src_row;
    logic [COORD_W-1:0]  src_col;
    logic [DATA_W-1:0]   data;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);   // 42
  localparam int unsigned SIG_W  = FLIT_W;          // signature width

  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    flit_t           flit;
  } link_t;

  typedef logic [NVC-1:0] vc_ready_t;

  // Bid of one input port to the switch arbiter.
  typedef struct packed {
    logic              valid;
    logic [VC_W-1:0]   vc;
    logic [PID_W-1:0] port;
    logic              head;
    logic              tail;
  } sw_req_t;

  // Custom test instructions (MIPS32 encoding space).
  localparam logic [5:0] OP_SPECIAL     = 6'h00;
  localparam logic [5:0] OP_TEST_APPLY  = 6'h3B;
  localparam logic [5:0] FUNC_GATHER_HI = 6'h28;
  localparam logic [5:0] FUNC_GATHER_LO = 6'h29;

  // Test-apply fields, instruction bits [25:4]:
  // [25:21] valid input ports, [20] VC, [19:5] 3-bit requested output per
  // port (port p at bits 5+3p), [4] fill value for the remaining flit fields.
  typedef struct packed {
    logic [NPORTS-1:0]             port_valid;
    logic [VC_W-1:0]               vc;
    logic [NPORTS-1:0][PID_W-1:0] out_req;
    logic                          fill;
  } apply_t;

  function automatic logic is_head(flit_type_e t);
    return t == FLIT_HEAD || t == FLIT_SINGLE;
  endfunction

  function automatic logic is_tail(flit_type_e t);
    return t == FLIT_TAIL || t == FLIT_SINGLE;
  endfunction

endpackage
