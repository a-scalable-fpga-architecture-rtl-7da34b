// gari_pkg: types, widths and helpers shared by the GARI decoder.
//
// Quantization follows the published operating point: 6-bit input LLRs,
// 8-bit check-node messages and 10-bit variable-node (total) values, all
// two's complement and saturated symmetrically (the most negative code is
// never produced). Crossbar items carry a destination port, a destination
// address inside the receiving memory and a value; their field widths are
// fixed here and large enough for the full-size configuration (up to 256
// crossbar ports, 2048-entry memories).
//
// The load bus (load_t) is this design's own choice: the paper calls the
// code-dependent tables ROMs but does not say how they are filled, so every
// table, every LLR memory and the syndrome store is written through one
// target-addressed bus before a decode starts.
package gari_pkg;

  localparam int LLR_W  = 6;   // input LLR width
  localparam int MSG_W  = 8;   // check-node message width
  localparam int VAR_W  = 10;  // variable-node value width
  localparam int DEST_W = 8;   // crossbar destination port
  localparam int ADDR_W = 11;  // destination address inside a memory

  localparam int MSG_MAX = (1 << (MSG_W - 1)) - 1;
  localparam int VAR_MAX = (1 << (VAR_W - 1)) - 1;

  typedef logic signed [LLR_W-1:0] llr_t;
  typedef logic signed [MSG_W-1:0] msg_t;
  typedef logic signed [VAR_W-1:0] var_t;

  // Message travelling through a crossbar.
  typedef struct packed {
    logic [DEST_W-1:0] dest;
    logic [ADDR_W-1:0] addr;
    var_t              value;
  } xb_item_t;

  // Tag stored in a tag memory: destination port and address.
  typedef struct packed {
    logic              valid;
    logic [DEST_W-1:0] dest;
    logic [ADDR_W-1:0] addr;
  } tag_t;

  // One D_X/D_Z control-ROM entry (one tile, one check).
  typedef struct packed {
    logic       valid;   // tile takes part in this check (else masked)
    logic       first;   // first touch of the variable in its matrix
    logic       last;    // last touch: write hard decision, send to U,V
    logic [8:0] addr;    // variable address inside the tile memory
  } ctrl_t;

  typedef enum logic [3:0] {
    LD_CTRL    = 4'd0,  // control ROM entry: tile, addr=check index
    LD_DXTAG   = 4'd1,  // D_X/D_Z tile tag: tile, addr={mat,var}
    LD_CONV    = 4'd2,  // parity-check entry: tile, addr=D_Z check
    LD_LLR_DX  = 4'd3,  // calibration memory C: tile, addr
    LD_UV_XZ   = 4'd4,  // U,V tile e_X/e_Z prior: tile, addr
    LD_UV_YLLR = 4'd5,  // U,V tile e_Y prior: tile, lane, addr
    LD_UV_YTAG = 4'd6,  // U,V tile e_Y tag: tile, lane, addr
    LD_UV_BTAG = 4'd7,  // U,V tile ebar tag: tile, addr
    LD_SYN     = 4'd8   // syndrome bit: addr=global check index
  } ld_target_e;

  typedef struct packed {
    logic       valid;
    ld_target_e target;
    logic [7:0] tile;
    logic [7:0] lane;
    logic [11:0] addr;
    logic [31:0] data;
  } load_t;

  function automatic var_t sat_var(input logic signed [VAR_W+1:0] x);
    if (x > VAR_MAX) return var_t'(VAR_MAX);
    if (x < -VAR_MAX) return var_t'(-VAR_MAX);
    return var_t'(x);
  endfunction

  function automatic msg_t sat_msg(input logic signed [VAR_W+1:0] x);
    if (x > MSG_MAX) return msg_t'(MSG_MAX);
    if (x < -MSG_MAX) return msg_t'(-MSG_MAX);
    return msg_t'(x);
  endfunction

  // Tag word on the load bus: data[31] valid, data[30:23] destination port,
  // data[10:0] destination address.
  function automatic tag_t tag_from_data(input logic [31:0] d);
    tag_t t;
    t.valid = d[31];
    t.dest  = d[30:23];
    t.addr  = d[10:0];
    return t;
  endfunction

  function automatic int clog2_min1(input int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
