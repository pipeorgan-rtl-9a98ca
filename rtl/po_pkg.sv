// po_pkg: types and constants shared by the PipeOrgan accelerator RTL.
//
// The on-chip network carries single-flit packets. Every flit holds a full
// routing header and one 8-byte payload, which is one PE dot-product vector
// (8 lanes of 1-byte elements, as in the evaluated configuration). The header
// layout, the flit types and the port numbering are choices of this RTL; the
// paper fixes only the element width, the vector width, the array size and the
// long-link length of the AMP topology.
//
// Coordinates: x is the column (east grows x), y is the row (south grows y).
// The global buffer sits on the west edge: each row has one global-buffer port
// on the west side of its x = 0 router.
package po_pkg;

  localparam int unsigned DW      = 8;          // bits per element (1 B)
  localparam int unsigned LANES   = 8;          // PE dot-product size
  localparam int unsigned VW      = DW * LANES; // bits per vector / flit payload
  localparam int unsigned COORD_W = 6;          // up to 64 x 64 PEs
  localparam int unsigned IDX_W   = 12;         // flit index field
  localparam int unsigned ACC_W   = 32;         // PE accumulator width
  localparam int unsigned NPORTS  = 9;          // router ports

  typedef logic [DW-1:0]      elem_t;
  typedef logic [VW-1:0]      vec_t;
  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [IDX_W-1:0]   idx_t;

  // Flit types.
  //   F_CFG : write PE configuration register idx with data
  //   F_WGT : write PE weight register-file entry idx with data
  //   F_ACT : activation vector; idx is the input-chunk index at a PE,
  //           or the word address when the flit goes to the global buffer
  typedef enum logic [1:0] {
    F_CFG = 2'd0,
    F_WGT = 2'd1,
    F_ACT = 2'd2
  } ftype_e;

  typedef struct packed {
    logic   to_gb;   // 1: deliver to the global-buffer port of row dst_y
    coord_t dst_x;
    coord_t dst_y;
    ftype_e ftype;
    idx_t   idx;
    vec_t   data;
  } flit_t;

  // Router port numbers. Ports 5..8 are the AMP long links.
  typedef enum logic [3:0] {
    P_L  = 4'd0,
    P_N  = 4'd1,
    P_S  = 4'd2,
    P_E  = 4'd3,
    P_W  = 4'd4,
    P_N4 = 4'd5,
    P_S4 = 4'd6,
    P_E4 = 4'd7,
    P_W4 = 4'd8
  } port_e;

  // Dimension-ordered AMP routing: first along x, then along y, then eject.
  // Along a dimension the long link is taken while the distance still to go
  // is at least LONG, otherwise the one-hop mesh link.
  // Flits for the global buffer travel to x = 0, then along y to row dst_y,
  // and leave through the west port there.
  function automatic port_e amp_route(input flit_t f, input coord_t x, input coord_t y,
                                      input int unsigned long_len);
    int signed dx, dy;
    if (f.to_gb) dx = -int'(x) - 1;       // target column -1 (the buffer)
    else         dx = int'(f.dst_x) - int'(x);
    dy = int'(f.dst_y) - int'(y);
    if (f.to_gb && x == 0) begin
      if (dy > 0)      return (dy >= int'(long_len)) ? P_S4 : P_S;
      else if (dy < 0) return (-dy >= int'(long_len)) ? P_N4 : P_N;
      else             return P_W;
    end
    if (dx > 0)        return (dx >= int'(long_len)) ? P_E4 : P_E;
    // towards the buffer the last hop (column 0 -> -1) is not a link of the
    // array, so only the distance to column 0 counts for the long link
    if (dx < 0)        return ((-dx - int'(f.to_gb)) >= int'(long_len)) ? P_W4 : P_W;
    if (dy > 0)        return (dy >= int'(long_len)) ? P_S4 : P_S;
    if (dy < 0)        return (-dy >= int'(long_len)) ? P_N4 : P_N;
    return P_L;
  endfunction

  // ---------------------------------------------------------------------
  // PE configuration (F_CFG flits). Register 0 is the compute control word,
  // registers 1 and 2 the two output destinations.
  // ---------------------------------------------------------------------
  localparam idx_t CFG_CTRL = 12'd0;
  localparam idx_t CFG_DST0 = 12'd1;
  localparam idx_t CFG_DST1 = 12'd2;

  typedef struct packed {
    logic       dw;      // depthwise: 8 lanes accumulate separately
    logic       relu;    // clamp negative results to zero
    logic [4:0] shift;   // arithmetic right shift before saturation
    logic [2:0] nk_m1;   // output channels per output vector, minus 1
    logic [3:0] ci_m1;   // input chunks reduced per output, minus 1
  } pe_ctrl_t;           // 14 bits, data[13:0]

  typedef struct packed {
    idx_t   idx;         // chunk index at the consumer, or buffer base address
    coord_t y;
    coord_t x;
    logic   to_gb;
    logic   valid;
  } pe_dst_t;            // 26 bits, data[25:0]

  // ---------------------------------------------------------------------
  // Global-buffer stream command: send len words of bank `row`, starting at
  // addr, into the array as flits. The flit index runs idx0, idx0 + 1, ...
  // and wraps back to idx0 every idx_mod words (idx_mod = 0: no wrap).
  // ---------------------------------------------------------------------
  typedef struct packed {
    coord_t      row;
    logic [11:0] addr;
    logic [12:0] len;
    coord_t      dst_x;
    coord_t      dst_y;
    ftype_e      ftype;
    idx_t        idx0;
    logic [4:0]  idx_mod;
  } gb_cmd_t;

  // Per-cycle event pulses of a PE, used by the activity counters.
  typedef struct packed {
    logic fwd;    // output vector sent to another PE (fine-grained pipelining)
    logic gb;     // output vector sent to the global buffer (coarse-grained)
    logic skip;   // second copy sent to the skip-connection destination
    logic stall;  // reduction finished but the output stage was still busy
    logic hold;   // an activation waited because both buffer banks held its chunk
    logic dw;     // a depthwise (unreduced) output vector was produced
  } pe_ev_t;

  // Requantize an accumulator to one signed byte.
  function automatic elem_t requant(input logic signed [ACC_W-1:0] acc,
                                    input logic [4:0] shift, input logic relu);
    logic signed [ACC_W-1:0] s;
    s = acc >>> shift;
    if (relu && s < 0) s = '0;
    if (s > 127)       return 8'sd127;
    else if (s < -128) return 8'h80;
    else               return s[DW-1:0];
  endfunction

endpackage
