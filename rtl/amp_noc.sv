// amp_noc: the ROWS x COLS AMP network that connects the PEs and the global
// buffer.
//
// One amp_router per PE. Router (x, y) connects to its four mesh neighbours
// and, through its long links, to (x +/- LONG, y) and (x, y +/- LONG) where
// those exist; at the array edge unused inputs are idle and unused outputs
// are never ready (the routing never selects them, which the router
// asserts). The local port of each router is brought out for its PE; the
// west port of the x = 0 router of each row is the global-buffer port of
// that row (flits enter the array there and flits marked to_gb leave there).
// Compared with a mesh this adds one link per router and direction where the
// far end exists, under twice the links of the mesh, as the paper states.
//
// Interfaces are valid / ready per channel; a flit moves one hop per cycle.
// xfer reports, per router and output port, that a flit left this cycle.
module amp_noc
  import po_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned LONG       = 4,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // local (PE) ports
  input  logic              lin_valid  [ROWS][COLS],
  output logic              lin_ready  [ROWS][COLS],
  input  flit_t             lin_flit   [ROWS][COLS],
  output logic              lout_valid [ROWS][COLS],
  input  logic              lout_ready [ROWS][COLS],
  output flit_t             lout_flit  [ROWS][COLS],
  // global-buffer ports, one per row, at the west edge
  input  logic              gin_valid  [ROWS],
  output logic              gin_ready  [ROWS],
  input  flit_t             gin_flit   [ROWS],
  output logic              gout_valid [ROWS],
  input  logic              gout_ready [ROWS],
  output flit_t             gout_flit  [ROWS],
  output logic [NPORTS-1:0] xfer       [ROWS][COLS]
);
  // router-side signals
  logic [NPORTS-1:0] ri_valid [ROWS][COLS];
  logic [NPORTS-1:0] ri_ready [ROWS][COLS];
  flit_t             ri_flit  [ROWS][COLS][NPORTS];
  logic [NPORTS-1:0] ro_valid [ROWS][COLS];
  logic [NPORTS-1:0] ro_ready [ROWS][COLS];
  flit_t             ro_flit  [ROWS][COLS][NPORTS];

  for (genvar y = 0; y < ROWS; y++) begin : g_row
    for (genvar x = 0; x < COLS; x++) begin : g_col
      amp_router #(.ROWS(ROWS), .COLS(COLS), .LONG(LONG), .FIFO_DEPTH(FIFO_DEPTH)) u_rt (
        .clk, .rst_n,
        .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .in_valid(ri_valid[y][x]), .in_ready(ri_ready[y][x]), .in_flit(ri_flit[y][x]),
        .out_valid(ro_valid[y][x]), .out_ready(ro_ready[y][x]), .out_flit(ro_flit[y][x]),
        .xfer(xfer[y][x])
      );

      // ---- local port ----
      assign ri_valid[y][x][P_L] = lin_valid[y][x];
      assign ri_flit[y][x][P_L]  = lin_flit[y][x];
      assign lin_ready[y][x]     = ri_ready[y][x][P_L];
      assign lout_valid[y][x]    = ro_valid[y][x][P_L];
      assign lout_flit[y][x]     = ro_flit[y][x][P_L];
      assign ro_ready[y][x][P_L] = lout_ready[y][x];

      // ---- one-hop links: input side and the ready of the matching output ----
      // north input <- (x, y-1) south output
      if (y > 0) begin : g_n
        assign ri_valid[y][x][P_N] = ro_valid[y-1][x][P_S];
        assign ri_flit[y][x][P_N]  = ro_flit[y-1][x][P_S];
        assign ro_ready[y][x][P_N] = ri_ready[y-1][x][P_S];
      end else begin : g_n_edge
        assign ri_valid[y][x][P_N] = 1'b0;
        assign ri_flit[y][x][P_N]  = '0;
        assign ro_ready[y][x][P_N] = 1'b0;
      end
      // south input <- (x, y+1) north output
      if (y + 1 < ROWS) begin : g_s
        assign ri_valid[y][x][P_S] = ro_valid[y+1][x][P_N];
        assign ri_flit[y][x][P_S]  = ro_flit[y+1][x][P_N];
        assign ro_ready[y][x][P_S] = ri_ready[y+1][x][P_N];
      end else begin : g_s_edge
        assign ri_valid[y][x][P_S] = 1'b0;
        assign ri_flit[y][x][P_S]  = '0;
        assign ro_ready[y][x][P_S] = 1'b0;
      end
      // east input <- (x+1, y) west output
      if (x + 1 < COLS) begin : g_e
        assign ri_valid[y][x][P_E] = ro_valid[y][x+1][P_W];
        assign ri_flit[y][x][P_E]  = ro_flit[y][x+1][P_W];
        assign ro_ready[y][x][P_E] = ri_ready[y][x+1][P_W];
      end else begin : g_e_edge
        assign ri_valid[y][x][P_E] = 1'b0;
        assign ri_flit[y][x][P_E]  = '0;
        assign ro_ready[y][x][P_E] = 1'b0;
      end
      // west input <- (x-1, y) east output, or the row's buffer port at x = 0
      if (x > 0) begin : g_w
        assign ri_valid[y][x][P_W] = ro_valid[y][x-1][P_E];
        assign ri_flit[y][x][P_W]  = ro_flit[y][x-1][P_E];
        assign ro_ready[y][x][P_W] = ri_ready[y][x-1][P_E];
      end else begin : g_w_gb
        assign ri_valid[y][x][P_W] = gin_valid[y];
        assign ri_flit[y][x][P_W]  = gin_flit[y];
        assign gin_ready[y]        = ri_ready[y][x][P_W];
        assign gout_valid[y]       = ro_valid[y][x][P_W];
        assign gout_flit[y]        = ro_flit[y][x][P_W];
        assign ro_ready[y][x][P_W] = gout_ready[y];
      end

      // ---- long links ----
      if (y >= LONG) begin : g_n4
        assign ri_valid[y][x][P_N4] = ro_valid[y-LONG][x][P_S4];
        assign ri_flit[y][x][P_N4]  = ro_flit[y-LONG][x][P_S4];
        assign ro_ready[y][x][P_N4] = ri_ready[y-LONG][x][P_S4];
      end else begin : g_n4_edge
        assign ri_valid[y][x][P_N4] = 1'b0;
        assign ri_flit[y][x][P_N4]  = '0;
        assign ro_ready[y][x][P_N4] = 1'b0;
      end
      if (y + LONG < ROWS) begin : g_s4
        assign ri_valid[y][x][P_S4] = ro_valid[y+LONG][x][P_N4];
        assign ri_flit[y][x][P_S4]  = ro_flit[y+LONG][x][P_N4];
        assign ro_ready[y][x][P_S4] = ri_ready[y+LONG][x][P_N4];
      end else begin : g_s4_edge
        assign ri_valid[y][x][P_S4] = 1'b0;
        assign ri_flit[y][x][P_S4]  = '0;
        assign ro_ready[y][x][P_S4] = 1'b0;
      end
      if (x + LONG < COLS) begin : g_e4
        assign ri_valid[y][x][P_E4] = ro_valid[y][x+LONG][P_W4];
        assign ri_flit[y][x][P_E4]  = ro_flit[y][x+LONG][P_W4];
        assign ro_ready[y][x][P_E4] = ri_ready[y][x+LONG][P_W4];
      end else begin : g_e4_edge
        assign ri_valid[y][x][P_E4] = 1'b0;
        assign ri_flit[y][x][P_E4]  = '0;
        assign ro_ready[y][x][P_E4] = 1'b0;
      end
      if (x >= LONG) begin : g_w4
        assign ri_valid[y][x][P_W4] = ro_valid[y][x-LONG][P_E4];
        assign ri_flit[y][x][P_W4]  = ro_flit[y][x-LONG][P_E4];
        assign ro_ready[y][x][P_W4] = ri_ready[y][x-LONG][P_E4];
      end else begin : g_w4_edge
        assign ri_valid[y][x][P_W4] = 1'b0;
        assign ri_flit[y][x][P_W4]  = '0;
        assign ro_ready[y][x][P_W4] = 1'b0;
      end
    end
  end
endmodule
