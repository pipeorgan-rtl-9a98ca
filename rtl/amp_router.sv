// amp_router: the router of one PE in the AMP (augmented mesh) network.
//
// AMP is a 2-D mesh to which every router adds a long link of LONG hops in
// each of the four directions, LONG = Round(sqrt(ROWS/2)), 4 for the 32 x 32
// array. The router therefore has nine ports: local (0), the four mesh
// neighbours N, S, E, W (1..4) and the four long links N4, S4, E4, W4 (5..8).
//
// Each input port has a FIFO_DEPTH-entry queue. The flit at the head of a
// queue is routed by amp_route (po_pkg): dimension order, x first, then y,
// and within a dimension the long link while at least LONG hops remain, the
// one-hop link otherwise; flits for the global buffer run to column 0, then
// along the column to their row, and leave by the west port. Each output port
// has a round-robin arbiter over the inputs that request it. A flit crosses
// the router in the cycle it wins arbitration: one cycle per hop, queue to
// queue, with back-pressure by the downstream queue's ready, which depends on
// its fill level only. Dimension-ordered routing on a mesh without wrap
// links has no cyclic channel dependency, and the long links keep the
// direction of travel, so the network is deadlock-free without virtual
// channels.
//
// The topology and the long-link length follow the paper; the link choice by
// remaining distance follows the authors' description of AMP routing. Queue
// depth, arbitration and single-flit packets are this design's choices.
// my_x / my_y are inputs rather than parameters so that all routers share one
// elaborated module.
module amp_router
  import po_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned LONG       = 4,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  coord_t             my_x,
  input  coord_t             my_y,
  input  logic [NPORTS-1:0]  in_valid,
  output logic [NPORTS-1:0]  in_ready,
  input  flit_t              in_flit   [NPORTS],
  output logic [NPORTS-1:0]  out_valid,
  input  logic [NPORTS-1:0]  out_ready,
  output flit_t              out_flit  [NPORTS],
  output logic [NPORTS-1:0]  xfer          // a flit left through this output
);
  localparam int unsigned PW = $clog2(NPORTS);

  flit_t             head  [NPORTS];
  logic [NPORTS-1:0] hvalid, pop;
  port_e             route [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    po_fifo #(.T(flit_t), .DEPTH(FIFO_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_flit[i]),
      .out_valid(hvalid[i]), .out_ready(pop[i]), .out_data(head[i]), .count()
    );
    assign route[i] = amp_route(head[i], my_x, my_y, LONG);
  end

  // request matrix req[o][i]
  logic [NPORTS-1:0] req   [NPORTS];
  logic [NPORTS-1:0] grant [NPORTS];
  logic [PW-1:0]     rr    [NPORTS];

  always_comb begin
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++)
        req[o][i] = hvalid[i] && (route[i] == port_e'(o));
  end

  // round-robin: first requester at or after rr[o]
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      logic found;
      grant[o] = '0;
      found    = 1'b0;
      // requesters at or above the pointer first, then the wrapped-around ones
      for (int i = 0; i < NPORTS; i++)
        if (!found && req[o][i] && i >= int'(rr[o])) begin
          grant[o][i] = 1'b1;
          found       = 1'b1;
        end
      for (int i = 0; i < NPORTS; i++)
        if (!found && req[o][i]) begin
          grant[o][i] = 1'b1;
          found       = 1'b1;
        end
    end
  end

  always_comb begin
    pop = '0;
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = (grant[o] != '0);
      out_flit[o]  = '0;
      for (int i = 0; i < NPORTS; i++) begin
        if (grant[o][i]) out_flit[o] = head[i];
        if (grant[o][i] && out_ready[o]) pop[i] = 1'b1;
      end
      xfer[o] = out_valid[o] && out_ready[o];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (xfer[o]) begin
          for (int i = 0; i < NPORTS; i++)
            if (grant[o][i]) rr[o] <= PW'((i + 1) % NPORTS);
        end
      end
    end
  end

`ifndef SYNTHESIS
  // A routed flit never leaves the array except through the west buffer port.
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk
    a_in_array: assert property (@(posedge clk) disable iff (!rst_n)
      hvalid[i] |->
        !((route[i] == P_E  && int'(my_x) + 1    >= COLS) ||
          (route[i] == P_E4 && int'(my_x) + LONG >= COLS) ||
          (route[i] == P_W4 && int'(my_x) < LONG)         ||
          (route[i] == P_S  && int'(my_y) + 1    >= ROWS) ||
          (route[i] == P_S4 && int'(my_y) + LONG >= ROWS) ||
          (route[i] == P_N  && my_y == 0)                 ||
          (route[i] == P_N4 && int'(my_y) < LONG)         ||
          (route[i] == P_W  && my_x == 0 && !head[i].to_gb)))
      else $error("amp_router (%0d,%0d): flit routed off the array", my_x, my_y);
  end
`endif
endmodule
