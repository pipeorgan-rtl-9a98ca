// pipeorgan_top: the PipeOrgan accelerator, a ROWS x COLS array of PEs joined
// by the AMP network, with a banked global buffer on the west edge.
//
// How a pipeline segment runs: the global buffer streams configuration,
// weights and the segment's input activations as flits into the array.
// Configuration assigns every PE its layer tile (reduction length, output
// channels, requantization) and where its output vectors go: to the PE of
// the next layer for fine-grained pipelining, additionally to a later layer
// for a skip connection, or back to the global buffer for coarse-grained
// pipelining and for the segment's last layer. Which PEs get which layer,
// i.e. the spatial organization (blocked, striped or checkerboard), is
// therefore decided entirely by that configuration, at compile time; the
// hardware only has to carry any of these placements, which the long links
// of AMP make cheap for the coarse, blocked ones.
//
// Ports: the stream-command port and the host word port of the global
// buffer (where an off-chip memory DMA connects), and activity counters that
// count, from reset, every event of the mechanisms above. All counters are
// this design's additions for observing the array.
module pipeorgan_top
  import po_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned LONG       = 4,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned FIFO_DEPTH = 2,
  parameter int unsigned CI_MAX     = 16,
  parameter int unsigned NK_MAX     = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  // global-buffer stream commands
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  gb_cmd_t cmd,
  // host / off-chip word access to the global buffer
  input  logic    host_valid,
  output logic    host_ready,
  input  logic    host_we,
  input  coord_t  host_row,
  input  logic [$clog2(BANK_WORDS)-1:0] host_addr,
  input  vec_t    host_wdata,
  output logic    host_rvalid,
  output vec_t    host_rdata,
  // activity counters
  output logic [31:0] cnt_pe_fwd,     // vectors sent PE to PE
  output logic [31:0] cnt_pe_gb,      // vectors sent from PEs to the buffer
  output logic [31:0] cnt_skip,       // skip-connection copies
  output logic [31:0] cnt_pe_stall,   // PE cycles waiting on its output stage
  output logic [31:0] cnt_pe_hold,    // PE cycles an activation waited for a bank
  output logic [31:0] cnt_dw,         // depthwise output vectors
  output logic [31:0] cnt_long_hops,  // flit traversals of AMP long links
  output logic [31:0] cnt_mesh_hops,  // flit traversals of one-hop links
  output logic [31:0] cnt_blocked,    // router output-cycles with a flit not taken
  output logic [31:0] cnt_gb_rd,      // words streamed from the buffer
  output logic [31:0] cnt_gb_wr       // words written back into the buffer
);
  logic  lin_valid  [ROWS][COLS];
  logic  lin_ready  [ROWS][COLS];
  flit_t lin_flit   [ROWS][COLS];
  logic  lout_valid [ROWS][COLS];
  logic  lout_ready [ROWS][COLS];
  flit_t lout_flit  [ROWS][COLS];
  logic  gin_valid  [ROWS];
  logic  gin_ready  [ROWS];
  flit_t gin_flit   [ROWS];
  logic  gout_valid [ROWS];
  logic  gout_ready [ROWS];
  flit_t gout_flit  [ROWS];
  logic [NPORTS-1:0] xfer [ROWS][COLS];
  pe_ev_t ev [ROWS][COLS];
  logic [ROWS-1:0] ev_rd, ev_wr;

  global_buffer #(.ROWS(ROWS), .BANK_WORDS(BANK_WORDS)) u_gb (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .host_valid, .host_ready, .host_we, .host_row, .host_addr, .host_wdata,
    .host_rvalid, .host_rdata,
    .gin_valid, .gin_ready, .gin_flit,
    .gout_valid, .gout_ready, .gout_flit,
    .ev_rd, .ev_wr
  );

  amp_noc #(.ROWS(ROWS), .COLS(COLS), .LONG(LONG), .FIFO_DEPTH(FIFO_DEPTH)) u_noc (
    .clk, .rst_n,
    .lin_valid(lin_valid), .lin_ready(lin_ready), .lin_flit(lin_flit),
    .lout_valid(lout_valid), .lout_ready(lout_ready), .lout_flit(lout_flit),
    .gin_valid, .gin_ready, .gin_flit,
    .gout_valid, .gout_ready, .gout_flit,
    .xfer
  );

  for (genvar y = 0; y < ROWS; y++) begin : g_row
    for (genvar x = 0; x < COLS; x++) begin : g_col
      pe #(.CI_MAX(CI_MAX), .NK_MAX(NK_MAX)) u_pe (
        .clk, .rst_n,
        .in_valid(lout_valid[y][x]), .in_ready(lout_ready[y][x]), .in_flit(lout_flit[y][x]),
        .out_valid(lin_valid[y][x]), .out_ready(lin_ready[y][x]), .out_flit(lin_flit[y][x]),
        .ev(ev[y][x])
      );
    end
  end

  // ---------------- activity counters ----------------
  logic [15:0] n_fwd, n_gb, n_skip, n_stall, n_hold, n_dw, n_long, n_mesh, n_blk, n_rd, n_wr;
  always_comb begin
    n_fwd = '0; n_gb = '0; n_skip = '0; n_stall = '0; n_hold = '0; n_dw = '0;
    n_long = '0; n_mesh = '0; n_rd = '0; n_wr = '0;
    for (int y = 0; y < ROWS; y++) begin
      n_rd = n_rd + 16'(ev_rd[y]);
      n_wr = n_wr + 16'(ev_wr[y]);
      for (int x = 0; x < COLS; x++) begin
        n_fwd   = n_fwd   + 16'(ev[y][x].fwd);
        n_gb    = n_gb    + 16'(ev[y][x].gb);
        n_skip  = n_skip  + 16'(ev[y][x].skip);
        n_stall = n_stall + 16'(ev[y][x].stall);
        n_hold  = n_hold  + 16'(ev[y][x].hold);
        n_dw    = n_dw    + 16'(ev[y][x].dw);
        for (int p = int'(P_N); p <= int'(P_W); p++)
          if (xfer[y][x][p] && !(x == 0 && p == int'(P_W))) n_mesh = n_mesh + 1'b1;
        for (int p = int'(P_N4); p <= int'(P_W4); p++)
          n_long = n_long + 16'(xfer[y][x][p]);
      end
    end
  end

  // a router output blocked: flit waiting at an output that is not ready
  always_comb begin
    n_blk = '0;
    for (int y = 0; y < ROWS; y++)
      for (int x = 0; x < COLS; x++)
        n_blk = n_blk + 16'(lout_valid[y][x] && !lout_ready[y][x]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_pe_fwd <= '0; cnt_pe_gb <= '0; cnt_skip <= '0; cnt_pe_stall <= '0;
      cnt_pe_hold <= '0; cnt_dw <= '0; cnt_long_hops <= '0; cnt_mesh_hops <= '0;
      cnt_blocked <= '0; cnt_gb_rd <= '0; cnt_gb_wr <= '0;
    end else begin
      cnt_pe_fwd    <= cnt_pe_fwd    + 32'(n_fwd);
      cnt_pe_gb     <= cnt_pe_gb     + 32'(n_gb);
      cnt_skip      <= cnt_skip      + 32'(n_skip);
      cnt_pe_stall  <= cnt_pe_stall  + 32'(n_stall);
      cnt_pe_hold   <= cnt_pe_hold   + 32'(n_hold);
      cnt_dw        <= cnt_dw        + 32'(n_dw);
      cnt_long_hops <= cnt_long_hops + 32'(n_long);
      cnt_mesh_hops <= cnt_mesh_hops + 32'(n_mesh);
      cnt_blocked   <= cnt_blocked   + 32'(n_blk);
      cnt_gb_rd     <= cnt_gb_rd     + 32'(n_rd);
      cnt_gb_wr     <= cnt_gb_wr     + 32'(n_wr);
    end
  end
endmodule
