// global_buffer: the 1 MB on-chip global buffer of the PipeOrgan accelerator.
//
// The buffer is split into one bank per PE row (ROWS x BANK_WORDS words of
// 8 bytes, 32 x 4096 x 8 B = 1 MB by default), each with the stream and
// write-back engine of gb_row_port on the west port of its row. Weights,
// configuration and layer inputs are streamed from it into the array;
// outputs of layers that are not pipelined PE-to-PE (coarse granularity, or
// the last layer of a pipeline segment) are written back into it.
//
// cmd_* starts a stream on bank cmd.row (cmd_ready is that row's idle flag).
// host_* reads or writes one word of any bank, one request per cycle; read
// data is returned on host_rdata with host_rvalid one cycle after the
// request was accepted. This port is where an off-chip DMA connects. The
// capacity follows the evaluated configuration; the banking and both ports
// are this design's choices.
module global_buffer
  import po_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned BANK_WORDS = 4096
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  gb_cmd_t cmd,
  input  logic    host_valid,
  output logic    host_ready,
  input  logic    host_we,
  input  coord_t  host_row,
  input  logic [$clog2(BANK_WORDS)-1:0] host_addr,
  input  vec_t    host_wdata,
  output logic    host_rvalid,
  output vec_t    host_rdata,
  output logic    gin_valid  [ROWS],
  input  logic    gin_ready  [ROWS],
  output flit_t   gin_flit   [ROWS],
  input  logic    gout_valid [ROWS],
  output logic    gout_ready [ROWS],
  input  flit_t   gout_flit  [ROWS],
  output logic [ROWS-1:0] ev_rd,
  output logic [ROWS-1:0] ev_wr
);
  logic [ROWS-1:0] p_cmd_ready, p_h_ready, p_h_rvalid;
  vec_t            p_h_rdata [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    gb_row_port #(.BANK_WORDS(BANK_WORDS)) u_port (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && cmd.row == COORD_W'(r)), .cmd_ready(p_cmd_ready[r]), .cmd,
      .gin_valid(gin_valid[r]), .gin_ready(gin_ready[r]), .gin_flit(gin_flit[r]),
      .gout_valid(gout_valid[r]), .gout_ready(gout_ready[r]), .gout_flit(gout_flit[r]),
      .h_valid(host_valid && host_row == COORD_W'(r)), .h_ready(p_h_ready[r]),
      .h_we(host_we), .h_addr(host_addr), .h_wdata(host_wdata),
      .h_rvalid(p_h_rvalid[r]), .h_rdata(p_h_rdata[r]),
      .ev_rd(ev_rd[r]), .ev_wr(ev_wr[r])
    );
  end

  always_comb begin
    cmd_ready   = 1'b0;
    host_ready  = 1'b0;
    host_rvalid = 1'b0;
    host_rdata  = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (cmd.row == COORD_W'(r))  cmd_ready  = p_cmd_ready[r];
      if (host_row == COORD_W'(r)) host_ready = p_h_ready[r];
      if (p_h_rvalid[r]) begin
        host_rvalid = 1'b1;
        host_rdata  = p_h_rdata[r];
      end
    end
  end
endmodule
