// gb_row_port: one row's slice of the global buffer, a bank plus the engine
// that moves data between the bank and the west port of that PE row.
//
// Stream: a command (gb_cmd_t) names a start address, a length and a flit
// header; the engine reads the words one per cycle and sends each as a flit
// into the array, the index field counting idx0, idx0 + 1, ... and wrapping
// every idx_mod words (chunk indices of a stream of activation vectors).
// Reads run ahead into a two-entry skid queue so the engine keeps one flit
// per cycle under back-pressure. cmd_ready is high while no command runs; a
// new command may start while the previous one's last flits drain.
// Write-back: flits the array delivers to this port (marked to_gb) are
// written to the bank at their index field; this path is always ready,
// which lets outputs leave the array without blocking it.
// Host access: one word per request, writes yield to write-back and reads
// to the stream; read data returns one cycle after the accepted request.
//
// The paper says only that intermediate data of coarse-grained pipelining
// goes through the global buffer; the banking per row, the stream engine and
// the host port are this design's choices.
module gb_row_port
  import po_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  // stream command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  gb_cmd_t     cmd,
  // to / from the array's west port of this row
  output logic        gin_valid,
  input  logic        gin_ready,
  output flit_t       gin_flit,
  input  logic        gout_valid,
  output logic        gout_ready,
  input  flit_t       gout_flit,
  // host access to this bank
  input  logic        h_valid,
  output logic        h_ready,
  input  logic        h_we,
  input  logic [$clog2(BANK_WORDS)-1:0] h_addr,
  input  vec_t        h_wdata,
  output logic        h_rvalid,
  output vec_t        h_rdata,
  // events
  output logic        ev_rd,   // a word was streamed into the array
  output logic        ev_wr    // a word was written back from the array
);
  localparam int unsigned AW = $clog2(BANK_WORDS);

  // ---------------- stream engine state ----------------
  logic        busy;
  logic [AW-1:0] s_addr;
  logic [12:0] s_left;
  gb_cmd_t     s_cmd;
  idx_t        s_idx;
  logic [4:0]  s_mod;

  logic        rd_pend;      // stream read issued last cycle
  idx_t        rd_idx;       // its flit index
  logic        hrd_pend;     // host read issued last cycle

  logic        q_in_ready, q_out_valid;
  logic [1:0]  q_count;
  flit_t       q_in_flit;
  logic        issue;

  // ---------------- bank ----------------
  logic          b_we, b_re;
  logic [AW-1:0] b_waddr, b_raddr;
  vec_t          b_wdata, b_rdata;
  gb_bank #(.WORDS(BANK_WORDS), .W(VW)) u_bank (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
    .re(b_re), .raddr(b_raddr), .rdata(b_rdata)
  );

  logic pop;
  assign pop   = gin_valid && gin_ready;
  assign issue = busy && (s_left != '0) &&
                 ((32'(q_count) + 32'(rd_pend) - 32'(pop)) < 2);

  // write port: write-back first, then host writes
  assign gout_ready = 1'b1;
  always_comb begin
    b_we    = 1'b0;
    b_waddr = h_addr;
    b_wdata = h_wdata;
    if (gout_valid) begin
      b_we    = 1'b1;
      b_waddr = gout_flit.idx[AW-1:0];
      b_wdata = gout_flit.data;
    end else if (h_valid && h_we) begin
      b_we    = 1'b1;
    end
  end
  // read port: stream first, then host reads
  assign b_re    = issue || (h_valid && !h_we);
  assign b_raddr = issue ? s_addr : h_addr;
  assign h_ready = h_we ? !gout_valid : !issue;

  assign h_rvalid = hrd_pend;
  assign h_rdata  = b_rdata;

  // skid queue towards the array
  always_comb begin
    q_in_flit       = '0;
    q_in_flit.to_gb = 1'b0;
    q_in_flit.dst_x = s_cmd.dst_x;
    q_in_flit.dst_y = s_cmd.dst_y;
    q_in_flit.ftype = s_cmd.ftype;
    q_in_flit.idx   = rd_idx;
    q_in_flit.data  = b_rdata;
  end
  po_fifo #(.T(flit_t), .DEPTH(2)) u_q (
    .clk, .rst_n,
    .in_valid(rd_pend), .in_ready(q_in_ready), .in_data(q_in_flit),
    .out_valid(q_out_valid), .out_ready(gin_ready), .out_data(gin_flit), .count(q_count)
  );
  assign gin_valid = q_out_valid;
  assign cmd_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      s_addr   <= '0;
      s_left   <= '0;
      s_cmd    <= '0;
      s_idx    <= '0;
      s_mod    <= '0;
      rd_pend  <= 1'b0;
      rd_idx   <= '0;
      hrd_pend <= 1'b0;
    end else begin
      rd_pend  <= issue;
      hrd_pend <= h_valid && h_ready && !h_we;
      if (cmd_valid && cmd_ready) begin
        busy   <= (cmd.len != '0);
        s_cmd  <= cmd;
        s_addr <= cmd.addr[AW-1:0];
        s_left <= cmd.len;
        s_idx  <= cmd.idx0;
        s_mod  <= '0;
      end else if (issue) begin
        rd_idx <= s_idx;
        s_addr <= s_addr + 1'b1;
        s_left <= s_left - 1'b1;
        if (s_left == 13'd1) busy <= 1'b0;
        if (s_cmd.idx_mod != '0 && s_mod == s_cmd.idx_mod - 1'b1) begin
          s_idx <= s_cmd.idx0;
          s_mod <= '0;
        end else begin
          s_idx <= s_idx + 1'b1;
          s_mod <= s_mod + 1'b1;
        end
      end
    end
  end

  assign ev_rd = pop;
  assign ev_wr = gout_valid;

`ifndef SYNTHESIS
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_pend |-> q_in_ready) else $error("gb_row_port: skid queue overflow");
`endif
endmodule
