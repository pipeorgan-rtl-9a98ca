// pe: one processing element of the PipeOrgan array.
//
// A PE runs one tile of one layer. It keeps a weight register file of
// CI_MAX x NK_MAX vectors and a two-bank activation buffer of CI_MAX vectors
// per bank. An output vector of the PE is NK output channels (up to 8, one
// byte each) of one output position; each channel is the temporal reduction,
// one dot product per cycle, of CI input chunks of 8 channels:
//   out[k] = requant( sum_{c<CI} dot(act[c], W[c*NK_MAX + k]) ).
// The 8-byte output vector is exactly one input chunk of a consumer PE, so a
// producer's K dimension becomes its consumer's C dimension, the (K,C) loop
// pair along which layers are fused. The compute interval is CI*NK cycles.
// In depthwise mode the lanes are not reduced: out[l] = requant(sum_c
// act[c][l] * W[c*NK_MAX][l]), one output vector per CI cycles.
//
// Activation flits carry their chunk index, so chunks may come from several
// producers in any order (a layer that concatenates a skip connection with
// its direct input simply owns more chunk indices). A chunk goes into the
// oldest bank that still lacks that index. With two banks a producer may run
// one output ahead of the slowest producer feeding the same PE. A chunk that
// finds both banks holding its index waits at the head of the input queue
// until the older bank is released, which is ordinary back-pressure while
// the older bank only waits for its reduction; a mapping must not let a
// producer run two outputs ahead of a sibling whose chunk is needed to
// release that bank, since that chunk could be queued behind the waiting one
// (the load-balanced PE allocation of the compile-time mapping keeps the
// producers of one consumer in step).
//
// The finished vector goes to an output stage and is sent to destination 0
// and, if configured, destination 1 (the skip-connection copy). A
// destination is either a PE (chunk index at the consumer) or the global
// buffer of a row (word address, incremented for every vector), which is how
// the RTL carries both fine-grained PE-to-PE pipelining and coarse-grained
// pipelining through the global buffer.
//
// Interface: flits in from / out to the local port of the router, valid /
// ready. Configuration (F_CFG, registers CFG_CTRL, CFG_DST0, CFG_DST1) and
// weights (F_WGT) arrive as flits too. The register-file sizes, the flit
// formats, the requantization (shift, optional ReLU, saturate to int8) and
// the two-bank buffer are this design's choices; the paper gives the 8-wide
// dot product, the per-PE register file and the PE-to-PE or
// global-buffer forwarding of intermediate data.
module pe
  import po_pkg::*;
#(
  parameter int unsigned CI_MAX   = 16,
  parameter int unsigned NK_MAX   = 8,
  parameter int unsigned IN_DEPTH = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  flit_t  in_flit,
  output logic   out_valid,
  input  logic   out_ready,
  output flit_t  out_flit,
  output pe_ev_t ev
);
  localparam int unsigned WRF_N = CI_MAX * NK_MAX;
  localparam int unsigned CW    = $clog2(CI_MAX);
  localparam int unsigned KW    = $clog2(NK_MAX);
  localparam int unsigned WAW   = $clog2(WRF_N);

  // ---------------- configuration ----------------
  pe_ctrl_t ctrl;
  pe_dst_t  dst [2];
  idx_t     gb_off [2];

  // ---------------- register files ----------------
  vec_t wrf  [WRF_N];
  vec_t abuf [2][CI_MAX];
  logic [CI_MAX-1:0] avail [2];
  logic cur;

  // ---------------- input queue ----------------
  logic  h_valid, h_ready;
  flit_t h;
  po_fifo #(.T(flit_t), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_flit),
    .out_valid(h_valid), .out_ready(h_ready), .out_data(h), .count()
  );

  logic [CW-1:0] h_c;
  logic          h_bank;
  logic          h_fits;
  assign h_c = h.idx[CW-1:0];
  always_comb begin
    h_bank = cur;
    h_fits = 1'b1;
    if (h.ftype == F_ACT) begin
      if (!avail[cur][h_c])       h_bank = cur;
      else if (!avail[~cur][h_c]) h_bank = ~cur;
      else                        h_fits = 1'b0;
    end
  end
  assign h_ready = h_fits;

  // ---------------- reduction ----------------
  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;
  logic [CW-1:0] c_i;
  logic [KW-1:0] k_i;
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] lacc [LANES];
  vec_t res;

  logic [CI_MAX-1:0] need;
  always_comb begin
    for (int i = 0; i < CI_MAX; i++) need[i] = (i <= int'(ctrl.ci_m1));
  end
  logic bank_full_cur, bank_full_nxt;
  assign bank_full_cur = ((avail[cur]  & need) == need);
  assign bank_full_nxt = ((avail[~cur] & need) == need);

  logic [WAW-1:0] w_addr;
  assign w_addr = ctrl.dw ? WAW'(c_i * NK_MAX) : WAW'(c_i * NK_MAX + k_i);

  logic signed [LANES-1:0][2*DW-1:0] prod;
  logic signed [2*DW+$clog2(LANES)-1:0] dot;
  pe_dot_product #(.LANES(LANES), .DW(DW)) u_dot (
    .a(abuf[cur][c_i]), .b(wrf[w_addr]), .prod, .y(dot)
  );

  logic last_c, last_k, finish, stage_busy, hold;
  assign last_c  = (c_i == ctrl.ci_m1[CW-1:0]);
  assign last_k  = ctrl.dw || (k_i == ctrl.nk_m1[KW-1:0]);
  assign finish  = (state == S_RUN) && last_c && last_k;
  // the output stage frees this cycle if its last pending copy leaves now
  logic [1:0] pend;
  logic       send_fire;
  assign send_fire  = out_valid && out_ready;
  assign stage_busy = (pend != 2'b00) &&
                      !(send_fire && (pend == 2'b01 || pend == 2'b10));
  assign hold = finish && stage_busy;

  // result vector of the finishing step
  vec_t res_next;
  always_comb begin
    res_next = res;
    if (ctrl.dw) begin
      for (int l = 0; l < LANES; l++)
        res_next[l*DW +: DW] = requant(lacc[l] + ACC_W'($signed(prod[l])), ctrl.shift, ctrl.relu);
    end else if (last_c) begin
      res_next[k_i*DW +: DW] = requant(acc + ACC_W'(dot), ctrl.shift, ctrl.relu);
    end
  end

  // ---------------- output stage ----------------
  vec_t out_vec;
  logic sel;   // which destination is being sent
  assign sel       = !pend[0];
  assign out_valid = (pend != 2'b00);
  always_comb begin
    out_flit       = '0;
    out_flit.to_gb = dst[sel].to_gb;
    out_flit.dst_x = dst[sel].x;
    out_flit.dst_y = dst[sel].y;
    out_flit.ftype = F_ACT;
    out_flit.idx   = dst[sel].to_gb ? dst[sel].idx + gb_off[sel] : dst[sel].idx;
    out_flit.data  = out_vec;
  end

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl     <= '0;
      dst[0]   <= '0;
      dst[1]   <= '0;
      gb_off[0] <= '0;
      gb_off[1] <= '0;
      avail[0] <= '0;
      avail[1] <= '0;
      cur      <= 1'b0;
      state    <= S_IDLE;
      c_i      <= '0;
      k_i      <= '0;
      acc      <= '0;
      res      <= '0;
      pend     <= 2'b00;
      out_vec  <= '0;
      for (int l = 0; l < LANES; l++) lacc[l] <= '0;
    end else begin
      // ---- accept the head flit ----
      if (h_valid && h_fits) begin
        unique case (h.ftype)
          F_CFG: begin
            if (h.idx == CFG_CTRL) ctrl <= h.data[$bits(pe_ctrl_t)-1:0];
            if (h.idx == CFG_DST0) begin dst[0] <= h.data[$bits(pe_dst_t)-1:0]; gb_off[0] <= '0; end
            if (h.idx == CFG_DST1) begin dst[1] <= h.data[$bits(pe_dst_t)-1:0]; gb_off[1] <= '0; end
          end
          F_ACT:   avail[h_bank][h_c] <= 1'b1;
          default: ;
        endcase
      end

      // ---- output stage ----
      if (send_fire) begin
        if (dst[sel].to_gb) gb_off[sel] <= gb_off[sel] + 1'b1;
        pend[sel] <= 1'b0;
      end

      // ---- reduction ----
      unique case (state)
        S_IDLE: begin
          if (bank_full_cur) begin
            state <= S_RUN;
            c_i   <= '0;
            k_i   <= '0;
            acc   <= '0;
            res   <= '0;
            for (int l = 0; l < LANES; l++) lacc[l] <= '0;
          end
        end
        S_RUN: begin
          if (!hold) begin
            if (ctrl.dw) begin
              for (int l = 0; l < LANES; l++) lacc[l] <= lacc[l] + ACC_W'($signed(prod[l]));
            end else begin
              acc <= last_c ? '0 : acc + ACC_W'(dot);
            end
            res <= res_next;
            if (!last_c) begin
              c_i <= c_i + 1'b1;
            end else begin
              c_i <= '0;
              if (!last_k) k_i <= k_i + 1'b1;
            end
            if (finish) begin
              out_vec  <= res_next;
              pend     <= {dst[1].valid, dst[0].valid};
              // release the bank; a chunk accepted this cycle went to the other one
              avail[cur] <= '0;
              cur        <= ~cur;
              k_i        <= '0;
              acc        <= '0;
              res        <= '0;
              for (int l = 0; l < LANES; l++) lacc[l] <= '0;
              // start on the other bank at once if it is already complete
              state <= bank_full_nxt ? S_RUN : S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (h_valid && h_fits) begin
      if (h.ftype == F_WGT) wrf[h.idx[WAW-1:0]] <= h.data;
      if (h.ftype == F_ACT) abuf[h_bank][h_c] <= h.data;
    end
  end

  // ---------------- events ----------------
  always_comb begin
    ev       = '0;
    ev.fwd   = send_fire && !dst[sel].to_gb;
    ev.gb    = send_fire &&  dst[sel].to_gb;
    ev.skip  = send_fire && sel;
    ev.stall = hold;
    ev.hold  = h_valid && !h_fits;
    ev.dw    = finish && !hold && ctrl.dw;
  end

`ifndef SYNTHESIS
  a_chunk_range: assert property (@(posedge clk) disable iff (!rst_n)
    (h_valid && h.ftype == F_ACT) |-> (h.idx < IDX_W'(CI_MAX)))
    else $error("pe: chunk index out of range");
`endif
endmodule
