// po_top_scenario.svh: end-to-end scenario for pipeorgan_top, shared by the
// reduced-size and the full-size testbench. The including module declares
// R, C, L, BW and NPIX, the clock clk, reset rst_n, and the DUT's port
// signals, then includes this file.
//
// One pipeline segment plus two extra layers is mapped onto the array:
//   A (1,1)        dense, 2 chunks x 8 channels, input streamed from the
//                  buffer; output to B (PE to PE) and, as a skip
//                  connection, to C as its chunk 1
//   B (C-2, R-2)   dense, 1 chunk x 4 channels, far from A so the route uses
//                  the long links; output to C as its chunk 0
//   C (2, R-1)     dense, 2 chunks (B's output concatenated with A's skip
//                  copy) x 8 channels, ReLU; output written back to the
//                  buffer (end of the segment)
//   D (C-1, 0)     depthwise, 3 taps, fed from the buffer with C's outputs
//                  (coarse-grained pipelining through the buffer); output to
//                  the buffer
//   E (3, 3)       dense 1 x 1, a one-cycle compute interval with two
//                  buffer destinations, fed at one word per cycle: its
//                  output stage cannot keep up, so it stalls and its input
//                  backs up into the network
// A reference model here computes every expected output word; the test
// reads the buffer back through the host port and compares, and checks the
// activity counters, requiring every mechanism to have occurred.

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- host helpers ----------------
  task automatic gb_put(input int r, input int a, input vec_t d);
    @(negedge clk);
    host_valid = 1; host_we = 1; host_row = COORD_W'(r); host_addr = $bits(host_addr)'(a); host_wdata = d;
    @(posedge clk);
    while (!host_ready) @(posedge clk);
    #1 host_valid = 0;
  endtask

  task automatic gb_get(input int r, input int a, output vec_t d);
    @(negedge clk);
    host_valid = 1; host_we = 0; host_row = COORD_W'(r); host_addr = $bits(host_addr)'(a);
    @(posedge clk);
    while (!host_ready) @(posedge clk);
    #1 host_valid = 0;
    d = host_rdata;
  endtask

  task automatic stream(input int r, input int a, input int len, input int dx, input int dy,
                        input ftype_e t, input int idx0, input int md);
    @(negedge clk);
    cmd = '0; cmd.row = COORD_W'(r); cmd.addr = 12'(a); cmd.len = 13'(len);
    cmd.dst_x = COORD_W'(dx); cmd.dst_y = COORD_W'(dy); cmd.ftype = t;
    cmd.idx0 = IDX_W'(idx0); cmd.idx_mod = 5'(md);
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  function automatic vec_t ctrl_word(input int ci, input int nk, input int sh, input bit relu, input bit dw);
    pe_ctrl_t c;
    c.dw = dw; c.relu = relu; c.shift = 5'(sh); c.nk_m1 = 3'(nk - 1); c.ci_m1 = 4'(ci - 1);
    return VW'(c);
  endfunction

  function automatic vec_t dst_word(input bit v, input bit gb, input int x, input int y, input int idx);
    pe_dst_t d;
    d.valid = v; d.to_gb = gb; d.x = COORD_W'(x); d.y = COORD_W'(y); d.idx = IDX_W'(idx);
    return VW'(d);
  endfunction

  // ---------------- reference model ----------------
  function automatic logic [7:0] ref_q(input longint acc, input int sh, input bit relu);
    longint s;
    s = acc >>> sh;
    if (relu && s < 0) s = 0;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return s[7:0];
  endfunction
  function automatic int sb(input vec_t v, input int l);
    return int'($signed(v[l*8 +: 8]));
  endfunction

  typedef vec_t wtab_t [64];
  // dense: out[k] = q(sum_c dot(act[c], W[c*8+k]))
  function automatic vec_t ref_dense(input vec_t act [8], input wtab_t W, input int ci, input int nk,
                                     input int sh, input bit relu);
    vec_t r;
    r = '0;
    for (int k = 0; k < nk; k++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < ci; c++)
        for (int l = 0; l < 8; l++) acc += sb(act[c], l) * sb(W[c*8+k], l);
      r[k*8 +: 8] = ref_q(acc, sh, relu);
    end
    return r;
  endfunction
  function automatic vec_t ref_dw(input vec_t act [8], input wtab_t W, input int ci, input int sh, input bit relu);
    vec_t r;
    for (int l = 0; l < 8; l++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < ci; c++) acc += sb(act[c], l) * sb(W[c*8], l);
      r[l*8 +: 8] = ref_q(acc, sh, relu);
    end
    return r;
  endfunction

  // ---------------- placement ----------------
  localparam int AX = 1,     AY = 1;
  localparam int BX = C - 2, BY = R - 2;
  localparam int CX = 2,     CY = R - 1;
  localparam int DX = C - 1, DY = 0;
  localparam int EX = 3,     EY = 3;
  localparam int NQ = NPIX / 3;       // depthwise outputs
  localparam int NE = 24;             // inputs of E
  // buffer addresses
  localparam int CFG_BASE = 0;        // 3 config + 64 weight words per PE
  localparam int IN_A     = 100;      // bank AY: A's input
  localparam int OUT_C    = 512;      // bank CY: C's output
  localparam int OUT_D    = 768;      // bank CY: D's output
  localparam int IN_E     = 100;      // bank EY
  localparam int OUT_E0   = 1024;     // bank EY
  localparam int OUT_E1   = 1536;     // bank EY

  wtab_t WA, WB, WC, WD, WE;
  vec_t  inA [NPIX][8];
  vec_t  outA [NPIX], outB [NPIX], outC [NPIX], outD [NQ];
  vec_t  inE [NE], outE [NE];

  task automatic load_pe(input int bank, input int x, input int y, input vec_t ctrl,
                         input vec_t d0, input vec_t d1, input wtab_t W);
    gb_put(bank, CFG_BASE + 0, ctrl);
    gb_put(bank, CFG_BASE + 1, d0);
    gb_put(bank, CFG_BASE + 2, d1);
    for (int i = 0; i < 64; i++) gb_put(bank, CFG_BASE + 3 + i, W[i]);
    stream(bank, CFG_BASE, 3, x, y, F_CFG, 0, 0);
    stream(bank, CFG_BASE + 3, 64, x, y, F_WGT, 0, 0);
    // wait for the bank's stream engine before the region is rewritten
    @(negedge clk); cmd = '0; cmd.row = COORD_W'(bank);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  task automatic wait_count(ref logic [31:0] cnt, input int n, input int limit);
    for (int t = 0; t < limit && int'(cnt) < n; t++) @(posedge clk);
  endtask

  initial begin
    vec_t d, tmp [8];
    cmd_valid = 0; cmd = '0; host_valid = 0; host_we = 0; host_row = '0; host_addr = '0; host_wdata = '0;
    for (int i = 0; i < 64; i++) begin
      WA[i] = {$urandom, $urandom}; WB[i] = {$urandom, $urandom}; WC[i] = {$urandom, $urandom};
      WD[i] = {$urandom, $urandom}; WE[i] = {$urandom, $urandom};
    end
    for (int p = 0; p < NPIX; p++) for (int c = 0; c < 8; c++) inA[p][c] = {$urandom, $urandom};
    for (int i = 0; i < NE; i++) inE[i] = {$urandom, $urandom};

    // reference results
    for (int p = 0; p < NPIX; p++) begin
      outA[p] = ref_dense(inA[p], WA, 2, 8, 7, 0);
      tmp[0]  = outA[p];
      outB[p] = ref_dense(tmp, WB, 1, 4, 6, 0);
      tmp[0]  = outB[p]; tmp[1] = outA[p];
      outC[p] = ref_dense(tmp, WC, 2, 8, 7, 1);
    end
    for (int q = 0; q < NQ; q++) begin
      for (int c = 0; c < 3; c++) tmp[c] = outC[3*q + c];
      outD[q] = ref_dw(tmp, WD, 3, 4, 0);
    end
    for (int i = 0; i < NE; i++) begin
      tmp[0] = inE[i];
      outE[i] = ref_dense(tmp, WE, 1, 1, 5, 0);
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // ---- configuration, streamed from the buffer ----
    load_pe(AY, AX, AY, ctrl_word(2, 8, 7, 0, 0), dst_word(1, 0, BX, BY, 0), dst_word(1, 0, CX, CY, 1), WA);
    load_pe(BY, BX, BY, ctrl_word(1, 4, 6, 0, 0), dst_word(1, 0, CX, CY, 0), dst_word(0, 0, 0, 0, 0), WB);
    load_pe(CY, CX, CY, ctrl_word(2, 8, 7, 1, 0), dst_word(1, 1, 0, CY, OUT_C), dst_word(0, 0, 0, 0, 0), WC);
    load_pe(DY, DX, DY, ctrl_word(3, 1, 4, 0, 1), dst_word(1, 1, 0, CY, OUT_D), dst_word(0, 0, 0, 0, 0), WD);
    load_pe(EY, EX, EY, ctrl_word(1, 1, 5, 0, 0), dst_word(1, 1, 0, EY, OUT_E0), dst_word(1, 1, 0, EY, OUT_E1), WE);
    repeat (100) @(posedge clk);

    // ---- segment A -> B -> C with the skip A -> C ----
    for (int p = 0; p < NPIX; p++)
      for (int c = 0; c < 2; c++) gb_put(AY, IN_A + 2*p + c, inA[p][c]);
    for (int i = 0; i < NE; i++) gb_put(EY, IN_E + i, inE[i]);
    stream(AY, IN_A, 2 * NPIX, AX, AY, F_ACT, 0, 2);
    stream(EY, IN_E, NE, EX, EY, F_ACT, 0, 1);
    wait_count(cnt_gb_wr, NPIX + 2 * NE, 20 * NPIX + 4000);

    // ---- D consumes C's outputs through the buffer ----
    stream(CY, OUT_C, 3 * NQ, DX, DY, F_ACT, 0, 3);
    wait_count(cnt_gb_wr, NPIX + 2 * NE + NQ, 4000);
    repeat (20) @(posedge clk);

    // ---- compare ----
    for (int p = 0; p < NPIX; p++) begin
      gb_get(CY, OUT_C + p, d);
      checks++;
      if (d !== outC[p]) begin failures++; $display("FAIL C[%0d]: %h exp %h", p, d, outC[p]); end
    end
    for (int q = 0; q < NQ; q++) begin
      gb_get(CY, OUT_D + q, d);
      checks++;
      if (d !== outD[q]) begin failures++; $display("FAIL D[%0d]: %h exp %h", q, d, outD[q]); end
    end
    for (int i = 0; i < NE; i++) begin
      gb_get(EY, OUT_E0 + i, d);
      checks++;
      if (d !== outE[i]) begin failures++; $display("FAIL E0[%0d]: %h exp %h", i, d, outE[i]); end
      gb_get(EY, OUT_E1 + i, d);
      checks++;
      if (d !== outE[i]) begin failures++; $display("FAIL E1[%0d]: %h exp %h", i, d, outE[i]); end
    end

    // ---- activity: exact counts where the mapping fixes them ----
    $display("counters: pe_fwd=%0d pe_gb=%0d skip=%0d stall=%0d hold=%0d dw=%0d long=%0d mesh=%0d blocked=%0d gb_rd=%0d gb_wr=%0d cycles=%0d",
             cnt_pe_fwd, cnt_pe_gb, cnt_skip, cnt_pe_stall, cnt_pe_hold, cnt_dw, cnt_long_hops,
             cnt_mesh_hops, cnt_blocked, cnt_gb_rd, cnt_gb_wr, cyc);
    checks++; if (int'(cnt_pe_fwd) != 3 * NPIX)             begin failures++; $display("FAIL pe_fwd"); end
    checks++; if (int'(cnt_pe_gb)  != NPIX + NQ + 2 * NE)   begin failures++; $display("FAIL pe_gb"); end
    checks++; if (int'(cnt_skip)   != NPIX + NE)            begin failures++; $display("FAIL skip"); end
    checks++; if (int'(cnt_dw)     != NQ)                   begin failures++; $display("FAIL dw"); end
    checks++; if (int'(cnt_gb_wr)  != NPIX + NQ + 2 * NE)   begin failures++; $display("FAIL gb_wr"); end
    checks++; if (int'(cnt_gb_rd)  != 5 * 67 + 2 * NPIX + NE + 3 * NQ) begin failures++; $display("FAIL gb_rd"); end
    checks++; if (cnt_pe_stall == 0)  begin failures++; $display("FAIL: no PE output stall"); end
    checks++; if (cnt_pe_hold == 0)   begin failures++; $display("FAIL: no activation bank hold"); end
    checks++; if (cnt_long_hops == 0) begin failures++; $display("FAIL: no long-link hop"); end
    checks++; if (cnt_mesh_hops == 0) begin failures++; $display("FAIL: no mesh hop"); end
    checks++; if (cnt_blocked == 0)   begin failures++; $display("FAIL: no blocked PE port"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000 + 40 * NPIX) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
