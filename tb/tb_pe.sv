// tb_pe: self-checking test of one processing element.
//
// A reference model in this file computes every output vector from the
// weights and activations it sends. The test covers
//   1. dense reduction (CI = 3 chunks, NK = 4 channels) with chunks of each
//      output arriving in shuffled order and the next output's chunks
//      arriving early (two-bank buffer), sent to a PE and, as the skip copy,
//      to the global buffer with an incrementing address;
//   2. the compute interval: with inputs ready, successive outputs leave
//      CI * NK cycles apart;
//   3. depthwise mode (no lane reduction), 9 taps, with ReLU and saturation;
//   4. back-pressure: a blocked output stage stalls the reduction, and the
//      chunk of a third output waits while both banks are occupied.
module tb_pe;
  import po_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   in_valid, in_ready, out_valid, out_ready;
  flit_t  in_flit, out_flit;
  pe_ev_t ev;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_fwd = 0, n_gb = 0, n_skip = 0, n_stall = 0, n_hold = 0, n_dw = 0;
  logic rand_ready = 0;
  logic force_block = 0;

  pe dut (.clk, .rst_n, .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit, .ev);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev.fwd) n_fwd++;
    if (ev.gb) n_gb++;
    if (ev.skip) n_skip++;
    if (ev.stall) n_stall++;
    if (ev.hold) n_hold++;
    if (ev.dw) n_dw++;
  end

  // output sink
  flit_t got [$];
  int    got_t [$];
  always @(negedge clk) out_ready <= force_block ? 1'b0 : (rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin got.push_back(out_flit); got_t.push_back(cyc); end

  task automatic send(input ftype_e t, input int idx, input vec_t d);
    @(negedge clk);
    in_valid      <= 1'b1;
    in_flit       <= '0;
    in_flit.ftype <= t;
    in_flit.idx   <= IDX_W'(idx);
    in_flit.data  <= d;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid <= 1'b0;
  endtask

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

  vec_t W [128];
  vec_t A [8][16];    // [pixel][chunk]

  function automatic vec_t ref_dense(input int p, input int ci, input int nk, input int sh, input bit relu);
    vec_t r;
    r = '0;
    for (int k = 0; k < nk; k++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < ci; c++)
        for (int l = 0; l < 8; l++) acc += sb(A[p][c], l) * sb(W[c*8+k], l);
      r[k*8 +: 8] = ref_q(acc, sh, relu);
    end
    return r;
  endfunction

  function automatic vec_t ref_dw(input int p, input int ci, input int sh, input bit relu);
    vec_t r;
    for (int l = 0; l < 8; l++) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < ci; c++) acc += sb(A[p][c], l) * sb(W[c*8], l);
      r[l*8 +: 8] = ref_q(acc, sh, relu);
    end
    return r;
  endfunction

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

  task automatic expect_flit(input int n, input bit gb, input int x, input int y, input int idx, input vec_t d);
    checks++;
    if (n >= got.size()) begin
      failures++; $display("FAIL: missing output %0d", n); return;
    end
    if (got[n].to_gb !== gb || got[n].dst_y != COORD_W'(y) || (!gb && got[n].dst_x != COORD_W'(x)) ||
        got[n].idx != IDX_W'(idx) || got[n].data !== d || got[n].ftype != F_ACT) begin
      failures++;
      $display("FAIL out %0d: gb=%0d x=%0d y=%0d idx=%0d data=%h, exp gb=%0d x=%0d y=%0d idx=%0d data=%h",
               n, got[n].to_gb, got[n].dst_x, got[n].dst_y, got[n].idx, got[n].data, gb, x, y, idx, d);
    end
  endtask

  task automatic wait_outputs(input int n);
    int t;
    t = 0;
    while (got.size() < n && t < 2000) begin @(posedge clk); t++; end
  endtask

  task automatic load_weights();
    for (int i = 0; i < 128; i++) begin
      W[i] = {$urandom, $urandom};
      send(F_WGT, i, W[i]);
    end
  endtask

  initial begin
    int base;
    in_valid = 0; in_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- 1. dense, shuffled chunks, two destinations ----------------
    load_weights();
    send(F_CFG, 0, ctrl_word(3, 4, 6, 0, 0));
    send(F_CFG, 1, dst_word(1, 0, 5, 2, 1));
    send(F_CFG, 2, dst_word(1, 1, 0, 3, 100));
    for (int p = 0; p < 4; p++)
      for (int c = 0; c < 3; c++) A[p][c] = {$urandom, $urandom};
    rand_ready = 1;
    // pixel 0 in order 2,0 ; pixel 1 chunk 2 early ; then the rest
    send(F_ACT, 2, A[0][2]);
    send(F_ACT, 0, A[0][0]);
    send(F_ACT, 2, A[1][2]);
    send(F_ACT, 1, A[0][1]);
    send(F_ACT, 1, A[1][1]);
    send(F_ACT, 0, A[1][0]);
    for (int p = 2; p < 4; p++) begin
      send(F_ACT, 1, A[p][1]);
      send(F_ACT, 0, A[p][0]);
      send(F_ACT, 2, A[p][2]);
    end
    wait_outputs(8);
    for (int p = 0; p < 4; p++) begin
      vec_t r;
      r = ref_dense(p, 3, 4, 6, 0);
      expect_flit(2*p,   0, 5, 2, 1, r);
      expect_flit(2*p+1, 1, 0, 3, 100 + p, r);
    end
    checks++;
    if (n_fwd != 4 || n_gb != 4 || n_skip != 4) begin
      failures++; $display("FAIL events fwd=%0d gb=%0d skip=%0d", n_fwd, n_gb, n_skip);
    end

    // ---------------- 2. compute interval = CI * NK ----------------
    rand_ready = 0;
    got.delete(); got_t.delete();
    send(F_CFG, 2, dst_word(0, 0, 0, 0, 0));
    send(F_CFG, 0, ctrl_word(3, 4, 5, 1, 0));
    for (int p = 0; p < 3; p++)
      for (int c = 0; c < 3; c++) A[p][c] = {$urandom, $urandom};
    for (int p = 0; p < 3; p++)
      for (int c = 0; c < 3; c++) send(F_ACT, c, A[p][c]);
    wait_outputs(3);
    for (int p = 0; p < 3; p++) expect_flit(p, 0, 5, 2, 1, ref_dense(p, 3, 4, 5, 1));
    for (int p = 1; p < 3; p++) begin
      checks++;
      if (got.size() == 3 && got_t[p] - got_t[p-1] != 12) begin
        failures++; $display("FAIL interval %0d cycles, expected 12", got_t[p] - got_t[p-1]);
      end
    end

    // ---------------- 3. depthwise with ReLU ----------------
    got.delete(); got_t.delete();
    // 9 taps: a 3 x 3 depthwise filter
    send(F_CFG, 0, ctrl_word(9, 1, 3, 1, 1));
    send(F_CFG, 1, dst_word(1, 1, 0, 7, 20));
    for (int p = 0; p < 2; p++)
      for (int c = 0; c < 9; c++) A[p][c] = {$urandom, $urandom};
    for (int p = 0; p < 2; p++)
      for (int c = 8; c >= 0; c--) send(F_ACT, c, A[p][c]);
    wait_outputs(2);
    for (int p = 0; p < 2; p++) expect_flit(p, 1, 0, 7, 20 + p, ref_dw(p, 9, 3, 1));
    checks++;
    if (n_dw != 2) begin failures++; $display("FAIL dw events %0d", n_dw); end

    // ---------------- 4. back-pressure, stall and bank hold ----------------
    got.delete(); got_t.delete();
    force_block = 1;
    send(F_CFG, 0, ctrl_word(2, 1, 2, 0, 0));
    send(F_CFG, 1, dst_word(1, 0, 9, 9, 3));
    for (int p = 0; p < 4; p++)
      for (int c = 0; c < 2; c++) A[p][c] = {$urandom, $urandom};
    // three outputs back to back while the output is blocked: the first
    // stalls in the output stage, the second fills the other bank and the
    // third output's chunk has to wait until a bank is released
    fork
      begin
        for (int p = 0; p < 3; p++)
          for (int c = 0; c < 2; c++) send(F_ACT, c, A[p][c]);
      end
      begin
        repeat (40) @(posedge clk);
        force_block = 0;
      end
    join
    wait_outputs(3);
    for (int p = 0; p < 3; p++) expect_flit(p, 0, 9, 9, 3, ref_dense(p, 2, 1, 2, 0));
    checks++;
    if (n_stall == 0 || n_hold == 0) begin
      failures++; $display("FAIL: stall=%0d hold=%0d expected both > 0", n_stall, n_hold);
    end

    $display("events: fwd=%0d gb=%0d skip=%0d stall=%0d hold=%0d dw=%0d",
             n_fwd, n_gb, n_skip, n_stall, n_hold, n_dw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
