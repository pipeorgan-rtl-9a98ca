// tb_amp_router: self-checking test of one AMP router (32 x 32 array, long
// links of 4).
//
// Phase A places the router at (8, 8) and drives random flits with random
// destinations into all nine inputs under random output back-pressure. Each
// flit carries a unique tag; the scoreboard checks that it leaves exactly
// once, through the port an independent model of the routing rule expects
// (long link while at least 4 hops remain in the current dimension, x before
// y), and in order per input/output pair. Phase B places the router at
// (0, 5) and checks global-buffer flits (north/south along column 0, then
// out of the west port). Phase C checks the one-cycle traversal of an idle
// router and phase D round-robin fairness: eight inputs flooding one output
// are each served once every eight grants.
module tb_amp_router;
  import po_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t my_x, my_y;
  logic [NPORTS-1:0] in_valid, in_ready, out_valid, out_ready, xfer;
  flit_t in_flit [NPORTS];
  flit_t out_flit [NPORTS];
  int checks = 0, failures = 0, cyc = 0;

  amp_router dut (.clk, .rst_n, .my_x, .my_y, .in_valid, .in_ready, .in_flit,
                  .out_valid, .out_ready, .out_flit, .xfer);

  // independent reference of the routing rule
  function automatic int exp_port(input flit_t f, input int x, input int y);
    int tx, d;
    tx = f.to_gb ? 0 : int'(f.dst_x);
    if (x < tx) begin d = tx - x; return (d >= 4) ? 7 : 3; end
    if (x > tx) begin d = x - tx; return (d >= 4) ? 8 : 4; end
    if (y < int'(f.dst_y)) begin d = int'(f.dst_y) - y; return (d >= 4) ? 6 : 2; end
    if (y > int'(f.dst_y)) begin d = y - int'(f.dst_y); return (d >= 4) ? 5 : 1; end
    return f.to_gb ? 4 : 0;
  endfunction

  // scoreboard: expected queues per (input, output)
  int exp_q [NPORTS][NPORTS][$];
  int tag_seen [int];
  int n_sent = 0, n_recv = 0;
  int tag_next = 1;
  bit gen_en [NPORTS];
  bit gb_mode = 0;
  int rate_ready = 3;

  always @(posedge clk) cyc <= cyc + 1;

  // drivers
  for (genvar i = 0; i < NPORTS; i++) begin : g_drv
    always @(posedge clk) begin
      if (!rst_n) begin
        in_valid[i] <= 1'b0;
      end else begin
        if (in_valid[i] && in_ready[i]) in_valid[i] <= 1'b0;
        if ((!in_valid[i] || in_ready[i]) && gen_en[i] && $urandom_range(0, 1) == 1) begin
          flit_t f;
          f = '0;
          f.to_gb = gb_mode && $urandom_range(0, 1);
          f.dst_x = COORD_W'($urandom_range(0, 31));
          f.dst_y = COORD_W'($urandom_range(0, 31));
          if (gb_mode && !f.to_gb) f.dst_x = COORD_W'($urandom_range(1, 31));
          f.ftype = F_ACT;
          f.data  = 64'(tag_next);
          exp_q[i][exp_port(f, int'(my_x), int'(my_y))].push_back(tag_next);
          tag_next++;
          n_sent++;
          in_flit[i]  <= f;
          in_valid[i] <= 1'b1;
        end
      end
    end
  end

  always @(negedge clk) for (int o = 0; o < NPORTS; o++) out_ready[o] <= ($urandom_range(0, 3) < rate_ready);

  // monitor: which input did a tag come from? search the head of each queue for this output
  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NPORTS; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          int tag, found;
          tag = int'(out_flit[o].data);
          found = 0;
          for (int i = 0; i < NPORTS; i++)
            if (exp_q[i][o].size() > 0 && exp_q[i][o][0] == tag) begin
              void'(exp_q[i][o].pop_front());
              found = 1;
            end
          checks++;
          n_recv++;
          if (!found || tag_seen.exists(tag)) begin
            failures++;
            $display("FAIL: tag %0d at port %0d unexpected (wrong port, order or duplicate)", tag, o);
          end
          tag_seen[tag] = 1;
        end
      end
    end
  end

  task automatic drain();
    for (int i = 0; i < NPORTS; i++) gen_en[i] = 0;
    repeat (200) @(posedge clk);
    checks++;
    if (n_sent != n_recv) begin failures++; $display("FAIL: sent %0d received %0d", n_sent, n_recv); end
  endtask

  initial begin
    int t0, grants [NPORTS], last [NPORTS], maxgap;
    for (int i = 0; i < NPORTS; i++) begin gen_en[i] = 0; in_flit[i] = '0; end
    my_x = 8; my_y = 8;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- A: random traffic at (8,8) ----
    for (int i = 0; i < NPORTS; i++) gen_en[i] = 1;
    repeat (3000) @(posedge clk);
    drain();

    // ---- B: buffer-bound traffic at (0,5) ----
    my_x = 0; my_y = 5; gb_mode = 1;
    for (int i = 0; i < NPORTS; i++) gen_en[i] = 1;
    repeat (2000) @(posedge clk);
    drain();
    gb_mode = 0;

    // ---- C: one flit through an idle router takes one cycle ----
    my_x = 8; my_y = 8; rate_ready = 4;
    @(posedge clk);
    force_one(2, 20, 8, t0);
    checks++;
    if (t0 != 1) begin failures++; $display("FAIL: idle traversal %0d cycles, expected 1", t0); end

    // ---- D: fairness, inputs 1..8 all to the local port ----
    fairness(maxgap);
    checks++;
    if (maxgap > 8) begin failures++; $display("FAIL: round-robin gap %0d > 8", maxgap); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // inject one flit on input i, return cycles until it leaves
  task automatic force_one(input int i, input int dx, input int dy, output int lat);
    flit_t f;
    int start;
    f = '0; f.dst_x = COORD_W'(dx); f.dst_y = COORD_W'(dy); f.data = 64'(tag_next);
    exp_q[i][exp_port(f, 8, 8)].push_back(tag_next);
    tag_next++; n_sent++;
    @(negedge clk);
    force_flit(i, f);
    start = cyc;
    lat = -1;
    for (int t = 0; t < 20; t++) begin
      @(posedge clk);
      if (|xfer) begin lat = cyc - start + 1; break; end
    end
    @(negedge clk);
    in_valid[i] = 1'b0;
  endtask

  task automatic force_flit(input int i, input flit_t f);
    in_flit[i]  = f;
    in_valid[i] = 1'b1;
    @(posedge clk);
    #1 in_valid[i] = 1'b0;
  endtask

  task automatic fairness(output int maxgap);
    int cnt [NPORTS];
    int since [NPORTS];
    maxgap = 0;
    for (int i = 0; i < NPORTS; i++) begin cnt[i] = 0; since[i] = 0; end
    // keep the queues of inputs 1..8 full of flits for (8,8)
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      for (int i = 1; i < NPORTS; i++) begin
        if (in_ready[i]) begin
          flit_t f;
          f = '0; f.dst_x = 8; f.dst_y = 8; f.data = 64'(tag_next);
          exp_q[i][0].push_back(tag_next);
          tag_next++; n_sent++;
          in_flit[i] = f; in_valid[i] = 1'b1;
        end else in_valid[i] = 1'b0;
      end
      @(posedge clk);
      #1;
      for (int i = 1; i < NPORTS; i++) in_valid[i] = 1'b0;
      if (xfer[0]) begin
        for (int i = 1; i < NPORTS; i++) since[i]++;
        for (int i = 1; i < NPORTS; i++)
          if (dut.grant[0][i]) begin
            if (k > 20 && since[i] > maxgap) maxgap = since[i];
            since[i] = 0;
          end
      end
    end
    for (int i = 1; i < NPORTS; i++) if (since[i] > maxgap) maxgap = since[i];
    drain();
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
