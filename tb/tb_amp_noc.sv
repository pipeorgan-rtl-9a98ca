// tb_amp_noc: self-checking test of the AMP network at 32 rows by 8 columns
// (the evaluated row count and long-link length; fewer columns keep the
// simulation build short).
//
// 1. Hop latency: single flits through the idle network take one cycle per
//    router passed. The expected hop count is worked out here: along each
//    dimension d hops cost d / 4 long-link hops plus d % 4 one-hop links.
//    Row 1 to row 19 in one column, for example, is 1-5-9-13-17-18-19, six
//    hops where a plain mesh needs 18.
// 2. Random traffic: every local port and every row's buffer port injects
//    flits to random PEs and buffer rows; each flit must arrive exactly once,
//    at its destination, and the number of long-link traversals must equal
//    the sum of the long-link hops of all routes.
module tb_amp_noc;
  import po_pkg::*;
  localparam int R = 32, C = 8, L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  lin_valid  [R][C];
  logic  lin_ready  [R][C];
  flit_t lin_flit   [R][C];
  logic  lout_valid [R][C];
  logic  lout_ready [R][C];
  flit_t lout_flit  [R][C];
  logic  gin_valid  [R];
  logic  gin_ready  [R];
  flit_t gin_flit   [R];
  logic  gout_valid [R];
  logic  gout_ready [R];
  flit_t gout_flit  [R];
  logic [NPORTS-1:0] xfer [R][C];

  amp_noc #(.ROWS(R), .COLS(C), .LONG(L)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_sent = 0, n_recv = 0;
  longint exp_long = 0, got_long = 0;
  bit gen = 0;
  int tag = 1;
  // destination of every tag: (to_gb, x, y)
  int dest_of [int];

  always @(posedge clk) cyc <= cyc + 1;

  function automatic int hops1(input int d);
    if (d < 0) d = -d;
    return d / L + d % L;
  endfunction
  function automatic int longs1(input int d);
    if (d < 0) d = -d;
    return d / L;
  endfunction

  function automatic int enc(input bit gb, input int x, input int y);
    return (gb ? 1 << 20 : 0) + (x << 8) + y;
  endfunction

  // ---------------- random sources ----------------
  function automatic flit_t mk(input int sx, input int sy, input bit from_gb);
    flit_t f;
    f = '0;
    f.to_gb = !from_gb && ($urandom_range(0, 5) == 0);
    f.dst_x = COORD_W'($urandom_range(0, C - 1));
    f.dst_y = COORD_W'($urandom_range(0, R - 1));
    f.ftype = F_ACT;
    f.data  = 64'(tag);
    dest_of[tag] = enc(f.to_gb, f.to_gb ? 0 : int'(f.dst_x), int'(f.dst_y));
    if (f.to_gb) exp_long += longs1(sx) + longs1(int'(f.dst_y) - sy);
    else         exp_long += longs1(int'(f.dst_x) - sx) + longs1(int'(f.dst_y) - sy);
    tag++;
    n_sent++;
    return f;
  endfunction

  always @(posedge clk) begin
    for (int y = 0; y < R; y++) begin
      for (int x = 0; x < C; x++) begin
        if (!rst_n) lin_valid[y][x] <= 1'b0;
        else begin
          if (lin_valid[y][x] && lin_ready[y][x]) lin_valid[y][x] <= 1'b0;
          if ((!lin_valid[y][x] || lin_ready[y][x]) && gen && $urandom_range(0, 15) == 0) begin
            lin_flit[y][x]  <= mk(x, y, 0);
            lin_valid[y][x] <= 1'b1;
          end
        end
      end
      if (!rst_n) gin_valid[y] <= 1'b0;
      else begin
        if (gin_valid[y] && gin_ready[y]) gin_valid[y] <= 1'b0;
        if ((!gin_valid[y] || gin_ready[y]) && gen && $urandom_range(0, 3) == 0) begin
          gin_flit[y]  <= mk(0, y, 1);
          gin_valid[y] <= 1'b1;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int y = 0; y < R; y++) begin
      for (int x = 0; x < C; x++) lout_ready[y][x] <= !gen || ($urandom_range(0, 3) != 0);
      gout_ready[y] <= 1'b1;
    end
  end

  // ---------------- sinks ----------------
  int last_arrival;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int y = 0; y < R; y++) begin
        for (int x = 0; x < C; x++) begin
          if (lout_valid[y][x] && lout_ready[y][x]) begin
            int t;
            t = int'(lout_flit[y][x].data);
            checks++; n_recv++;
            last_arrival = cyc;
            if (!dest_of.exists(t) || dest_of[t] != enc(0, x, y)) begin
              failures++; $display("FAIL: tag %0d arrived at PE (%0d,%0d)", t, x, y);
            end
            dest_of.delete(t);
          end
          for (int p = 5; p < 9; p++) if (xfer[y][x][p]) got_long++;
        end
        if (gout_valid[y] && gout_ready[y]) begin
          int t;
          t = int'(gout_flit[y].data);
          checks++; n_recv++;
          last_arrival = cyc;
          if (!dest_of.exists(t) || dest_of[t] != enc(1, 0, y)) begin
            failures++; $display("FAIL: tag %0d arrived at buffer row %0d", t, y);
          end
          dest_of.delete(t);
        end
      end
    end
  end

  // one flit through the idle network, local to local
  task automatic latency(input int sx, input int sy, input int dx, input int dy);
    int start, lat, exp_lat;
    flit_t f;
    f = '0; f.dst_x = COORD_W'(dx); f.dst_y = COORD_W'(dy); f.data = 64'(tag);
    dest_of[tag] = enc(0, dx, dy);
    exp_long += longs1(dx - sx) + longs1(dy - sy);
    tag++; n_sent++;
    @(negedge clk);
    lin_flit[sy][sx]  = f;
    lin_valid[sy][sx] = 1'b1;
    start = cyc;
    @(posedge clk);
    #1 lin_valid[sy][sx] = 1'b0;
    lat = -1;
    for (int t = 0; t < 100; t++) begin
      @(posedge clk);
      #1;
      if (!dest_of.exists(int'(f.data))) begin lat = last_arrival - start; break; end
    end
    exp_lat = hops1(dx - sx) + hops1(dy - sy) + 1;
    checks++;
    if (lat != exp_lat) begin
      failures++;
      $display("FAIL latency (%0d,%0d)->(%0d,%0d): %0d cycles, expected %0d", sx, sy, dx, dy, lat, exp_lat);
    end
  endtask

  initial begin
    int n_gb_inj;
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) begin lin_flit[y][x] = '0; end
    for (int y = 0; y < R; y++) gin_flit[y] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    latency(3, 1, 3, 19);      // 1-5-9-13-17-18-19: 6 hops
    latency(0, 0, 7, 31);      // x: 1 long + 3 short, y: 7 long + 3 short
    latency(6, 7, 2, 30);
    latency(5, 5, 6, 5);
    latency(4, 12, 4, 12);     // to itself: one router
    $display("latency checks done at %0d, long hops so far %0d", cyc, got_long);

    // random traffic
    gen = 1;
    repeat (1500) @(posedge clk);
    gen = 0;
    repeat (600) @(posedge clk);
    checks++;
    if (n_sent != n_recv || dest_of.size() != 0) begin
      failures++; $display("FAIL: sent %0d received %0d, %0d missing", n_sent, n_recv, dest_of.size());
    end
    $display("flits %0d, long-link hops %0d (expected %0d from the routes)", n_recv, got_long, exp_long);
    checks++;
    if (got_long == 0 || got_long != exp_long) begin
      failures++; $display("FAIL: long-link traversal count %0d vs %0d", got_long, exp_long);
    end
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
