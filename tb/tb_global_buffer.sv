// tb_global_buffer: self-checking test of the banked global buffer (4 rows,
// 4096-word banks).
//
// 1. Host writes random words to all banks and reads them back; read data
//    must follow the accepted request by one cycle.
// 2. A stream command sends 20 words of bank 2 as flits; header, data and
//    the wrapping index (idx0 + i mod idx_mod) are checked, first with the
//    array always ready (one flit per cycle, checked by cycle count), then
//    under random back-pressure.
// 3. Write-back: flits from the array land at their index address, and a
//    host write to the same bank in the same cycle waits.
module tb_global_buffer;
  import po_pkg::*;
  localparam int R = 4, BW = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    cmd_valid, cmd_ready;
  gb_cmd_t cmd;
  logic    host_valid, host_ready, host_we, host_rvalid;
  coord_t  host_row;
  logic [11:0] host_addr;
  vec_t    host_wdata, host_rdata;
  logic    gin_valid [R];
  logic    gin_ready [R];
  flit_t   gin_flit [R];
  logic    gout_valid [R];
  logic    gout_ready [R];
  flit_t   gout_flit [R];
  logic [R-1:0] ev_rd, ev_wr;

  global_buffer #(.ROWS(R), .BANK_WORDS(BW)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  vec_t model [R][BW];
  bit   rnd_ready = 0;
  int   n_host_wait = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) for (int r = 0; r < R; r++) gin_ready[r] <= rnd_ready ? ($urandom_range(0, 2) == 0) : 1'b1;

  task automatic hwrite(input int r, input int a, input vec_t d);
    @(negedge clk);
    host_valid = 1; host_we = 1; host_row = COORD_W'(r); host_addr = 12'(a); host_wdata = d;
    @(posedge clk);
    while (!host_ready) begin n_host_wait++; @(posedge clk); end
    #1 host_valid = 0;
    model[r][a] = d;
  endtask

  task automatic hread_check(input int r, input int a);
    @(negedge clk);
    host_valid = 1; host_we = 0; host_row = COORD_W'(r); host_addr = 12'(a);
    @(posedge clk);
    while (!host_ready) @(posedge clk);
    #1 host_valid = 0;
    checks++;
    if (!host_rvalid || host_rdata !== model[r][a]) begin
      failures++; $display("FAIL read bank %0d addr %0d: valid=%0d %h exp %h", r, a, host_rvalid, host_rdata, model[r][a]);
    end
  endtask

  // stream sink for row 2
  flit_t got [$];
  int    got_t [$];
  always @(posedge clk) if (rst_n && gin_valid[2] && gin_ready[2]) begin got.push_back(gin_flit[2]); got_t.push_back(cyc); end

  task automatic stream_check(input int base, input int len, input int idx0, input int md);
    got.delete(); got_t.delete();
    @(negedge clk);
    cmd = '0; cmd.row = 2; cmd.addr = 12'(base); cmd.len = 13'(len); cmd.dst_x = 5; cmd.dst_y = 6;
    cmd.ftype = F_WGT; cmd.idx0 = IDX_W'(idx0); cmd.idx_mod = 5'(md);
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
    for (int t = 0; t < 400 && got.size() < len; t++) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (got.size() != len) begin failures++; $display("FAIL stream: %0d flits, expected %0d", got.size(), len); end
    for (int i = 0; i < got.size(); i++) begin
      int ei;
      ei = (md == 0) ? idx0 + i : idx0 + (i % md);
      checks++;
      if (got[i].data !== model[2][base + i] || got[i].idx != IDX_W'(ei) || got[i].dst_x != 5 ||
          got[i].dst_y != 6 || got[i].ftype != F_WGT || got[i].to_gb) begin
        failures++; $display("FAIL stream word %0d: idx %0d exp %0d data %h exp %h", i, got[i].idx, ei, got[i].data, model[2][base+i]);
      end
    end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; host_valid = 0; host_we = 0; host_row = 0; host_addr = 0; host_wdata = 0;
    for (int r = 0; r < R; r++) begin gout_valid[r] = 0; gout_flit[r] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. host write / read
    for (int r = 0; r < R; r++)
      for (int a = 0; a < 64; a++) hwrite(r, a * 61 % BW, {$urandom, $urandom});
    for (int a = 0; a < 64; a++) hwrite(2, 100 + a, {$urandom, $urandom});
    for (int r = 0; r < R; r++)
      for (int a = 0; a < 64; a++) hread_check(r, a * 61 % BW);
    hwrite(3, BW - 1, 64'hdead_beef_0123_4567);
    hread_check(3, BW - 1);

    // 2. streams: full rate, then back-pressure
    stream_check(100, 20, 3, 4);
    checks++;
    if (got_t.size() == 20 && got_t[19] - got_t[0] != 19) begin
      failures++; $display("FAIL: 20 words took %0d cycles, expected one per cycle", got_t[19] - got_t[0] + 1);
    end
    rnd_ready = 1;
    stream_check(110, 40, 0, 0);
    rnd_ready = 0;

    // 3. write-back from the array, with a colliding host write
    fork
      begin
        for (int i = 0; i < 16; i++) begin
          vec_t d;
          d = {$urandom, $urandom};
          @(negedge clk);
          gout_valid[1] = 1; gout_flit[1] = '0; gout_flit[1].to_gb = 1; gout_flit[1].dst_y = 1;
          gout_flit[1].idx = IDX_W'(2000 + i); gout_flit[1].data = d;
          model[1][2000 + i] = d;
          @(posedge clk);
          #1 gout_valid[1] = 0;
        end
      end
      begin
        @(posedge clk);
        hwrite(1, 3000, 64'h1111_2222_3333_4444);
      end
    join
    for (int i = 0; i < 16; i++) hread_check(1, 2000 + i);
    hread_check(1, 3000);
    checks++;
    if (n_host_wait == 0) begin failures++; $display("FAIL: host write never waited for write-back"); end

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
