// tb_pipeorgan_top: end-to-end test of the accelerator at a reduced size
// (8 x 8 PEs, long links of 2 = Round(sqrt(8/2)), 512-word banks), running
// the scenario of po_top_scenario.svh with 12 output positions.
module tb_pipeorgan_top;
  import po_pkg::*;
  localparam int R = 8, C = 8, L = 2, BW = 2048, NPIX = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    cmd_valid, cmd_ready;
  gb_cmd_t cmd;
  logic    host_valid, host_ready, host_we, host_rvalid;
  coord_t  host_row;
  logic [$clog2(BW)-1:0] host_addr;
  vec_t    host_wdata, host_rdata;
  logic [31:0] cnt_pe_fwd, cnt_pe_gb, cnt_skip, cnt_pe_stall, cnt_pe_hold, cnt_dw,
               cnt_long_hops, cnt_mesh_hops, cnt_blocked, cnt_gb_rd, cnt_gb_wr;

  pipeorgan_top #(.ROWS(R), .COLS(C), .LONG(L), .BANK_WORDS(BW)) dut (.*);

  `include "po_top_scenario.svh"
endmodule
