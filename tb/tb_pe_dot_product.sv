// tb_pe_dot_product: self-checking test of the 8-lane int8 dot-product unit.
// Drives corner vectors (all -128, all 127, mixed signs) and random vectors,
// and compares every lane product and the sum with a reference computed here
// from integer arithmetic.
module tb_pe_dot_product;
  localparam int LANES = 8;
  localparam int DW    = 8;

  logic [LANES*DW-1:0] a, b;
  logic signed [LANES-1:0][2*DW-1:0] prod;
  logic signed [2*DW+$clog2(LANES)-1:0] y;
  int checks = 0, failures = 0;

  pe_dot_product #(.LANES(LANES), .DW(DW)) dut (.a, .b, .prod, .y);

  task automatic check_vec();
    int ref_sum, p;
    ref_sum = 0;
    #1;
    for (int l = 0; l < LANES; l++) begin
      p = int'($signed(a[l*DW +: DW])) * int'($signed(b[l*DW +: DW]));
      ref_sum += p;
      checks++;
      if (int'($signed(prod[l])) != p) begin
        failures++;
        $display("FAIL lane %0d: got %0d exp %0d", l, $signed(prod[l]), p);
      end
    end
    checks++;
    if (int'(y) != ref_sum) begin
      failures++;
      $display("FAIL sum: got %0d exp %0d (a=%h b=%h)", y, ref_sum, a, b);
    end
  endtask

  initial begin
    a = {LANES{8'h80}}; b = {LANES{8'h80}}; check_vec();
    a = {LANES{8'h7f}}; b = {LANES{8'h80}}; check_vec();
    a = {LANES{8'h7f}}; b = {LANES{8'h7f}}; check_vec();
    a = 64'h01ff_02fe_03fd_04fc; b = 64'hff01_fe02_fd03_fc04; check_vec();
    for (int t = 0; t < 2000; t++) begin
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      check_vec();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
