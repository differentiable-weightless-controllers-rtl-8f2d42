// tb_dwc_popcount -- self-checking test of the group popcount.
//
// Groups of 61 (the padded group of a 17-action head), 128 and 1 bits are
// driven with all-zero, all-one, single-bit and random vectors of varying
// density; the count is compared with a bit-by-bit count done here.
module tb_dwc_popcount;

  int checks = 0, failures = 0;

  logic [60:0]  b61;  logic [5:0] c61;
  logic [127:0] b128; logic [7:0] c128;
  logic [0:0]   b1;   logic [0:0] c1;

  dwc_popcount                u61  (.bits(b61),  .count(c61));
  dwc_popcount #(.N(128))     u128 (.bits(b128), .count(c128));
  dwc_popcount #(.N(1))       u1   (.bits(b1),   .count(c1));

  function automatic int count_ones(input logic [127:0] v, input int n);
    int c = 0;
    for (int i = 0; i < n; i++) if (v[i]) c++;
    return c;
  endfunction

  task automatic chk(input int got, input int want, input string tag);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d want %0d", tag, got, want);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] r;
    for (int t = 0; t < 3000; t++) begin
      int dens;
      dens = t % 9;       // density of ones in eighths
      for (int i = 0; i < 128; i++) r[i] = (($urandom % 8) < dens);
      if (t == 0) r = '0;
      if (t == 1) r = '1;
      if (t >= 2 && t < 130) r = 128'(1) << (t - 2);
      b61 = r[60:0]; b128 = r; b1 = r[0];
      #1;
      chk(int'(c61),  count_ones(r, 61),  "n61");
      chk(int'(c128), count_ones(r, 128), "n128");
      chk(int'(c1),   count_ones(r, 1),   "n1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
