// tb_dwc_highcap -- the high-capacity configuration at full size.
//
// Two layers of 16384 6-input LUTs (the last padded to 6 x 2731 = 16386),
// 255 thermometer bits per observation, HalfCheetah-sized (17 observations,
// 6 actions), 12-bit sensors, both pipeline registers. It runs tb_dwc_env
// with 20 observation vectors and checks popcounts, actions and latency
// against the behavioural model. It shares its checker with
// tb_dwc_workloads but is kept apart because its build alone takes several
// minutes and several GiB.
module tb_dwc_highcap;

  logic clk = 0;
  always #5 clk = ~clk;

  logic done;
  int   checks, failures;

  tb_dwc_env #(
    .D_IN(17), .D_ACT(6), .D_L(16384), .B(255), .N_VEC(20), .NAME("HalfCheetah-16k-255")
  ) e (.clk(clk), .done(done), .checks(checks), .failures(failures));

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
