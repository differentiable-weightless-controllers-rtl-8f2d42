// tb_dwc_workloads -- the controller sized for each evaluated control task.
//
// Runs tb_dwc_env for the observation/action sizes of the five MuJoCo tasks
// (Ant 27/8, HalfCheetah 17/6, Hopper 11/3, Humanoid 376/17, Walker2d 17/6)
// in two configurations: the main one (two layers of 1024 6-input LUTs,
// 12-bit sensors, both pipeline registers, latency 4) and the end-to-end
// variant (two layers of 256 LUTs, 16-bit sensors, no inner pipeline
// register, latency 2). Each run checks popcounts, actions and latencies
// against the behavioural model; the sums of all checks are reported.
module tb_dwc_workloads;

  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NW = 10;
  logic done [NW];
  int   c [NW], f [NW];

  tb_dwc_env #(.D_IN(27),  .D_ACT(8),  .NAME("Ant-1024"))         e0 (.clk(clk), .done(done[0]), .checks(c[0]), .failures(f[0]));
  tb_dwc_env #(.D_IN(17),  .D_ACT(6),  .NAME("HalfCheetah-1024")) e1 (.clk(clk), .done(done[1]), .checks(c[1]), .failures(f[1]));
  tb_dwc_env #(.D_IN(11),  .D_ACT(3),  .NAME("Hopper-1024"))      e2 (.clk(clk), .done(done[2]), .checks(c[2]), .failures(f[2]));
  tb_dwc_env #(.D_IN(376), .D_ACT(17), .NAME("Humanoid-1024"))    e3 (.clk(clk), .done(done[3]), .checks(c[3]), .failures(f[3]));
  tb_dwc_env #(.D_IN(17),  .D_ACT(6),  .NAME("Walker2d-1024"))    e4 (.clk(clk), .done(done[4]), .checks(c[4]), .failures(f[4]));
  tb_dwc_env #(.D_IN(27),  .D_ACT(8),  .D_L(256), .B_OBS(16), .PIPE_MID(0), .PIPE_POP(0), .NAME("Ant-256"))         e5 (.clk(clk), .done(done[5]), .checks(c[5]), .failures(f[5]));
  tb_dwc_env #(.D_IN(17),  .D_ACT(6),  .D_L(256), .B_OBS(16), .PIPE_MID(0), .PIPE_POP(0), .NAME("HalfCheetah-256")) e6 (.clk(clk), .done(done[6]), .checks(c[6]), .failures(f[6]));
  tb_dwc_env #(.D_IN(11),  .D_ACT(3),  .D_L(256), .B_OBS(16), .PIPE_MID(0), .PIPE_POP(0), .NAME("Hopper-256"))      e7 (.clk(clk), .done(done[7]), .checks(c[7]), .failures(f[7]));
  tb_dwc_env #(.D_IN(376), .D_ACT(17), .D_L(256), .B_OBS(16), .PIPE_MID(0), .PIPE_POP(0), .NAME("Humanoid-256"))    e8 (.clk(clk), .done(done[8]), .checks(c[8]), .failures(f[8]));
  tb_dwc_env #(.D_IN(17),  .D_ACT(6),  .D_L(256), .B_OBS(16), .PIPE_MID(0), .PIPE_POP(0), .NAME("Walker2d-256"))    e9 (.clk(clk), .done(done[9]), .checks(c[9]), .failures(f[9]));

  int checks, failures;

  initial begin
    repeat (20000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < NW; i++) begin checks += c[i]; failures += f[i]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < NW; i++) all &= done[i];
    end while (!all);
    checks = 0; failures = 0;
    for (int i = 0; i < NW; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
