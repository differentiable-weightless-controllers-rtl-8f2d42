// tb_dwc_env -- parameterised end-to-end checker used by tb_dwc_workloads.
//
// Instantiates one controller sized for one control task (D_IN observation
// channels, D_ACT action heads) and one configuration (layer width, sensor
// width, pipeline options), loads its action tables, streams N_VEC
// observation vectors with bursts and gaps, and compares every popcount and
// action word (and their latencies) with the behavioural model of
// dwc_model_pkg. It raises done when finished and reports its counts through
// ports; the caller prints the result.
module tb_dwc_env #(
  parameter int unsigned D_IN     = 11,
  parameter int unsigned D_ACT    = 3,
  parameter int unsigned D_L      = 1024,
  parameter int unsigned B        = 63,
  parameter int unsigned B_OBS    = 12,
  parameter bit          PIPE_MID = 1'b1,
  parameter bit          PIPE_POP = 1'b1,
  parameter int          N_VEC    = 60,
  parameter string       NAME     = "env"
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import dwc_pkg::*;
  import dwc_model_pkg::*;

  localparam int unsigned ACT_W = 16;
  localparam int unsigned G = (D_L + D_ACT - 1) / D_ACT;
  localparam int unsigned CW = $clog2(G + 1), DEPTH = G + 1, AW = $clog2(DEPTH);
  localparam int unsigned SW = (D_ACT > 1) ? $clog2(D_ACT) : 1;
  localparam int QMAX = (1 << (B_OBS - 1)) - 1;
  localparam int LAT_SUM = 1 + int'(PIPE_MID) + int'(PIPE_POP);
  localparam int LAT_ACT = LAT_SUM + 1;

  logic rst_n = 0, obs_valid = 0;
  logic signed [B_OBS-1:0] obs [D_IN];
  logic tbl_we = 0;
  logic [SW-1:0] tbl_act = '0;
  logic [AW-1:0] tbl_addr = '0;
  logic signed [ACT_W-1:0] tbl_wdata = '0;
  logic grp_sum_valid, act_valid;
  logic [D_ACT-1:0][CW-1:0] grp_sum;
  logic signed [ACT_W-1:0] act [D_ACT];

  dwc_controller #(
    .D_IN(D_IN), .D_ACT(D_ACT), .D_L(D_L), .B(B), .B_OBS(B_OBS),
    .PIPE_MID(PIPE_MID), .PIPE_POP(PIPE_POP)
  ) u_dut (
    .clk(clk), .rst_n(rst_n),
    .obs_valid(obs_valid), .obs(obs),
    .tbl_we(tbl_we), .tbl_act(tbl_act), .tbl_addr(tbl_addr), .tbl_wdata(tbl_wdata),
    .grp_sum_valid(grp_sum_valid), .grp_sum(grp_sum),
    .act_valid(act_valid), .act(act)
  );

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int t; int s [D_ACT]; } exp_t;
  exp_t q_sum [$], q_act [$];
  int act_table [D_ACT][DEPTH];
  int thr [];
  int n_in = 0, n_act = 0;

  initial begin done = 0; checks = 0; failures = 0; end

  task automatic chk(input int got, input int want, input string tag);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 6) $display("FAIL %s %s got %0d want %0d (cycle %0d)", NAME, tag, got, want, cycle);
    end
  endtask

  always @(posedge clk) begin
    exp_t e;
    #1;
    if (rst_n && grp_sum_valid) begin
      if (q_sum.size() == 0) begin checks++; failures++; $display("FAIL %s unexpected popcounts", NAME); end
      else begin
        e = q_sum.pop_front();
        chk(cycle - e.t, LAT_SUM, "popcount latency");
        for (int d = 0; d < D_ACT; d++) chk(int'(grp_sum[d]), e.s[d], "popcount");
      end
    end
    if (rst_n && act_valid) begin
      if (q_act.size() == 0) begin checks++; failures++; $display("FAIL %s unexpected actions", NAME); end
      else begin
        e = q_act.pop_front();
        chk(cycle - e.t, LAT_ACT, "action latency");
        for (int d = 0; d < D_ACT; d++) chk(int'(act[d]), act_table[d][e.s[d]], "action");
        n_act++;
      end
    end
  end

  function automatic int reading(input int unsigned j);
    real z, v;
    int r;
    z = ((real'($urandom % 10000) + real'($urandom % 10000) + real'($urandom % 10000)) / 10000.0 - 1.5) * 2.0;
    if (($urandom % 40) == 0) z = z * 8.0;
    v = (z * obs_sigma(1, j) + obs_mu(1, j)) / obs_qs(1, j, QMAX);
    r = int'(v);
    if (r > QMAX) r = QMAX;
    if (r < -QMAX) r = -QMAX;
    return r;
  endfunction

  initial begin
    int ov [];
    bit b0[], last[];
    int sums[];
    exp_t e;
    thresholds(D_IN, B, B_OBS, 1, thr);
    for (int j = 0; j < D_IN; j++) obs[j] = '0;
    ov = new[D_IN];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int d = 0; d < D_ACT; d++)
      for (int s = 0; s < DEPTH; s++) begin
        act_table[d][s] = action_word(d, s, G, ACT_W);
        @(negedge clk);
        tbl_we = 1; tbl_act = SW'(d); tbl_addr = AW'(s); tbl_wdata = ACT_W'(act_table[d][s]);
      end
    @(negedge clk) tbl_we = 0;
    repeat (2) @(posedge clk);
    for (int t = 0; t < N_VEC; t++) begin
      logic v;
      @(negedge clk);
      v = ((t / 8) % 2 == 0) ? 1'b1 : 1'(($urandom % 2) == 0);
      obs_valid = v;
      for (int j = 0; j < D_IN; j++) begin
        ov[j] = reading(j);
        obs[j] = B_OBS'(ov[j]);
      end
      if (v) begin
        encode(ov, thr, B, b0);
        eval_core(1, 2, 6, D_L, D_ACT, b0, sums, last);
        e.t = cycle;
        for (int d = 0; d < D_ACT; d++) e.s[d] = sums[d];
        q_sum.push_back(e); q_act.push_back(e);
        n_in++;
      end
    end
    @(negedge clk) obs_valid = 0;
    repeat (LAT_ACT + 2) @(posedge clk);
    #2;
    chk(n_act, n_in, "action vectors out");
    $display("%s: D_IN=%0d D_ACT=%0d D_L=%0d B=%0d |G|=%0d b_obs=%0d latency=%0d inputs=%0d checks=%0d failures=%0d",
             NAME, D_IN, D_ACT, D_L, B, G, B_OBS, LAT_ACT, n_in, checks, failures);
    done = 1;
  end
endmodule
