// tb_dwc_controller -- end-to-end test of the controller at its default size.
//
// The controller is instantiated with all parameters at their defaults: 376
// sensor channels of 12 bits, 63 thermometer bits each, two layers of 1024
// 6-input LUTs (the last padded to 17 x 61 = 1037), 17 action heads and
// 16-bit action words. The test
//   1. resets the controller and loads all 17 action tables (62 words each)
//      with tanh(alpha_d (s/61 - 1/2) + beta_d) scaled to 16 bits,
//   2. streams observation vectors in back-to-back bursts and with gaps,
//      including vectors that drive channels past the outermost thresholds,
//   3. compares every group popcount and every action word with the
//      behavioural model of dwc_model_pkg, and checks the latencies (3 clocks
//      to the popcounts, 4 to the actions) and that one action vector leaves
//      per input vector.
// It counts how often each mechanism occurred -- table writes, saturation
// at the lowest and above the highest threshold, padded LUTs firing,
// back-to-back inputs, idle gaps -- and fails if any never did.
module tb_dwc_controller;
  import dwc_pkg::*;
  import dwc_model_pkg::*;

  int checks = 0, failures = 0;

  localparam int unsigned D_IN = 376, D_ACT = 17, B = 63, B_OBS = 12, D_L = 1024;
  localparam int unsigned G = 61, CW = 6, DEPTH = 62, ACT_W = 16;
  localparam int QMAX = 2047;
  localparam int LAT_SUM = 3, LAT_ACT = 4;
  localparam int N_VEC = 400;

  logic clk = 0, rst_n = 0;
  logic obs_valid = 0;
  logic signed [B_OBS-1:0] obs [D_IN];
  logic tbl_we = 0;
  logic [4:0] tbl_act = '0;
  logic [5:0] tbl_addr = '0;
  logic signed [ACT_W-1:0] tbl_wdata = '0;
  logic grp_sum_valid, act_valid;
  logic [D_ACT-1:0][CW-1:0] grp_sum;
  logic signed [ACT_W-1:0] act [D_ACT];

  dwc_controller u_dut (
    .clk(clk), .rst_n(rst_n),
    .obs_valid(obs_valid), .obs(obs),
    .tbl_we(tbl_we), .tbl_act(tbl_act), .tbl_addr(tbl_addr), .tbl_wdata(tbl_wdata),
    .grp_sum_valid(grp_sum_valid), .grp_sum(grp_sum),
    .act_valid(act_valid), .act(act)
  );

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int t; int s [D_ACT]; } exp_t;
  exp_t q_sum [$], q_act [$];
  int act_table [D_ACT][DEPTH];
  int thr [];

  int n_in = 0, n_sum = 0, n_act = 0;
  int m_tbl_writes = 0, m_sat_low = 0, m_sat_high = 0, m_padded = 0, m_b2b = 0, m_gap = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int want, input string tag);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %0d want %0d (cycle %0d)", tag, got, want, cycle);
    end
  endtask

  // Output checks just after each rising edge.
  always @(posedge clk) begin
    exp_t e;
    #1;
    if (rst_n && grp_sum_valid) begin
      if (q_sum.size() == 0) begin checks++; failures++; $display("FAIL unexpected popcounts"); end
      else begin
        e = q_sum.pop_front();
        chk(cycle - e.t, LAT_SUM, "popcount latency");
        for (int d = 0; d < D_ACT; d++) chk(int'(grp_sum[d]), e.s[d], "popcount");
        n_sum++;
      end
    end
    if (rst_n && act_valid) begin
      if (q_act.size() == 0) begin checks++; failures++; $display("FAIL unexpected actions"); end
      else begin
        e = q_act.pop_front();
        chk(cycle - e.t, LAT_ACT, "action latency");
        for (int d = 0; d < D_ACT; d++) chk(int'(act[d]), act_table[d][e.s[d]], "action");
        n_act++;
      end
    end
  end

  // One sensor reading: roughly Gaussian around the channel mean, sometimes
  // far outside the trained range, clipped to the sensor's range.
  function automatic int reading(input int unsigned j, input int mode);
    real z, v;
    int r;
    z = (real'($urandom % 10000) + real'($urandom % 10000) + real'($urandom % 10000)) / 10000.0 - 1.5;
    z = z * 2.0;
    if (mode == 1) z = -12.0 - real'($urandom % 3);
    if (mode == 2) z = 12.0 + real'($urandom % 3);
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

    // 1. load the action tables
    for (int d = 0; d < D_ACT; d++)
      for (int s = 0; s < DEPTH; s++) begin
        act_table[d][s] = action_word(d, s, G, ACT_W);
        @(negedge clk);
        tbl_we = 1; tbl_act = 5'(d); tbl_addr = 6'(s); tbl_wdata = ACT_W'(act_table[d][s]);
        m_tbl_writes++;
      end
    @(negedge clk) tbl_we = 0;
    repeat (2) @(posedge clk);
    chk(int'(act_valid) + int'(grp_sum_valid), 0, "idle after load");

    // 2./3. stream observations
    for (int t = 0; t < N_VEC; t++) begin
      logic v;
      @(negedge clk);
      v = ((t / 10) % 2 == 0) ? 1'b1 : 1'(($urandom % 2) == 0);
      obs_valid = v;
      if (!v) m_gap++;
      for (int j = 0; j < D_IN; j++) begin
        int mode;
        mode = ((t % 7) == 3 && (j % 5) == 0) ? 1 : ((t % 7) == 5 && (j % 5) == 1) ? 2 : 0;
        ov[j] = reading(j, mode);
        obs[j] = B_OBS'(ov[j]);
      end
      if (v) begin
        encode(ov, thr, B, b0);
        for (int j = 0; j < D_IN; j++) begin
          if (ov[j] <= thr[j*B]) m_sat_low++;
          if (ov[j] >= thr[j*B + B - 1]) m_sat_high++;
        end
        eval_core(1, 2, 6, D_L, D_ACT, b0, sums, last);
        for (int i = D_L; i < G * D_ACT; i++) if (last[i]) m_padded++;
        e.t = cycle;
        for (int d = 0; d < D_ACT; d++) e.s[d] = sums[d];
        q_sum.push_back(e); q_act.push_back(e);
        if (t > 0 && (t / 10) % 2 == 0 && t % 10 != 0) m_b2b++;
        n_in++;
      end
    end
    @(negedge clk) obs_valid = 0;
    repeat (LAT_ACT + 2) @(posedge clk);
    #2;
    chk(n_sum, n_in, "popcount vectors out");
    chk(n_act, n_in, "action vectors out");

    $display("inputs=%0d table_writes=%0d sat_low=%0d sat_high=%0d padded_fired=%0d back_to_back=%0d gaps=%0d",
             n_in, m_tbl_writes, m_sat_low, m_sat_high, m_padded, m_b2b, m_gap);
    checks++; if (m_tbl_writes == 0) begin failures++; $display("FAIL no table writes"); end
    checks++; if (m_sat_low == 0)    begin failures++; $display("FAIL no low saturation"); end
    checks++; if (m_sat_high == 0)   begin failures++; $display("FAIL no high saturation"); end
    checks++; if (m_padded == 0)     begin failures++; $display("FAIL padded LUTs never fired"); end
    checks++; if (m_b2b == 0)        begin failures++; $display("FAIL no back-to-back inputs"); end
    checks++; if (m_gap == 0)        begin failures++; $display("FAIL no idle gaps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
