// tb_dwc_core -- self-checking test of the LUT core (layers, pipeline, popcounts).
//
// Three small cores share one input stream: two layers with both pipeline
// registers (latency 3), two layers with none (latency 1) and three layers
// with registers between layers only (latency 3). Each has 3 action heads of
// ceil(40/3) = 14 bits, so the last layer is padded from 40 to 42 LUTs.
// Input vectors arrive with random gaps and in back-to-back bursts. Every
// result is compared with the behavioural model of dwc_model_pkg, and the
// number of clocks from in_valid to sums_valid is checked against the
// expected latency. At the end the number of results must equal the number
// of inputs, and a reset must clear the pipeline.
module tb_dwc_core;
  import dwc_model_pkg::*;

  int checks = 0, failures = 0;

  localparam int unsigned NI = 35, DL = 40, DA = 3, G = 14, CW = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [NI-1:0] in_bits = '0;
  logic v_a, v_b, v_c;
  logic [DA-1:0][CW-1:0] s_a, s_b, s_c;

  dwc_core #(.N_IN(NI), .D_L(DL), .D_ACT(DA), .SEED(11)) u_a (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_bits(in_bits), .sums_valid(v_a), .sums(s_a));
  dwc_core #(.N_IN(NI), .D_L(DL), .D_ACT(DA), .PIPE_MID(0), .PIPE_POP(0), .SEED(11)) u_b (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_bits(in_bits), .sums_valid(v_b), .sums(s_b));
  dwc_core #(.N_IN(NI), .D_L(DL), .N_LAYERS(3), .D_ACT(DA), .PIPE_POP(0), .SEED(11)) u_c (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_bits(in_bits), .sums_valid(v_c), .sums(s_c));

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int t; int s [DA]; } exp_t;
  exp_t q_a [$], q_b [$], q_c [$];
  int n_in = 0, n_a = 0, n_b = 0, n_c = 0, padded_ones = 0, back_to_back = 0;

  initial begin
    repeat (50000) @(posedge clk);
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

  // Check outputs just after each rising edge.
  task automatic check_out(input logic v, input logic [DA-1:0][CW-1:0] s, ref exp_t q [$],
                           input int lat, input string tag, ref int n);
    exp_t e;
    if (v) begin
      if (q.size() == 0) begin
        checks++; failures++; $display("FAIL %s unexpected result", tag);
      end else begin
        e = q.pop_front();
        chk(cycle - e.t, lat, {tag, " latency"});
        for (int d = 0; d < DA; d++) chk(int'(s[d]), e.s[d], {tag, " sum"});
        n++;
      end
    end
  endtask

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      check_out(v_a, s_a, q_a, 3, "A", n_a);
      check_out(v_b, s_b, q_b, 1, "B", n_b);
      check_out(v_c, s_c, q_c, 3, "C", n_c);
    end
  end

  initial begin
    bit b0[], last[];
    int sums[];
    exp_t e;
    b0 = new[NI];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      // bursts of back-to-back inputs alternate with random gaps
      in_valid = ((t / 20) % 2 == 0) ? 1'b1 : 1'(($urandom % 3) == 0);
      for (int i = 0; i < NI; i++) begin
        b0[i] = (t < 2) ? 1'(t) : 1'($urandom);
        in_bits[i] = b0[i];
      end
      if (in_valid) begin
        e.t = cycle;         // latency counts edges after the sampling edge
        eval_core(11, 2, 6, DL, DA, b0, sums, last);
        for (int d = 0; d < DA; d++) e.s[d] = sums[d];
        for (int i = DL; i < G * DA; i++) if (last[i]) padded_ones++;
        q_a.push_back(e); q_b.push_back(e);
        eval_core(11, 3, 6, DL, DA, b0, sums, last);
        for (int d = 0; d < DA; d++) e.s[d] = sums[d];
        q_c.push_back(e);
        if (t > 0 && (t / 20) % 2 == 0 && t % 20 != 0) back_to_back++;
        n_in++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    #2;
    chk(n_a, n_in, "A count"); chk(n_b, n_in, "B count"); chk(n_c, n_in, "C count");
    // mechanisms exercised
    checks++; if (back_to_back == 0) begin failures++; $display("FAIL no back-to-back inputs"); end
    checks++; if (padded_ones == 0) begin failures++; $display("FAIL padded LUTs never fired"); end
    // reset clears the valid pipeline
    @(negedge clk) begin in_valid = 1; rst_n = 0; end
    @(posedge clk); #2;
    chk(int'(v_a) + int'(v_b) + int'(v_c), 0, "reset clears valid");
    $display("inputs=%0d back_to_back=%0d padded_ones=%0d", n_in, back_to_back, padded_ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
