// tb_dwc_action_ram -- self-checking test of the popcount-to-action memory.
//
// Loads a tanh action table (62 entries, the default |G|+1) through the write
// side, then reads every entry and random entries back-to-back, checking the
// data and the one-clock read latency, that rdata holds while the port is
// idle, and that a write has priority over a read in the same cycle.
module tb_dwc_action_ram;
  import dwc_model_pkg::*;

  int checks = 0, failures = 0;

  localparam int unsigned DEPTH = 62, W = 16;

  logic clk = 0;
  logic en = 0, we = 0;
  logic [5:0] addr = '0;
  logic signed [W-1:0] wdata = '0, rdata;
  int table_ref [DEPTH];

  dwc_action_ram u_dut (.clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  always #5 clk = ~clk;

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
      if (failures < 10) $display("FAIL %s got %0d want %0d", tag, got, want);
    end
  endtask

  initial begin
    int a, prev;
    for (int s = 0; s < DEPTH; s++) table_ref[s] = action_word(3, s, DEPTH - 1, W);
    // load
    @(negedge clk);
    for (int s = 0; s < DEPTH; s++) begin
      we = 1; addr = 6'(s); wdata = W'(table_ref[s]);
      @(negedge clk);
    end
    we = 0;
    // sequential read, one per clock: data appears one clock after the request
    for (int s = 0; s < DEPTH; s++) begin
      en = 1; addr = 6'(s);
      @(posedge clk); #1;
      chk(int'(rdata), table_ref[s], "seq");
    end
    // idle: output holds
    en = 0; addr = 6'd0;
    prev = int'(rdata);
    repeat (3) @(posedge clk);
    #1 chk(int'(rdata), prev, "hold");
    // latency: the new value is not there before the clock edge
    @(negedge clk);
    en = 1; addr = 6'd0;
    #1 chk(int'(rdata), prev, "before-edge");
    @(posedge clk); #1 chk(int'(rdata), table_ref[0], "after-edge");
    // random reads
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      a = $urandom % DEPTH;
      en = 1; addr = 6'(a);
      @(posedge clk); #1 chk(int'(rdata), table_ref[a], "rand");
    end
    // write during read request: write wins, rdata holds
    @(negedge clk);
    prev = int'(rdata);
    en = 1; we = 1; addr = 6'd10; wdata = 16'sd1234; table_ref[10] = 1234;
    @(posedge clk); #1 chk(int'(rdata), prev, "write-priority");
    @(negedge clk);
    we = 0; en = 1; addr = 6'd10;
    @(posedge clk); #1 chk(int'(rdata), 1234, "rewrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
