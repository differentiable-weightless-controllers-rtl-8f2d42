// tb_dwc_lut_layer -- self-checking test of one LUT layer.
//
// Three layers with different arities (k = 6, 4 and 2) and sizes are driven
// with random input vectors; every output bit is compared with the
// behavioural layer of dwc_model_pkg, which looks up the same interconnect and
// truth tables but evaluates them independently. Inputs with all bits 0 and
// all bits 1 are included.
module tb_dwc_lut_layer;
  import dwc_model_pkg::*;

  int checks = 0, failures = 0;

  localparam int unsigned NI6 = 300, NO6 = 96;
  localparam int unsigned NI4 = 64,  NO4 = 40;
  localparam int unsigned NI2 = 20,  NO2 = 33;

  logic [NI6-1:0] x6; logic [NO6-1:0] y6;
  logic [NI4-1:0] x4; logic [NO4-1:0] y4;
  logic [NI2-1:0] x2; logic [NO2-1:0] y2;

  dwc_lut_layer #(.N_IN(NI6), .N_OUT(NO6), .K(6), .LAYER(1), .SEED(7)) u6 (.x(x6), .y(y6));
  dwc_lut_layer #(.N_IN(NI4), .N_OUT(NO4), .K(4), .LAYER(2), .SEED(3)) u4 (.x(x4), .y(y4));
  dwc_lut_layer #(.N_IN(NI2), .N_OUT(NO2), .K(2), .LAYER(1), .SEED(9)) u2 (.x(x2), .y(y2));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_layer(input int unsigned seed, input int unsigned layer, input int unsigned k,
                             input bit x[], input logic [127:0] got, input int unsigned n_out,
                             input string tag);
    bit y[];
    eval_layer(seed, layer, k, n_out, x, y);
    for (int unsigned i = 0; i < n_out; i++) begin
      checks++;
      if (got[i] !== y[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s lut %0d got %0b want %0b", tag, i, got[i], y[i]);
      end
    end
  endtask

  initial begin
    bit v6[], v4[], v2[];
    v6 = new[NI6]; v4 = new[NI4]; v2 = new[NI2];
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < NI6; i++) v6[i] = (t == 0) ? 1'b0 : (t == 1) ? 1'b1 : 1'($urandom);
      for (int i = 0; i < NI4; i++) v4[i] = (t == 0) ? 1'b0 : (t == 1) ? 1'b1 : 1'($urandom);
      for (int i = 0; i < NI2; i++) v2[i] = (t == 0) ? 1'b0 : (t == 1) ? 1'b1 : 1'($urandom);
      for (int i = 0; i < NI6; i++) x6[i] = v6[i];
      for (int i = 0; i < NI4; i++) x4[i] = v4[i];
      for (int i = 0; i < NI2; i++) x2[i] = v2[i];
      #1;
      check_layer(7, 1, 6, v6, 128'(y6), NO6, "k6");
      check_layer(3, 2, 4, v4, 128'(y4), NO4, "k4");
      check_layer(9, 1, 2, v2, 128'(y2), NO2, "k2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
