// dwc_lut_layer -- one layer of k-input lookup tables with a fixed interconnect.
//
// What it does: y[i] = T_i[addr_i] for i = 0..N_OUT-1, where the k-bit address
// of LUT i is formed from k bits of the previous layer, x[c_{i,1}] ... x[c_{i,k}],
// and T_i is the LUT's 2^k-entry truth table. This is the weightless-network
// layer of the method: every LUT input is tied to exactly one bit of the
// previous layer, so the interconnect is plain wiring and each LUT maps onto
// one k-input FPGA LUT.
//
// How: both the interconnect c and the tables T are learned during training
// and constant afterwards. They come from dwc_pkg::lut_conn and
// dwc_pkg::lut_table, evaluated at elaboration for (SEED, LAYER, i). The
// address puts the first selected bit c_{i,1} in bit 0 (least significant);
// the bit order is a choice of this implementation.
//
// Interface: x is the previous layer's bit vector b^(l), y is b^(l+1).
// Defaults are the first layer of the main configuration: 376 observations x
// 63 thermometer bits in, 1024 LUTs of 6 inputs out.
//
// Timing: purely combinational.
module dwc_lut_layer
  import dwc_pkg::*;
#(
  parameter int unsigned N_IN  = 376 * 63,  // bits in b^(l)
  parameter int unsigned N_OUT = 1024,      // LUTs in this layer, D_l
  parameter int unsigned K     = 6,         // LUT arity
  parameter int unsigned LAYER = 1,         // layer number, selects its parameters
  parameter int unsigned SEED  = 1          // selects the network
) (
  input  logic [N_IN-1:0]  x,
  output logic [N_OUT-1:0] y
);

  if (K < 1 || K > K_MAX) begin : g_bad_k
    $error("dwc_lut_layer: K must be between 1 and 6");
  end

  // LUTs are generated in blocks of 1024 so that no single generate loop runs
  // past the unroll limits of common tools at the largest layer widths.
  localparam int unsigned BLK = 1024;

  for (genvar blk = 0; blk < (N_OUT + BLK - 1) / BLK; blk++) begin : g_blk
    for (genvar j = 0; j < BLK; j++) begin : g_lut
      if (blk * BLK + j < N_OUT) begin : g_on
        localparam int unsigned I = blk * BLK + j;
        localparam logic [63:0] TABLE64 = lut_table(SEED, LAYER, I);
        localparam logic [(1<<K)-1:0] TABLE = TABLE64[(1<<K)-1:0];
        logic [K-1:0] addr;
        for (genvar p = 0; p < K; p++) begin : g_port
          localparam int unsigned C = lut_conn(SEED, LAYER, I, p, N_IN);
          assign addr[p] = x[C];
        end
        assign y[I] = TABLE[addr];
      end
    end
  end

endmodule
