// dwc_popcount -- group sum of one action head.
//
// What it does: count = number of ones in bits, the integer group sum s_G of
// one action group G_d of the last LUT layer.
//
// How: a plain sum of the N bits; synthesis turns it into an adder tree (or a
// LUT-based compressor tree on an FPGA). The method only asks for a popcount;
// the adder-tree form is this implementation's choice.
//
// Interface: bits is the group, count ranges over 0..N and is
// $clog2(N+1) bits wide. The default N = 61 is the padded group size of the
// main configuration for a 17-action task (ceil(1024/17)).
//
// Timing: purely combinational.
module dwc_popcount #(
  parameter int unsigned N  = 61,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  bits,
  output logic [CW-1:0] count
);

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < N; i++) begin
      count = count + CW'(bits[i]);
    end
  end

endmodule
