// dwc_thermometer -- thermometer encoder for one sensor channel.
//
// What it does: turns one signed integer sensor reading into a B-bit
// thermometer code, therm[i] = (obs >= tau*_i), with tau*_0 <= ... <= tau*_{B-1}.
//
// How: the controller was trained on readings that are normalised with a
// frozen running mean and standard deviation, clipped to [-10, 10] and
// compared with B fixed thresholds placed at stretched Gaussian quantiles
// (see dwc_pkg::therm_tau). Because mu, sigma and the sensor's quantisation
// scale Qs are constants after training, all of that folds into B integer
// thresholds tau* = clip(floor((tau*sigma + mu)/Qs), -Qmax, Qmax), computed
// at elaboration. The clip to [-10, 10] needs no logic: a reading beyond the
// outermost threshold already yields all-zero or all-one bits. What remains
// in hardware is B constant comparators. This is the integer-comparison
// deployment form of the method; B = 63 and B_OBS = 12 (12- or 16-bit
// sensors) follow it. Using floor rather than round-to-nearest also follows
// it.
//
// Interface: obs is a two's-complement reading that the sensor interface
// already limits to [-Qmax, Qmax], Qmax = 2^(B_OBS-1)-1. therm[0] belongs to
// the lowest threshold (-10 after normalisation), therm[(B-1)/2] to 0 and
// therm[B-1] to +10.
//
// Timing: purely combinational; the surrounding core registers it.
module dwc_thermometer
  import dwc_pkg::*;
#(
  parameter int  B      = 63,      // thermometer bits (odd)
  parameter int  B_OBS  = 12,      // sensor word width
  parameter real MU     = 0.0,     // frozen running mean, sensor units
  parameter real SIGMA  = 1.0,     // frozen running std, sensor units
  parameter real QS     = 6.0 / real'((1 << (B_OBS - 1)) - 1) // sensor LSB size
) (
  input  logic signed [B_OBS-1:0] obs,
  output logic        [B-1:0]     therm
);

  localparam int QMAX = (1 << (B_OBS - 1)) - 1;

  if (B % 2 != 1) begin : g_bad_b
    $error("dwc_thermometer: B must be odd");
  end

  for (genvar i = 0; i < B; i++) begin : g_bit
    localparam int T = therm_threshold(i, B, MU, SIGMA, QS, QMAX);
    localparam logic signed [B_OBS-1:0] TQ = B_OBS'(T);
    assign therm[i] = (obs >= TQ);
  end

endmodule
