// dwc_core -- the logic core of a differentiable weightless controller.
//
// What it does: takes the concatenated thermometer code b^(0) of all
// observations and produces one integer group sum per action dimension.
// N_LAYERS layers of K-input LUTs (dwc_lut_layer) compute b^(1)..b^(L); the
// last layer is split into D_ACT disjoint groups of G bits and each group is
// popcounted (dwc_popcount).
//
// How: hidden layers have D_L LUTs. The last layer is padded up to
// D_LAST = G * D_ACT LUTs with G = ceil(D_L / D_ACT) so that it divides
// evenly into the action groups; group d is b^(L)[d*G +: G] (the contiguous
// split is this implementation's choice). Up to two kinds of pipeline
// register can be switched in, as in the FPGA implementation of the method:
// PIPE_MID registers the output of every layer that feeds another layer (for
// two layers: between them), PIPE_POP registers the last layer's output
// before the popcount. The popcount result is always registered. The
// main configuration (two layers of 1024 6-input LUTs) follows the method;
// the 376-input/17-action default sizes are those of its largest task.
//
// Interface: in_bits/in_valid in, sums/sums_valid out. There is no
// back-pressure: the core accepts one input vector every clock.
//
// Timing: fully pipelined, one result per clock; latency
// LATENCY = 1 + PIPE_MID*(N_LAYERS-1) + PIPE_POP clocks from in_valid to
// sums_valid (3 with the defaults, 1 with both pipeline options off).
module dwc_core #(
  parameter int unsigned N_IN     = 376 * 63, // bits of b^(0)
  parameter int unsigned D_L      = 1024,     // LUTs per layer
  parameter int unsigned N_LAYERS = 2,        // LUT layers, L
  parameter int unsigned K        = 6,        // LUT arity
  parameter int unsigned D_ACT    = 17,       // action dimensions
  parameter bit          PIPE_MID = 1'b1,     // register between LUT layers
  parameter bit          PIPE_POP = 1'b1,     // register before the popcount
  parameter int unsigned SEED     = 1,        // selects the network
  localparam int unsigned G       = (D_L + D_ACT - 1) / D_ACT, // group size |G_d|
  localparam int unsigned D_LAST  = G * D_ACT,                 // padded last layer
  localparam int unsigned CW      = $clog2(G + 1),             // popcount width
  localparam int unsigned LATENCY = 1 + (PIPE_MID ? N_LAYERS - 1 : 0) + (PIPE_POP ? 1 : 0)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [N_IN-1:0]         in_bits,
  output logic                    sums_valid,
  output logic [D_ACT-1:0][CW-1:0] sums
);

  localparam int unsigned WMAX = (D_LAST > D_L) ? D_LAST : D_L;

  if (N_LAYERS < 1) begin : g_bad_l
    $error("dwc_core: N_LAYERS must be at least 1");
  end

  // stage[l] is the (possibly registered) output of layer l, l = 1..L, and
  // stage_v[l] its valid bit; stage_v[0] is the input's (layer 1 reads
  // in_bits directly).
  logic [WMAX-1:0] stage [1:N_LAYERS];
  logic            stage_v [N_LAYERS+1];

  assign stage_v[0] = in_valid;

  for (genvar l = 1; l <= N_LAYERS; l++) begin : g_layer
    localparam int unsigned NI  = (l == 1) ? N_IN : D_L;
    localparam int unsigned NO  = (l == N_LAYERS) ? D_LAST : D_L;
    localparam bit          REG = (l == N_LAYERS) ? PIPE_POP : PIPE_MID;

    logic [NI-1:0] x;
    logic [NO-1:0] y;

    if (l == 1) begin : g_first
      assign x = in_bits;
    end else begin : g_next
      assign x = stage[l-1][NI-1:0];
    end

    dwc_lut_layer #(
      .N_IN (NI),
      .N_OUT(NO),
      .K    (K),
      .LAYER(l),
      .SEED (SEED)
    ) u_layer (
      .x(x),
      .y(y)
    );

    if (REG) begin : g_reg
      logic [NO-1:0] y_q;
      logic          v_q;
      always_ff @(posedge clk) begin
        y_q <= y;
        if (!rst_n) v_q <= 1'b0;
        else        v_q <= stage_v[l-1];
      end
      assign stage[l]   = WMAX'(y_q);
      assign stage_v[l] = v_q;
    end else begin : g_comb
      assign stage[l]   = WMAX'(y);
      assign stage_v[l] = stage_v[l-1];
    end
  end

  // Group popcounts, then the output register.
  logic [D_ACT-1:0][CW-1:0] count;

  for (genvar d = 0; d < D_ACT; d++) begin : g_head
    dwc_popcount #(.N(G)) u_pop (
      .bits (stage[N_LAYERS][d*G +: G]),
      .count(count[d])
    );
  end

  always_ff @(posedge clk) begin
    sums <= count;
    if (!rst_n) sums_valid <= 1'b0;
    else        sums_valid <= stage_v[N_LAYERS];
  end

  // Every accepted vector yields a result exactly LATENCY clocks later.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid |-> ##LATENCY sums_valid);

endmodule
