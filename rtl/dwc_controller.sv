// dwc_controller -- end-to-end differentiable weightless controller.
//
// What it does: maps one vector of D_IN integer sensor readings to D_ACT
// integer actuator commands, using only comparisons, lookup tables, popcounts
// and one memory read per action:
//
//   obs[j] --dwc_thermometer--> B bits     (D_IN channels -> b^(0), D_IN*B bits)
//   b^(0)  --dwc_core----------> s_d        (L LUT layers, group popcounts)
//   s_d    --dwc_action_ram----> act[d]     (one single-port table per action)
//
// How: the thermometer bits of channel j occupy b^(0)[j*B +: B]. The
// per-channel normalisation statistics and quantisation scales are folded into
// the thermometer thresholds at elaboration (dwc_pkg::obs_mu, obs_sigma,
// obs_qs). The action tables are loaded through the tbl_* port; a write to
// table d takes that table's single port for the cycle, so tables are to be
// loaded while no result is in flight (checked by an assertion). Sizes follow
// the method's main configuration (two layers of 1024 6-input LUTs, 63
// thresholds per observation) and its end-to-end variant (12-bit sensors, one
// table per action); the 376/17 observation/action counts are those of its
// largest task, and the 16-bit action word is this implementation's choice.
//
// Interface: obs/obs_valid in; act/act_valid out; grp_sum/grp_sum_valid expose
// the group popcounts one clock before the actions. No back-pressure.
//
// Timing: one action vector per clock; latency LATENCY = core latency + 1
// clocks from obs_valid to act_valid (4 with the defaults: pipeline register
// between the two LUT layers, before the popcount, after the popcount, and
// the table read).
module dwc_controller #(
  parameter int unsigned D_IN     = 376,   // observation channels
  parameter int unsigned D_ACT    = 17,    // action dimensions
  parameter int unsigned B        = 63,    // thermometer bits per channel
  parameter int unsigned B_OBS    = 12,    // sensor word width
  parameter int unsigned D_L      = 1024,  // LUTs per layer
  parameter int unsigned N_LAYERS = 2,     // LUT layers
  parameter int unsigned K        = 6,     // LUT arity
  parameter bit          PIPE_MID = 1'b1,  // register between LUT layers
  parameter bit          PIPE_POP = 1'b1,  // register before the popcount
  parameter int unsigned ACT_W    = 16,    // actuator command width
  parameter int unsigned SEED     = 1,     // selects the network
  localparam int unsigned G       = (D_L + D_ACT - 1) / D_ACT,
  localparam int unsigned CW      = $clog2(G + 1),
  localparam int unsigned DEPTH   = G + 1,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned SW      = (D_ACT > 1) ? $clog2(D_ACT) : 1,
  localparam int unsigned LATENCY = 2 + (PIPE_MID ? N_LAYERS - 1 : 0) + (PIPE_POP ? 1 : 0)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // observations
  input  logic                    obs_valid,
  input  logic signed [B_OBS-1:0] obs [D_IN],
  // action-table load port
  input  logic                    tbl_we,
  input  logic [SW-1:0]           tbl_act,
  input  logic [AW-1:0]           tbl_addr,
  input  logic signed [ACT_W-1:0] tbl_wdata,
  // group popcounts
  output logic                    grp_sum_valid,
  output logic [D_ACT-1:0][CW-1:0] grp_sum,
  // actions
  output logic                    act_valid,
  output logic signed [ACT_W-1:0] act [D_ACT]
);

  localparam int QMAX = (1 << (B_OBS - 1)) - 1;

  // ---------------- input encoding ----------------
  logic [D_IN*B-1:0] b0;

  for (genvar j = 0; j < D_IN; j++) begin : g_enc
    dwc_thermometer #(
      .B    (B),
      .B_OBS(B_OBS),
      .MU   (dwc_pkg::obs_mu(SEED, j)),
      .SIGMA(dwc_pkg::obs_sigma(SEED, j)),
      .QS   (dwc_pkg::obs_qs(SEED, j, QMAX))
    ) u_enc (
      .obs  (obs[j]),
      .therm(b0[j*B +: B])
    );
  end

  // ---------------- LUT core ----------------
  dwc_core #(
    .N_IN    (D_IN * B),
    .D_L     (D_L),
    .N_LAYERS(N_LAYERS),
    .K       (K),
    .D_ACT   (D_ACT),
    .PIPE_MID(PIPE_MID),
    .PIPE_POP(PIPE_POP),
    .SEED    (SEED)
  ) u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (obs_valid),
    .in_bits   (b0),
    .sums_valid(grp_sum_valid),
    .sums      (grp_sum)
  );

  // ---------------- action tables ----------------
  for (genvar d = 0; d < D_ACT; d++) begin : g_act
    logic          we;
    logic [AW-1:0] addr;
    assign we   = tbl_we && (32'(tbl_act) == d);
    assign addr = we ? tbl_addr : AW'(grp_sum[d]);

    dwc_action_ram #(
      .DEPTH(DEPTH),
      .W    (ACT_W)
    ) u_ram (
      .clk  (clk),
      .en   (grp_sum_valid),
      .we   (we),
      .addr (addr),
      .wdata(tbl_wdata),
      .rdata(act[d])
    );

    // A group sum never exceeds the group size, so reads stay in the table.
    a_rd_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
                                      grp_sum_valid |-> (32'(grp_sum[d]) <= G));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) act_valid <= 1'b0;
    else        act_valid <= grp_sum_valid;
  end

  // Every accepted observation vector yields actions exactly LATENCY clocks later.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
                              obs_valid |-> ##LATENCY act_valid);

  // A table write steals the read port: never load while results are in flight.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         !(tbl_we && grp_sum_valid));

endmodule
