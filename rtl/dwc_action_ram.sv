// dwc_action_ram -- popcount-to-action memory of one action dimension.
//
// What it does: maps the group popcount s (0..|G|) of one action head to the
// integer command sent to the actuator. After training the head computes
//     a = tanh(alpha_d * (s/|G| - 1/2) + beta_d)       (SAC and DDPG)
// or the same without tanh (PPO); since s takes only |G|+1 values, the whole
// head is one table of |G|+1 words, read in a single cycle. One such memory
// per action dimension, single-ported, is the method's deployment form.
//
// How: a synchronous single-port memory with DEPTH = |G|+1 words of W bits,
// written as an array so that FPGA tools infer a block RAM. The single port
// is shared: a write (we = 1) takes the port for that cycle, otherwise a read
// is done when en = 1 ("no change" mode: rdata holds while idle or writing).
// The table contents are computed off-line from alpha_d and beta_d and the
// actuator's scaling, and loaded through the write side. The word width and
// the load path are this implementation's choices.
//
// Interface: addr is the popcount on reads and the table entry on writes.
// rdata is a signed actuator command.
//
// Timing: read latency one clock (rdata valid the cycle after en).
module dwc_action_ram #(
  parameter int unsigned DEPTH = 62,   // |G|+1 entries
  parameter int unsigned W     = 16,   // action word width
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                en,
  input  logic                we,
  input  logic [AW-1:0]       addr,
  input  logic signed [W-1:0] wdata,
  output logic signed [W-1:0] rdata
);

  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      mem[addr] <= wdata;
    end else if (en) begin
      rdata <= mem[addr];
    end
  end

  // Table writes stay inside the memory. (Reads are addressed by a popcount,
  // which cannot exceed |G|; the controller checks that.)
  a_wr_addr_range: assert property (@(posedge clk) we |-> (32'(addr) < DEPTH));

endmodule
