// pulse_sync: carries a one-cycle pulse from one clock domain to another.
// The source toggles a flag on every pulse; the destination passes the flag
// through two flip-flops and emits a one-cycle pulse on each change.  Pulses
// must be at least three destination cycles apart.  Latency: 2 to 3
// destination cycles.  Used for the "metadata ready" event that goes from the
// ISP clock domain (768 MHz) to the motion controller's (100 MHz); the two
// clocks are the paper's, the synchroniser is this implementation's.
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst_n,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst_n,
  output logic dst_pulse
);
  logic tog;
  logic [2:0] sync;
  always_ff @(posedge src_clk or negedge src_rst_n)
    if (!src_rst_n) tog <= 1'b0;
    else if (src_pulse) tog <= !tog;
  always_ff @(posedge dst_clk or negedge dst_rst_n)
    if (!dst_rst_n) sync <= '0;
    else sync <= {sync[1:0], tog};
  assign dst_pulse = sync[2] ^ sync[1];
endmodule
