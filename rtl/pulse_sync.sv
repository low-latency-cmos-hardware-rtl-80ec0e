// pulse_sync: carries a one-cycle pulse from one clock domain to another.
//
// The source pulse flips a toggle register; the destination samples the
// toggle through two flip-flops and emits a one-cycle pulse on every change.
// Pulses must be spaced by at least three destination clock cycles. Latency
// is two to three destination cycles. Used to hand the start of a run to the
// HBM and output-memory clock domains (the paper does not say how its clock
// domains are joined; this is this design's choice).
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst_n,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst_n,
  output logic dst_pulse
);
  logic tgl;
  logic [2:0] sync;

  always_ff @(posedge src_clk or negedge src_rst_n) begin
    if (!src_rst_n) tgl <= 1'b0;
    else if (src_pulse) tgl <= ~tgl;
  end

  always_ff @(posedge dst_clk or negedge dst_rst_n) begin
    if (!dst_rst_n) sync <= '0;
    else sync <= {sync[1:0], tgl};
  end

  assign dst_pulse = sync[2] ^ sync[1];
endmodule
