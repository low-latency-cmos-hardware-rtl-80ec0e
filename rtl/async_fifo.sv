// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Used twice in the accelerator: as the eight rate-matching FIFOs of every
// HBM pre-fetch unit (written at the HBM clock, read at the PE clock) and as
// the 1024-entry output FIFO behind the bias/ReLU unit (written at the PE
// clock, read at the output-memory clock). The paper names both FIFOs and
// their clocks; the Gray-pointer construction is the usual one and this
// design's choice.
//
// Interface: write side (wclk) has we/wdata/full and wlevel, the number of
// entries as seen from the write side (never less than the true number).
// Read side (rclk) is show-ahead: rdata is the oldest entry whenever empty
// is low, and re pops it. rlevel is the read-side view of the fill level.
// Timing: a written word becomes visible to the reader two or three rclk
// edges later (two-flop pointer synchroniser). DEPTH must be a power of 2.
module async_fifo #(
  parameter int W     = 128,
  parameter int DEPTH = 4
) (
  input  logic                     wclk,
  input  logic                     wrst_n,
  input  logic                     we,
  input  logic [W-1:0]             wdata,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   wlevel,

  input  logic                     rclk,
  input  logic                     rrst_n,
  input  logic                     re,
  output logic [W-1:0]             rdata,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   rlevel
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in the write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in the read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wbin_next;
  assign wbin_next = wbin + (AW+1)'(we && !full);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin  <= '0;
      wgray <= '0;
    end else begin
      wbin  <= wbin_next;
      wgray <= bin2gray(wbin_next);
    end
  end

  always_ff @(posedge wclk) begin
    if (we && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  assign wlevel = wbin - gray2bin(rgray_w2);
  assign full   = (wlevel == (AW+1)'(DEPTH));

  // ---------------- read domain ----------------
  logic [AW:0] rbin_next;
  assign rbin_next = rbin + (AW+1)'(re && !empty);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin  <= '0;
      rgray <= '0;
    end else begin
      rbin  <= rbin_next;
      rgray <= bin2gray(rbin_next);
    end
  end

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  assign rlevel = gray2bin(wgray_r2) - rbin;
  assign empty  = (rlevel == '0);
  assign rdata  = mem[rbin[AW-1:0]];

  // Handshake rules: never push into a full FIFO, never pop an empty one.
  a_no_overflow: assert property (@(posedge wclk) disable iff (!wrst_n) we |-> !full)
    else $error("async_fifo: write while full");
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) re |-> !empty)
    else $error("async_fifo: read while empty");

endmodule
