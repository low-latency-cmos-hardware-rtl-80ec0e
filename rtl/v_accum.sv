// v_accum: TILE x 1 vector accumulator of one PE (V-Accum).
//
// Adds up the partial-product vectors that the MV-mult produces in the time
// slots of a run, one vector per cycle. The first vector of a run (in_first)
// replaces the old contents instead of being added, so no separate clear is
// needed. done pulses in the cycle after the last vector (in_last) has been
// added: acc then holds this PE's TILE outputs, o[8p+1]..o[8p+8] for PE p.
// The paper gives the function and the one-cycle accumulation; the saturating
// Q(17,10) addition and the first-flag clear are this design's choices.
module v_accum import fc_accl_pkg::*; #(
  parameter int TILE = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_first,
  input  logic            in_last,
  input  q_t [TILE-1:0]   prod,
  output q_t [TILE-1:0]   acc,
  output logic            done
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= in_valid && in_last;
      if (in_valid) begin
        for (int r = 0; r < TILE; r++)
          acc[r] <= in_first ? prod[r] : sat_add(acc[r], prod[r]);
      end
    end
  end
endmodule
