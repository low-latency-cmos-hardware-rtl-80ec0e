// hbm_model: behavioural model of one weight HBM pseudo-channel (not
// synthesizable; stands in for an external JESD235 DRAM stack).
//
// A READ command (rd with addr = {weight set, slot, read index}) returns a
// burst of BL 128-bit words on dq, the first RL clock cycles after the
// command, one word per clock with dq_valid high. Word b of read k carries
// row k*BL+b of the 8x8 tile: weight w[row][c] in bits [16c+15:16c], the
// values coming from tb_fc_pkg::wval. Commands must not make two bursts
// overlap; the model flags that as an error.
module hbm_model #(
  parameter int HBM_ID = 0,
  parameter int RL     = 6,
  parameter int BL     = 4,
  parameter int SLOT_W = 12,
  parameter int SET_W  = 2,
  parameter int RIDX_W = 1
) (
  input  logic                              clk,
  input  logic                              rd,
  input  logic [SET_W+SLOT_W+RIDX_W-1:0]    addr,
  output logic                              dq_valid,
  output logic [127:0]                      dq
);
  localparam int SCH = 32;
  logic            sv [SCH];
  int              srow [SCH];
  int              sslot [SCH];
  int              sset [SCH];
  int unsigned     cyc = 0;
  int              errors = 0;

  initial for (int i = 0; i < SCH; i++) sv[i] = 1'b0;

  always @(posedge clk) begin
    int slot, set, ridx;
    sv[cyc % SCH] = 1'b0;
    if (rd) begin
      ridx = int'(addr[RIDX_W-1:0]);
      slot = int'(addr[RIDX_W +: SLOT_W]);
      set  = int'(addr[RIDX_W+SLOT_W +: SET_W]);
      for (int b = 0; b < BL; b++) begin
        int k;
        k = int'((cyc + RL + b) % SCH);
        if (sv[k]) begin
          errors++;
          $error("hbm_model %0d: overlapping bursts", HBM_ID);
        end
        sv[k]    = 1'b1;
        srow[k]  = ridx * BL + b;
        sslot[k] = slot;
        sset[k]  = set;
      end
    end
    cyc <= cyc + 1;
  end

  always_comb begin
    int k;
    k = int'(cyc % SCH);
    dq_valid = sv[k];
    for (int c = 0; c < 8; c++)
      dq[16*c +: 16] = sv[k] ? tb_fc_pkg::wval(HBM_ID, sset[k], sslot[k], srow[k], c) : 16'h0;
  end
endmodule
