// in_mem_model: behavioural model of the input feature memory (not
// synthesizable). A read (rd, addr = slot) returns the 8 features of that
// slot, feature c in bits [16c+15:16c], on the next clock edge; data holds
// between reads. Values come from tb_fc_pkg::xval.
module in_mem_model #(
  parameter int SLOT_W = 12
) (
  input  logic              clk,
  input  logic              rd,
  input  logic [SLOT_W-1:0] addr,
  output logic [127:0]      data
);
  initial data = '0;
  always @(posedge clk) begin
    if (rd)
      for (int c = 0; c < 8; c++) data[16*c +: 16] <= tb_fc_pkg::xval(int'(addr), c);
  end
endmodule
