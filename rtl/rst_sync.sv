// rst_sync: reset synchroniser. Asserts its active-low output at once when
// rst_n falls and releases it two clk edges after rst_n rises, so every
// clock domain of the accelerator leaves reset cleanly. Not described in the
// paper; a standard part of a multi-clock design.
module rst_sync (
  input  logic clk,
  input  logic rst_n,
  output logic rst_n_sync
);
  logic [1:0] ff;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ff <= '0;
    else ff <= {ff[0], 1'b1};
  end
  assign rst_n_sync = ff[1];
endmodule
