// out_feature_mem: output feature memory with its address generator.
//
// Drains the output FIFO whenever it is not empty and writes each 16-bit
// output feature to the next address, starting at out_base for every run
// (run_start). Running several passes with different out_base values
// collects a layer with more outputs than one pass produces. out_count
// counts the words written since run_start. A second, synchronous read
// port (rd_addr -> rd_data one clock later) lets the host read results.
// Everything runs on the output clock. The paper only names this memory and
// says it has its own address generator; depth, ports and the base address
// are this design's choices.
module out_feature_mem import fc_accl_pkg::*; #(
  parameter int DEPTH = 4096,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run_start,
  input  logic [AW-1:0]  out_base,
  input  logic           fifo_empty,
  input  logic [DW-1:0]  fifo_rdata,
  output logic           fifo_rd,
  output logic [AW:0]    out_count,
  input  logic [AW-1:0]  rd_addr,
  output logic [DW-1:0]  rd_data
);
  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] waddr;

  assign fifo_rd = !fifo_empty && !run_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waddr     <= '0;
      out_count <= '0;
    end else if (run_start) begin
      waddr     <= out_base;
      out_count <= '0;
    end else if (fifo_rd) begin
      waddr     <= waddr + 1'b1;
      out_count <= out_count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fifo_rd) mem[waddr] <= fifo_rdata;
    rd_data <= mem[rd_addr];
  end
endmodule
