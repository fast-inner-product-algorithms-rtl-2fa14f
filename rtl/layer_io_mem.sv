// layer_io_mem: on-chip layer input/output memory.
//
// Layer activations never leave the chip: the input of a layer is read from
// here and its output written back here. Each word holds X elements along the
// input-channel dimension, which is exactly one MXU input vector. One read
// port (address from the layer IO tiler, data one cycle later) and one write
// port (host loading or post-GEMM results). Written as a plain array so a
// tool can map it onto SRAM macros or block RAM. The depth is this design's
// choice. Not modelled: the paper splits this memory into B submemories run
// at 1/B of the main clock and interleaved; here one full-rate array is used.
module layer_io_mem #(
  parameter int X     = ffip_pkg::X_DEF,
  parameter int W     = ffip_pkg::W_DEF,
  parameter int DEPTH = 65536,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    re,
  input  logic [AW-1:0]           raddr,
  output logic [X-1:0][W-1:0]     rdata,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [X-1:0][W-1:0]     wdata
);

  logic [X*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
