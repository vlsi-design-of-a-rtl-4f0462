// h_memory: the per-PE "h~_u memory" of the C3PO array.
//
// Each processing element keeps one row of its array's (U+1) x U sub-matrix
// of the augmented channel matrix Hbar = [H ; v^H]: DEPTH complex entries of
// 11-bit real and imaginary parts (8 fraction bits). The paper maps this
// store onto FPGA LUTs used as distributed RAM; here it is a plain array with
// one synchronous write port and one read port whose data is registered, so
// rdata shows the entry addressed in the previous cycle (the register the
// block diagram draws after the memory). No reset: the host writes the rows
// before a precoding run. Port widths and the registered read are this
// design's choices.
module h_memory
  import c3po_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AWD = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AWD-1:0] waddr,
  input  h_t             wdata,
  input  logic [AWD-1:0] raddr,
  output h_t             rdata
);

  h_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
