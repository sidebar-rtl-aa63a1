// private_mem: the private scratchpad of one accelerator primitive.
//
// DEPTH words of DATA_W bits with two synchronous read ports (A and B) and one
// write port. Read data appear one cycle after the address. Port A serves
// activations (and DMA or Sidebar copy reads), port B weights, so a layer
// engine can fetch both operands of a multiply-accumulate in one cycle. A read
// of the address being written returns the old word. The paper gives each
// small accelerator its own private memory filled by DMA; the two read ports
// are this design's choice.
module private_mem #(
  parameter int DEPTH  = 65536,
  parameter int DATA_W = 16,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [AW-1:0]     ra_addr,
  output logic [DATA_W-1:0] ra_data,
  input  logic [AW-1:0]     rb_addr,
  output logic [DATA_W-1:0] rb_data,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    ra_data <= mem[ra_addr];
    rb_data <= mem[rb_addr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
