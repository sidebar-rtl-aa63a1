// sidebar_mem: the storage array of the Sidebar.
//
// A single-port synchronous RAM of DEPTH words of DATA_W bits. In a cycle with
// en high it either writes wdata at addr (we high) or reads addr; read data
// appears on rdata in the next cycle and holds until the next read. A single
// port is enough because host and accelerators never access the Sidebar in
// the same cycle (the sidebar block grants the array to its owner only).
// The paper calls the Sidebar a tightly coupled storage array; its size,
// word width and port count are this design's choices.
module sidebar_mem #(
  parameter int DEPTH  = 8192,
  parameter int DATA_W = 32,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
