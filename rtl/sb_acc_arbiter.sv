// sb_acc_arbiter: merges the Sidebar ports of N accelerators onto the
// accelerator side of the Sidebar.
//
// Fixed priority: among the requesting ports the lowest index is forwarded and
// gets the downstream grant in the same cycle; the others see gnt low and
// wait. The index of a granted read is remembered for one cycle so the read
// data and rvalid return only to the port that asked. Read data lines are
// shared by all ports. The paper connects the Sidebar to an accelerator pool
// but does not say how the pool shares it; fixed priority is this design's
// choice (in a layer-by-layer network only one accelerator is active at once).
module sb_acc_arbiter
  import sidebar_pkg::*;
#(
  parameter int N = 5
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sb_req_t req [N],
  output sb_rsp_t rsp [N],
  output sb_req_t m_req,
  input  sb_rsp_t m_rsp
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] sel;
  logic          any;
  logic [IW-1:0] rd_idx_q;

  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i].req) begin
        sel = IW'(i);
        any = 1'b1;
      end
    end
  end

  always_comb begin
    m_req = req[sel];
    m_req.req = any;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_idx_q <= '0;
    else if (any && m_rsp.gnt && !m_req.we) rd_idx_q <= sel;
  end

  logic [N-1:0] gnt_vec;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      gnt_vec[i]    = any && (sel == IW'(i)) && m_rsp.gnt;
      rsp[i].gnt    = gnt_vec[i];
      rsp[i].rvalid = m_rsp.rvalid && (rd_idx_q == IW'(i));
      rsp[i].rdata  = m_rsp.rdata;
    end
  end

  // at most one port granted per cycle
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(gnt_vec));
endmodule
