// sidebar: the shared scratchpad between the host CPU and the accelerator
// pool, with its hardware ownership register.
//
// Two request ports, host and accelerator side, share one sidebar_mem array.
// The flag word at address DEPTH-1 is not in the array: it is the ownership
// register. While the flag is 0 the accelerator side owns the Sidebar, while
// it is 1 the host does. Only the owner is granted array accesses and flag
// writes; a request from the other side waits with gnt low until ownership
// passes, which is how the hardware keeps the two sides from using the
// Sidebar at the same time. Reads of the flag are granted to both sides in
// every cycle so that each can poll it. The accelerator hands the Sidebar to
// the host by writing 1 to the flag, the host returns it by writing 0.
//
// Timing: gnt is combinational from req. Read data come back with rvalid in
// the cycle after the grant. A write is done at the clock edge of its grant;
// a flag write changes the owner at that edge, so the waiting side can be
// granted in the next cycle.
//
// Following the paper: mutual exclusion enforced in hardware, a register that
// the finishing side writes, a flag location that is polled and pulled low by
// the host. This design's choices: one flag for both directions, stalling
// (not rejecting) the non-owner, the address map and reset to accelerator
// ownership.
module sidebar
  import sidebar_pkg::*;
#(
  parameter int DEPTH = 8192,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sb_req_t host_req,
  output sb_rsp_t host_rsp,
  input  sb_req_t acc_req,
  output sb_rsp_t acc_rsp,
  output logic    owner_host,
  output logic    handover
);
  localparam logic [SB_AW-1:0] FLAG_ADDR = SB_AW'(DEPTH - FLAG_OFS);

  logic flag_q;                      // ownership register
  logic host_flag, acc_flag;         // request targets the flag
  logic host_gnt, acc_gnt;
  logic host_rflag_q, acc_rflag_q;   // pending read returns the flag
  logic host_rv_q, acc_rv_q;
  logic mem_en, mem_we;
  logic [AW-1:0] mem_addr;
  logic [SB_DW-1:0] mem_wdata, mem_rdata;
  logic flag_wr;
  logic flag_wval;

  assign host_flag = host_req.addr == FLAG_ADDR;
  assign acc_flag  = acc_req.addr  == FLAG_ADDR;

  // grant: flag reads always, everything else only to the owner
  assign host_gnt = host_req.req && ((host_flag && !host_req.we) || flag_q);
  assign acc_gnt  = acc_req.req  && ((acc_flag  && !acc_req.we)  || !flag_q);

  // the array port belongs to the owner
  always_comb begin
    if (flag_q) begin
      mem_en    = host_gnt && !host_flag;
      mem_we    = host_req.we;
      mem_addr  = host_req.addr[AW-1:0];
      mem_wdata = host_req.wdata;
      flag_wr   = host_gnt && host_flag && host_req.we;
      flag_wval = host_req.wdata[0];
    end else begin
      mem_en    = acc_gnt && !acc_flag;
      mem_we    = acc_req.we;
      mem_addr  = acc_req.addr[AW-1:0];
      mem_wdata = acc_req.wdata;
      flag_wr   = acc_gnt && acc_flag && acc_req.we;
      flag_wval = acc_req.wdata[0];
    end
  end

  sidebar_mem #(.DEPTH(DEPTH), .DATA_W(SB_DW)) u_mem (
    .clk, .en(mem_en), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .rdata(mem_rdata)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      flag_q       <= 1'b0;
      host_rv_q    <= 1'b0;
      acc_rv_q     <= 1'b0;
      host_rflag_q <= 1'b0;
      acc_rflag_q  <= 1'b0;
    end else begin
      if (flag_wr) flag_q <= flag_wval;
      host_rv_q    <= host_gnt && !host_req.we;
      acc_rv_q     <= acc_gnt  && !acc_req.we;
      host_rflag_q <= host_flag;
      acc_rflag_q  <= acc_flag;
    end
  end

  // flag value one cycle ago: the value a flag read granted then returns
  logic flag_at_gnt_q;
  always_ff @(posedge clk) begin
    if (!rst_n) flag_at_gnt_q <= 1'b0;
    else        flag_at_gnt_q <= flag_q;
  end

  assign host_rsp.gnt    = host_gnt;
  assign host_rsp.rvalid = host_rv_q;
  assign host_rsp.rdata  = host_rflag_q ? SB_DW'(flag_at_gnt_q) : mem_rdata;
  assign acc_rsp.gnt     = acc_gnt;
  assign acc_rsp.rvalid  = acc_rv_q;
  assign acc_rsp.rdata   = acc_rflag_q ? SB_DW'(flag_at_gnt_q) : mem_rdata;

  assign owner_host = flag_q;
  assign handover   = flag_q != flag_at_gnt_q;

  // the array is never given to both sides in one cycle
  a_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(host_gnt && !host_flag && acc_gnt && !acc_flag));
  // a request that is waiting keeps its address and direction
  a_host_hold: assert property (@(posedge clk) disable iff (!rst_n)
    host_req.req && !host_gnt |=> host_req.req && $stable(host_req.addr) && $stable(host_req.we));
  a_acc_hold: assert property (@(posedge clk) disable iff (!rst_n)
    acc_req.req && !acc_gnt |=> acc_req.req && $stable(acc_req.addr) && $stable(acc_req.we));
endmodule
