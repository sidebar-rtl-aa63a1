// sidebar_system: the Sidebar between a host CPU port and a pool of five
// accelerator primitives S1..S5 that together compute a Lenet-style network
// whose activation functions run on the host.
//
//   S1  convolution                       (input from DMA)
//   S2  pooling, then convolution
//   S3  pooling, then fully connected
//   S4  fully connected
//   S5  fully connected                   (output read back by DMA)
//
// Between two primitives the activation is done by the host: the earlier
// primitive copies its layer output into the Sidebar, writes the call
// arguments and raises the flag; the host polls the flag, reads the data with
// sbLD, applies the function named by the arguments, writes the results back
// with sbST and pulls the flag low; the next primitive, which was started
// when the earlier one finished and has been polling the flag, then copies
// the activated data into its private memory and continues. Which primitive
// does what, and the sizes of its buffers, are set by the host driver through
// the five descriptors cfg[0..4] and by the memory depth parameters.
//
// Interface: start (one-cycle pulse) begins S1; done pulses when S5 is
// finished. host_req/host_rsp is the host's Sidebar port (sb_req_t/sb_rsp_t
// handshake, see sidebar_pkg). Each private memory has a DMA port (write, or
// read with data one cycle after the address) usable while its primitive is
// idle: inputs and weights are loaded and the final output is read there.
//
// Following the paper: five primitives as in its Lenet split, private
// memories sized from the buffer sizes it prints (input 32768, kernels 4096
// and 32768, weights 192512, 40960 and 4096, output 4096), DMA at the ends and
// the Sidebar in between. This design's choices: that the printed sizes count
// 16-bit elements, the extra activation regions in each memory, and that each
// primitive starts when the previous one has called the host.
module sidebar_system
  import sidebar_pkg::*;
#(
  parameter int SB_DEPTH  = 8192,
  parameter int PM1_DEPTH = 45056,
  parameter int PM2_DEPTH = 57344,
  parameter int PM3_DEPTH = 217088,
  parameter int PM4_DEPTH = 57344,
  parameter int PM5_DEPTH = 16384
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  acc_cfg_t         cfg [5],
  output logic             done,
  output logic             busy,
  input  sb_req_t          host_req,
  output sb_rsp_t          host_rsp,
  output logic             owner_host,
  output logic             handover,
  input  logic             dma_we    [5],
  input  logic [PM_AW-1:0] dma_addr  [5],
  input  elem_t            dma_wdata [5],
  output elem_t            dma_rdata [5]
);
  localparam int PM_DEPTH [5] = '{PM1_DEPTH, PM2_DEPTH, PM3_DEPTH, PM4_DEPTH, PM5_DEPTH};

  sb_req_t acc_req [5];
  sb_rsp_t acc_rsp [5];
  sb_req_t pool_req;
  sb_rsp_t pool_rsp;
  logic    acc_start [5];
  logic    acc_done  [5];
  logic    acc_busy  [5];

  sidebar #(.DEPTH(SB_DEPTH)) u_sidebar (
    .clk, .rst_n, .host_req, .host_rsp, .acc_req(pool_req), .acc_rsp(pool_rsp),
    .owner_host, .handover
  );

  sb_acc_arbiter #(.N(5)) u_arb (
    .clk, .rst_n, .req(acc_req), .rsp(acc_rsp), .m_req(pool_req), .m_rsp(pool_rsp)
  );

  for (genvar i = 0; i < 5; i++) begin : g_acc
    localparam int AW = $clog2(PM_DEPTH[i]);
    assign acc_start[i] = (i == 0) ? start : acc_done[(i == 0) ? 0 : i - 1];
    sb_accel #(.PM_DEPTH(PM_DEPTH[i]), .SB_DEPTH(SB_DEPTH), .ACC_ID(i + 1)) u_acc (
      .clk, .rst_n, .start(acc_start[i]), .cfg(cfg[i]), .busy(acc_busy[i]), .done(acc_done[i]),
      .sb_req(acc_req[i]), .sb_rsp(acc_rsp[i]),
      .dma_we(dma_we[i]), .dma_addr(dma_addr[i][AW-1:0]), .dma_wdata(dma_wdata[i]),
      .dma_rdata(dma_rdata[i])
    );
  end

  assign done = acc_done[4];
  assign busy = acc_busy[0] || acc_busy[1] || acc_busy[2] || acc_busy[3] || acc_busy[4];
endmodule
