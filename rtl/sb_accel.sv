// sb_accel: one small accelerator primitive (a layer or two, no activation)
// with the state machine that lets it call the host through the Sidebar.
//
// On start it runs its descriptor (acc_cfg_t) in this order:
//   1. if sb_in: poll the Sidebar flag by reading it until it reads 0, i.e.
//      until the host has finished the previous activation and pulled the
//      flag low; then copy in_len words from Sidebar address sb_in_addr into
//      private memory at pm_in_base (low 16 bits of each word).
//   2. run stage[0] and, if two_stages, stage[1] on the layer_engine.
//   3. if sb_out: copy out_len elements from pm_out_base into the Sidebar at
//      sb_out_addr, sign extended to 32 bits; write the call arguments
//      (function id, data pointer, length, accelerator id) into the argument
//      words; write 1 to the flag, which hands the Sidebar to the host.
//   4. pulse done.
// While idle the private memory belongs to the DMA port (write port and read
// port A, read data on dma_rdata one cycle after dma_addr).
//
// Timing: a poll takes two cycles per read; the copy-in is pipelined and moves
// one word per granted cycle; the copy-out takes two cycles per word (private
// memory read, then Sidebar write). Layer timing is that of layer_engine.
//
// The paper gives the order data, arguments, flag, the polling, and an FSM
// with data and control signals added to the accelerator; the descriptor
// format, the argument layout and the copy timing are this design's choices.
module sb_accel
  import sidebar_pkg::*;
#(
  parameter int PM_DEPTH = 65536,
  parameter int SB_DEPTH = 8192,
  parameter int ACC_ID   = 0,
  localparam int AW      = $clog2(PM_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  acc_cfg_t      cfg,
  output logic          busy,
  output logic          done,
  output sb_req_t       sb_req,
  input  sb_rsp_t       sb_rsp,
  input  logic          dma_we,
  input  logic [AW-1:0] dma_addr,
  input  elem_t         dma_wdata,
  output elem_t         dma_rdata
);
  localparam logic [SB_AW-1:0] FLAG_ADDR = SB_AW'(SB_DEPTH - FLAG_OFS);
  localparam logic [SB_AW-1:0] ARG0_ADDR = SB_AW'(SB_DEPTH - ARG_FUNC_OFS);

  typedef enum logic [3:0] {
    A_IDLE, A_POLL, A_POLL_WAIT, A_CPIN, A_RUN0, A_WAIT0, A_RUN1, A_WAIT1,
    A_CPOUT_RD, A_CPOUT_WR, A_ARGS, A_FLAG, A_DONE
  } astate_e;

  astate_e state_q;
  acc_cfg_t c_q;
  logic [PM_AW-1:0] iss_q, cnt_q;   // copy-in: words requested / words received
  logic [1:0] arg_q;

  // engine
  logic eng_start, eng_busy, eng_done, eng_we;
  stage_cfg_t eng_cfg;
  logic [PM_AW-1:0] eng_ra, eng_rb, eng_waddr;
  elem_t eng_wdata;
  elem_t pm_ra_data, pm_rb_data;

  assign eng_cfg   = (state_q == A_RUN1 || state_q == A_WAIT1) ? c_q.stage[1] : c_q.stage[0];
  assign eng_start = state_q == A_RUN0 || state_q == A_RUN1;

  layer_engine u_eng (
    .clk, .rst_n, .start(eng_start), .cfg(eng_cfg), .busy(eng_busy), .done(eng_done),
    .ra_addr(eng_ra), .ra_data(pm_ra_data), .rb_addr(eng_rb), .rb_data(pm_rb_data),
    .we(eng_we), .waddr(eng_waddr), .wdata(eng_wdata)
  );

  // private memory port muxing
  logic          pm_we;
  logic [AW-1:0] pm_waddr, pm_ra, pm_rb;
  elem_t         pm_wdata;
  logic          in_engine;
  assign in_engine = state_q inside {A_RUN0, A_WAIT0, A_RUN1, A_WAIT1};

  always_comb begin
    pm_rb = AW'(eng_rb);
    if (in_engine) begin
      pm_we = eng_we;  pm_waddr = AW'(eng_waddr);  pm_wdata = eng_wdata;
      pm_ra = AW'(eng_ra);
    end else if (state_q == A_CPIN) begin
      pm_we = sb_rsp.rvalid;  pm_waddr = AW'(c_q.pm_in_base + cnt_q);
      pm_wdata = elem_t'(sb_rsp.rdata[ELEM_W-1:0]);
      pm_ra = dma_addr;
    end else if (state_q == A_CPOUT_RD || state_q == A_CPOUT_WR) begin
      pm_we = 1'b0;  pm_waddr = dma_addr;  pm_wdata = dma_wdata;
      pm_ra = AW'(c_q.pm_out_base + cnt_q);
    end else begin
      pm_we = dma_we && !busy;  pm_waddr = dma_addr;  pm_wdata = dma_wdata;
      pm_ra = dma_addr;
    end
  end

  private_mem #(.DEPTH(PM_DEPTH), .DATA_W(ELEM_W)) u_pm (
    .clk, .ra_addr(pm_ra), .ra_data(pm_ra_data), .rb_addr(pm_rb), .rb_data(pm_rb_data),
    .we(pm_we), .waddr(pm_waddr), .wdata(pm_wdata)
  );
  assign dma_rdata = pm_ra_data;

  // Sidebar requests
  always_comb begin
    sb_req = '0;
    unique case (state_q)
      A_POLL: begin
        sb_req.req = 1'b1;  sb_req.addr = FLAG_ADDR;
      end
      A_CPIN: begin
        sb_req.req  = iss_q != c_q.in_len;
        sb_req.addr = c_q.sb_in_addr + SB_AW'(iss_q);
      end
      A_CPOUT_WR: begin
        sb_req.req = 1'b1;  sb_req.we = 1'b1;
        sb_req.addr  = c_q.sb_out_addr + SB_AW'(cnt_q);
        sb_req.wdata = SB_DW'(pm_ra_data);   // sign extended
      end
      A_ARGS: begin
        sb_req.req = 1'b1;  sb_req.we = 1'b1;
        sb_req.addr = ARG0_ADDR + SB_AW'(arg_q);
        case (arg_q)
          2'd0:    sb_req.wdata = SB_DW'(c_q.func_id);
          2'd1:    sb_req.wdata = SB_DW'(c_q.sb_out_addr);
          2'd2:    sb_req.wdata = SB_DW'(c_q.out_len);
          default: sb_req.wdata = SB_DW'(ACC_ID);
        endcase
      end
      A_FLAG: begin
        sb_req.req = 1'b1;  sb_req.we = 1'b1;  sb_req.addr = FLAG_ADDR;  sb_req.wdata = 32'd1;
      end
      default: ;
    endcase
  end

  assign busy = state_q != A_IDLE;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= A_IDLE;
      c_q     <= '0;
      iss_q   <= '0;
      cnt_q   <= '0;
      arg_q   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        A_IDLE: if (start) begin
          c_q   <= cfg;
          iss_q <= '0;
          cnt_q <= '0;
          state_q <= cfg.sb_in ? A_POLL : A_RUN0;
        end
        A_POLL: if (sb_rsp.gnt) state_q <= A_POLL_WAIT;
        A_POLL_WAIT: if (sb_rsp.rvalid) begin
          // flag low: the host is done and the Sidebar is ours
          state_q <= sb_rsp.rdata[0] ? A_POLL : A_CPIN;
        end
        A_CPIN: begin
          if (sb_req.req && sb_rsp.gnt) iss_q <= iss_q + 1'b1;
          if (sb_rsp.rvalid) begin
            cnt_q <= cnt_q + 1'b1;
            if (cnt_q + 1'b1 == c_q.in_len) state_q <= A_RUN0;
          end
          if (c_q.in_len == '0) state_q <= A_RUN0;
        end
        A_RUN0:  state_q <= A_WAIT0;
        A_WAIT0: if (eng_done) state_q <= c_q.two_stages ? A_RUN1 : (c_q.sb_out ? A_CPOUT_RD : A_DONE);
        A_RUN1:  state_q <= A_WAIT1;
        A_WAIT1: if (eng_done) state_q <= c_q.sb_out ? A_CPOUT_RD : A_DONE;
        A_CPOUT_RD: begin
          if (cnt_q == c_q.out_len) state_q <= A_ARGS;
          else                      state_q <= A_CPOUT_WR;
        end
        A_CPOUT_WR: if (sb_rsp.gnt) begin
          cnt_q <= cnt_q + 1'b1;
          state_q <= A_CPOUT_RD;
        end
        A_ARGS: if (sb_rsp.gnt) begin
          arg_q <= arg_q + 2'd1;
          if (arg_q == 2'd3) state_q <= A_FLAG;
        end
        A_FLAG: if (sb_rsp.gnt) state_q <= A_DONE;
        A_DONE: begin
          done <= 1'b1;
          state_q <= A_IDLE;
        end
        default: state_q <= A_IDLE;
      endcase
      // the copy-out counter restarts after the copy-in
      if (state_q == A_WAIT0 && eng_done) cnt_q <= '0;
    end
  end

  // the engine runs only in the engine states, the flag is polled only for Sidebar input
  a_eng_owned: assert property (@(posedge clk) disable iff (!rst_n) eng_busy |-> in_engine);
  a_poll_in:   assert property (@(posedge clk) disable iff (!rst_n) state_q == A_POLL |-> c_q.sb_in);
  // a DMA write while the accelerator runs is lost: the driver must not do it
  a_dma_idle: assert property (@(posedge clk) disable iff (!rst_n) !(dma_we && busy));
endmodule
