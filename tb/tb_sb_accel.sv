// tb_sb_accel: one accelerator primitive connected to a Sidebar; the
// testbench plays the DMA (private memory port) and the host (Sidebar host
// port).
//   Run 1: no Sidebar input; convolution then 2x2 max pooling; result handed
//          to the host. Checks the data in the Sidebar against a reference,
//          the four argument words, that the flag is raised only after data
//          and arguments are written, and that done follows.
//   Run 2: Sidebar input; the host still owns the Sidebar when the primitive
//          starts, so it must poll; the host writes activated data and pulls
//          the flag low; the primitive copies it in, runs a fully connected
//          layer and keeps the result, which is read back over the DMA port.
module tb_sb_accel;
  import sidebar_pkg::*;
  localparam int PMD = 4096;
  localparam int SBD = 1024;
  localparam logic [SB_AW-1:0] FLAG = SB_AW'(SBD - 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  acc_cfg_t cfg;
  sb_req_t a_req, h_req;
  sb_rsp_t a_rsp, h_rsp;
  logic owner_host, handover;
  logic dma_we;
  logic [11:0] dma_addr;
  elem_t dma_wdata, dma_rdata;
  int checks = 0, failures = 0;

  sb_accel #(.PM_DEPTH(PMD), .SB_DEPTH(SBD), .ACC_ID(3)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .sb_req(a_req), .sb_rsp(a_rsp),
    .dma_we, .dma_addr, .dma_wdata, .dma_rdata);
  sidebar #(.DEPTH(SBD)) u_sb (.clk, .rst_n, .host_req(h_req), .host_rsp(h_rsp),
    .acc_req(a_req), .acc_rsp(a_rsp), .owner_host, .handover);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", what, $time); end
  endtask

  // monitors: polls of the flag, and Sidebar writes after the flag went high
  int polls = 0, late_writes = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_req.req && a_rsp.gnt && !a_req.we && a_req.addr == FLAG) polls++;
    if (a_req.req && a_rsp.gnt && a_req.we && owner_host) late_writes++;
  end

  // ---- host port helpers (drive at negedge, sample gnt at the edge) ----
  task automatic host_access(input bit we, input logic [SB_AW-1:0] a, input logic [31:0] d,
                             output logic [31:0] rd);
    @(negedge clk);
    h_req = '{req: 1, we: we, addr: a, wdata: d};
    do @(posedge clk); while (!h_rsp.gnt);
    #1; h_req.req = 0;
    rd = h_rsp.rdata;
  endtask

  // ---- DMA helpers ----
  elem_t pm [PMD];
  task automatic dma_write(input int a, input elem_t d);
    @(negedge clk); dma_we = 1; dma_addr = 12'(a); dma_wdata = d; pm[a] = d;
    @(negedge clk); dma_we = 0;
  endtask
  task automatic dma_read(input int a, output elem_t d);
    @(negedge clk); dma_addr = 12'(a);
    @(posedge clk); #1; d = dma_rdata;
  endtask

  function automatic elem_t sat(input longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return elem_t'(v);
  endfunction

  // reference layer on the pm[] copy
  task automatic ref_layer(input stage_cfg_t c);
    for (int co = 0; co < int'(c.out_ch); co++)
      for (int y = 0; y < int'(c.out_h); y++)
        for (int x = 0; x < int'(c.out_w); x++) begin
          longint acc;
          elem_t r;
          if (c.op == OP_POOL) begin
            acc = -32768;
            for (int ky = 0; ky < int'(c.k); ky++)
              for (int kx = 0; kx < int'(c.k); kx++)
                if (longint'(pm[int'(c.in_base) + (co*int'(c.in_h) + y*int'(c.stride)+ky)*int'(c.in_w)
                       + x*int'(c.stride)+kx]) > acc)
                  acc = longint'(pm[int'(c.in_base) + (co*int'(c.in_h) + y*int'(c.stride)+ky)*int'(c.in_w)
                           + x*int'(c.stride)+kx]);
          end else begin
            acc = longint'(pm[int'(c.b_base) + co]) * 256;
            for (int ci = 0; ci < int'(c.in_ch); ci++)
              for (int ky = 0; ky < int'(c.k); ky++)
                for (int kx = 0; kx < int'(c.k); kx++)
                  acc += longint'(pm[int'(c.in_base) + (ci*int'(c.in_h) + y*int'(c.stride)+ky)*int'(c.in_w)
                                     + x*int'(c.stride)+kx])
                       * longint'(pm[int'(c.w_base) + ((co*int'(c.in_ch)+ci)*int'(c.k)+ky)*int'(c.k)+kx]);
            acc = acc >>> 8;
          end
          r = sat(acc);
          pm[int'(c.out_base) + (co*int'(c.out_h)+y)*int'(c.out_w)+x] = r;
        end
  endtask

  function automatic stage_cfg_t mk(input layer_op_e op, input int ic, ih, iw, oc, oh, ow, k, s,
                                    input int ib, wb, bb, ob);
    stage_cfg_t c;
    c.op = op; c.in_ch = DIM_W'(ic); c.in_h = DIM_W'(ih); c.in_w = DIM_W'(iw);
    c.out_ch = DIM_W'(oc); c.out_h = DIM_W'(oh); c.out_w = DIM_W'(ow);
    c.k = 4'(k); c.stride = 4'(s);
    c.in_base = PM_AW'(ib); c.w_base = PM_AW'(wb); c.b_base = PM_AW'(bb); c.out_base = PM_AW'(ob);
    return c;
  endfunction

  logic [31:0] rd;
  elem_t e;
  int t0;

  initial begin
    start = 0; cfg = '0; h_req = '0; dma_we = 0; dma_addr = 0; dma_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- run 1 ----------------
    // input 2x6x6 at 0, weights 3x2x3x3 at 100, bias at 200, conv out 3x4x4 at 300,
    // pool out 3x2x2 at 400
    for (int i = 0; i < 72; i++)  dma_write(i, elem_t'($signed($urandom_range(0, 1000)) - 500));
    for (int i = 0; i < 54; i++)  dma_write(100 + i, elem_t'($signed($urandom_range(0, 600)) - 300));
    for (int i = 0; i < 3; i++)   dma_write(200 + i, elem_t'($signed($urandom_range(0, 600)) - 300));
    cfg = '0;
    cfg.two_stages = 1;
    cfg.stage[0] = mk(OP_CONV, 2, 6, 6, 3, 4, 4, 3, 1, 0, 100, 200, 300);
    cfg.stage[1] = mk(OP_POOL, 3, 4, 4, 3, 2, 2, 2, 2, 300, 0, 0, 400);
    cfg.sb_out = 1; cfg.sb_out_addr = 16'd40; cfg.pm_out_base = 400; cfg.out_len = 12;
    cfg.func_id = 8'd7;
    ref_layer(cfg.stage[0]);
    ref_layer(cfg.stage[1]);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cfg = '0;
    // host polls the flag
    t0 = 0;
    do begin host_access(0, FLAG, 0, rd); t0++; end while (rd[0] == 0);
    chk(t0 > 1, "host had to poll");
    host_access(0, SB_AW'(SBD - 5), 0, rd); chk(rd == 7, "arg function id");
    host_access(0, SB_AW'(SBD - 4), 0, rd); chk(rd == 40, "arg data pointer");
    host_access(0, SB_AW'(SBD - 3), 0, rd); chk(rd == 12, "arg length");
    host_access(0, SB_AW'(SBD - 2), 0, rd); chk(rd == 3, "arg accelerator id");
    for (int i = 0; i < 12; i++) begin
      host_access(0, SB_AW'(40 + i), 0, rd);
      chk(rd == 32'(signed'(pm[400 + i])), $sformatf("sidebar data %0d: %0d vs %0d", i, $signed(rd), pm[400+i]));
    end
    chk(late_writes == 0, "no accelerator write after the flag");
    repeat (3) @(posedge clk);
    chk(!busy, "idle after handing over");

    // ---------------- run 2 ----------------
    // host still owns the Sidebar; FC 16 -> 5 with input copied from Sidebar 100..115
    for (int i = 0; i < 80; i++) dma_write(1000 + i, elem_t'($signed($urandom_range(0, 600)) - 300));
    for (int i = 0; i < 5; i++)  dma_write(1100 + i, elem_t'($signed($urandom_range(0, 600)) - 300));
    cfg = '0;
    cfg.stage[0] = mk(OP_CONV, 16, 1, 1, 5, 1, 1, 1, 1, 2000, 1000, 1100, 2100);
    cfg.sb_in = 1; cfg.sb_in_addr = 16'd100; cfg.pm_in_base = 2000; cfg.in_len = 16;
    polls = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (40) @(posedge clk);
    chk(busy, "waits while the host owns the Sidebar");
    chk(polls >= 5, $sformatf("accelerator polls the flag (%0d)", polls));
    // host writes activated data, ReLU of random values
    for (int i = 0; i < 16; i++) begin
      int v;
      v = $signed($urandom_range(0, 1000)) - 500;
      if (v < 0) v = 0;
      pm[2000 + i] = elem_t'(v);
      host_access(1, SB_AW'(100 + i), 32'(v), rd);
    end
    ref_layer(cfg.stage[0]);
    host_access(1, FLAG, 0, rd);        // pull the flag low
    t0 = 0;
    while (!done) begin @(posedge clk); t0++; end
    // 16-word copy in, 5 outputs of 16 terms: done in well under 200 cycles
    chk(t0 < 5*(16+3) + 16 + 30, $sformatf("run 2 latency %0d", t0));
    repeat (2) @(posedge clk);
    for (int i = 0; i < 5; i++) begin
      dma_read(2100 + i, e);
      chk(e == pm[2100 + i], $sformatf("fc out %0d: %0d vs %0d", i, e, pm[2100+i]));
    end
    chk(!owner_host, "accelerator still owns after run 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
