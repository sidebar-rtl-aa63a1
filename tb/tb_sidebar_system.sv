// tb_sidebar_system: end-to-end inference of a Lenet-style network on the
// full-size system (all parameters at their defaults).
//
// Network (the CIFAR-10 example network of the PyTorch tutorials):
//   S1 conv 3x32x32 -> 6x28x28 (5x5)           | act |
//   S2 maxpool -> 6x14x14, conv -> 16x10x10    | act |
//   S3 maxpool -> 16x5x5, fc 400 -> 120        | act |
//   S4 fc 120 -> 84                            | act |
//   S5 fc 84 -> 10
// The testbench is the DMA (loads input, weights and biases into the private
// memories before start, reads the 10 outputs after done) and the host CPU:
// a polling loop that waits for the flag, reads the arguments, loads each
// element with an sbLD, applies the activation named by the function id
// (0 = ReLU, 1 = Softplus) and stores it back with an sbST, then pulls the
// flag low. Everything is compared with a reference computed here.
// Two inferences run, one with ReLU and one with Softplus.
// Counted mechanisms (each must occur): host calls through the Sidebar,
// host polls that found the flag low, accelerator polls that found it high,
// host requests stalled because the accelerator side owned the Sidebar,
// ownership handovers, convolution, pooling and fully connected stages.
module tb_sidebar_system;
  import sidebar_pkg::*;
  localparam int SBD = 8192;
  localparam logic [SB_AW-1:0] FLAG = SB_AW'(SBD - 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, busy, owner_host, handover;
  acc_cfg_t cfg [5];
  sb_req_t h_req;
  sb_rsp_t h_rsp;
  logic dma_we [5];
  logic [PM_AW-1:0] dma_addr [5];
  elem_t dma_wdata [5], dma_rdata [5];
  int checks = 0, failures = 0;

  sidebar_system dut (.clk, .rst_n, .start, .cfg, .done, .busy, .host_req(h_req), .host_rsp(h_rsp),
                      .owner_host, .handover, .dma_we, .dma_addr, .dma_wdata, .dma_rdata);

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", what, $time); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_calls = 0, n_host_poll_low = 0, n_acc_poll_high = 0, n_host_stall = 0;
  int n_handover = 0, n_conv = 0, n_pool = 0, n_fc = 0, eng_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (handover) n_handover++;
    if (dut.pool_req.req && dut.pool_rsp.gnt && !dut.pool_req.we && dut.pool_req.addr == FLAG
        && owner_host) n_acc_poll_high++;
    if (h_req.req && !h_rsp.gnt) n_host_stall++;
  end
  for (genvar i = 0; i < 5; i++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_acc[i].u_acc.u_eng.busy) eng_cycles++;
      if (dut.g_acc[i].u_acc.u_eng.done) begin
        if (dut.g_acc[i].u_acc.u_eng.c_q.op == OP_POOL) n_pool++;
        else if (dut.g_acc[i].u_acc.u_eng.c_q.in_h == 1) n_fc++;
        else n_conv++;
      end
    end
  end

  // ---------------- network description ----------------
  function automatic stage_cfg_t mk(input layer_op_e op, input int ic, ih, iw, oc, oh, ow, k, s,
                                    input int ib, wb, bb, ob);
    stage_cfg_t c;
    c.op = op; c.in_ch = DIM_W'(ic); c.in_h = DIM_W'(ih); c.in_w = DIM_W'(iw);
    c.out_ch = DIM_W'(oc); c.out_h = DIM_W'(oh); c.out_w = DIM_W'(ow);
    c.k = 4'(k); c.stride = 4'(s);
    c.in_base = PM_AW'(ib); c.w_base = PM_AW'(wb); c.b_base = PM_AW'(bb); c.out_base = PM_AW'(ob);
    return c;
  endfunction

  // private-memory layouts (element addresses)
  localparam int S1_IN = 0,     S1_W = 32768, S1_B = S1_W + 450,   S1_OUT = 36864;
  localparam int S2_IN = 0,     S2_W = 8192,  S2_B = S2_W + 2400,  S2_P = 40960, S2_OUT = 49152;
  localparam int S3_IN = 0,     S3_W = 8192,  S3_B = S3_W + 48000, S3_P = 200704, S3_OUT = 208896;
  localparam int S4_IN = 0,     S4_W = 8192,  S4_B = S4_W + 10080, S4_OUT = 49152;
  localparam int S5_IN = 0,     S5_W = 8192,  S5_B = S5_W + 840,   S5_OUT = 12288;

  task automatic set_cfg(input int func);
    for (int i = 0; i < 5; i++) cfg[i] = '0;
    cfg[0].stage[0] = mk(OP_CONV, 3, 32, 32, 6, 28, 28, 5, 1, S1_IN, S1_W, S1_B, S1_OUT);
    cfg[0].sb_out = 1; cfg[0].sb_out_addr = 0; cfg[0].pm_out_base = S1_OUT; cfg[0].out_len = 4704;
    cfg[1].two_stages = 1;
    cfg[1].stage[0] = mk(OP_POOL, 6, 28, 28, 6, 14, 14, 2, 2, S2_IN, 0, 0, S2_P);
    cfg[1].stage[1] = mk(OP_CONV, 6, 14, 14, 16, 10, 10, 5, 1, S2_P, S2_W, S2_B, S2_OUT);
    cfg[1].sb_in = 1; cfg[1].sb_in_addr = 0; cfg[1].pm_in_base = S2_IN; cfg[1].in_len = 4704;
    cfg[1].sb_out = 1; cfg[1].sb_out_addr = 0; cfg[1].pm_out_base = S2_OUT; cfg[1].out_len = 1600;
    cfg[2].two_stages = 1;
    cfg[2].stage[0] = mk(OP_POOL, 16, 10, 10, 16, 5, 5, 2, 2, S3_IN, 0, 0, S3_P);
    cfg[2].stage[1] = mk(OP_CONV, 400, 1, 1, 120, 1, 1, 1, 1, S3_P, S3_W, S3_B, S3_OUT);
    cfg[2].sb_in = 1; cfg[2].sb_in_addr = 0; cfg[2].pm_in_base = S3_IN; cfg[2].in_len = 1600;
    cfg[2].sb_out = 1; cfg[2].sb_out_addr = 0; cfg[2].pm_out_base = S3_OUT; cfg[2].out_len = 120;
    cfg[3].stage[0] = mk(OP_CONV, 120, 1, 1, 84, 1, 1, 1, 1, S4_IN, S4_W, S4_B, S4_OUT);
    cfg[3].sb_in = 1; cfg[3].sb_in_addr = 0; cfg[3].pm_in_base = S4_IN; cfg[3].in_len = 120;
    cfg[3].sb_out = 1; cfg[3].sb_out_addr = 0; cfg[3].pm_out_base = S4_OUT; cfg[3].out_len = 84;
    cfg[4].stage[0] = mk(OP_CONV, 84, 1, 1, 10, 1, 1, 1, 1, S5_IN, S5_W, S5_B, S5_OUT);
    cfg[4].sb_in = 1; cfg[4].sb_in_addr = 0; cfg[4].pm_in_base = S5_IN; cfg[4].in_len = 84;
    for (int i = 0; i < 4; i++) cfg[i].func_id = 8'(func);
  endtask

  // ---------------- reference model ----------------
  elem_t x0 [3072];                 // input image
  elem_t w1 [450],   b1 [6];
  elem_t w2 [2400],  b2 [16];
  elem_t w3 [48000], b3 [120];
  elem_t w4 [10080], b4 [84];
  elem_t w5 [840],   b5 [10];
  elem_t r1 [4704], a1 [4704], p1 [1176], r2 [1600], a2 [1600], p2 [400];
  elem_t r3 [120], a3 [120], r4 [84], a4 [84], r5 [10];

  function automatic elem_t sat(input longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return elem_t'(v);
  endfunction

  // host activation functions, Q8.8 in and out
  function automatic elem_t act(input int func, input elem_t x);
    real xr, yr;
    if (func == 0) return (x > 0) ? x : 16'sd0;
    xr = real'(x) / 256.0;
    if (xr > 30.0) yr = xr;
    else yr = $ln(1.0 + $exp(xr));
    return sat(longint'($floor(yr * 256.0 + 0.5)));
  endfunction

  function automatic elem_t rnd(input int mag);
    return elem_t'($signed($urandom_range(0, 2 * mag)) - mag);
  endfunction

  task automatic reference(input int func);
    longint acc;
    // conv1
    for (int co = 0; co < 6; co++) for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) begin
      acc = longint'(b1[co]) * 256;
      for (int ci = 0; ci < 3; ci++) for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++)
        acc += longint'(x0[(ci*32 + y+ky)*32 + x+kx]) * longint'(w1[((co*3+ci)*5+ky)*5+kx]);
      r1[(co*28+y)*28+x] = sat(acc >>> 8);
    end
    foreach (r1[i]) a1[i] = act(func, r1[i]);
    for (int c = 0; c < 6; c++) for (int y = 0; y < 14; y++) for (int x = 0; x < 14; x++) begin
      elem_t m;
      m = -16'sd32768;
      for (int ky = 0; ky < 2; ky++) for (int kx = 0; kx < 2; kx++)
        if (a1[(c*28 + 2*y+ky)*28 + 2*x+kx] > m) m = a1[(c*28 + 2*y+ky)*28 + 2*x+kx];
      p1[(c*14+y)*14+x] = m;
    end
    for (int co = 0; co < 16; co++) for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++) begin
      acc = longint'(b2[co]) * 256;
      for (int ci = 0; ci < 6; ci++) for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++)
        acc += longint'(p1[(ci*14 + y+ky)*14 + x+kx]) * longint'(w2[((co*6+ci)*5+ky)*5+kx]);
      r2[(co*10+y)*10+x] = sat(acc >>> 8);
    end
    foreach (r2[i]) a2[i] = act(func, r2[i]);
    for (int c = 0; c < 16; c++) for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++) begin
      elem_t m;
      m = -16'sd32768;
      for (int ky = 0; ky < 2; ky++) for (int kx = 0; kx < 2; kx++)
        if (a2[(c*10 + 2*y+ky)*10 + 2*x+kx] > m) m = a2[(c*10 + 2*y+ky)*10 + 2*x+kx];
      p2[(c*5+y)*5+x] = m;
    end
    for (int o = 0; o < 120; o++) begin
      acc = longint'(b3[o]) * 256;
      for (int i = 0; i < 400; i++) acc += longint'(p2[i]) * longint'(w3[o*400+i]);
      r3[o] = sat(acc >>> 8);
    end
    foreach (r3[i]) a3[i] = act(func, r3[i]);
    for (int o = 0; o < 84; o++) begin
      acc = longint'(b4[o]) * 256;
      for (int i = 0; i < 120; i++) acc += longint'(a3[i]) * longint'(w4[o*120+i]);
      r4[o] = sat(acc >>> 8);
    end
    foreach (r4[i]) a4[i] = act(func, r4[i]);
    for (int o = 0; o < 10; o++) begin
      acc = longint'(b5[o]) * 256;
      for (int i = 0; i < 84; i++) acc += longint'(a4[i]) * longint'(w5[o*84+i]);
      r5[o] = sat(acc >>> 8);
    end
  endtask

  // ---------------- DMA model ----------------
  // one word per cycle into each private memory, all five in parallel
  task automatic dma_load();
    int n;
    n = 48120;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      for (int a = 0; a < 5; a++) dma_we[a] = 0;
      if (i < 3072) begin dma_we[0] = 1; dma_addr[0] = PM_AW'(S1_IN + i); dma_wdata[0] = x0[i]; end
      else if (i < 3072 + 450) begin dma_we[0] = 1; dma_addr[0] = PM_AW'(S1_W + i - 3072); dma_wdata[0] = w1[i-3072]; end
      else if (i < 3072 + 456) begin dma_we[0] = 1; dma_addr[0] = PM_AW'(S1_B + i - 3522); dma_wdata[0] = b1[i-3522]; end
      if (i < 2400) begin dma_we[1] = 1; dma_addr[1] = PM_AW'(S2_W + i); dma_wdata[1] = w2[i]; end
      else if (i < 2416) begin dma_we[1] = 1; dma_addr[1] = PM_AW'(S2_B + i - 2400); dma_wdata[1] = b2[i-2400]; end
      if (i < 48000) begin dma_we[2] = 1; dma_addr[2] = PM_AW'(S3_W + i); dma_wdata[2] = w3[i]; end
      else begin dma_we[2] = 1; dma_addr[2] = PM_AW'(S3_B + i - 48000); dma_wdata[2] = b3[i-48000]; end
      if (i < 10080) begin dma_we[3] = 1; dma_addr[3] = PM_AW'(S4_W + i); dma_wdata[3] = w4[i]; end
      else if (i < 10164) begin dma_we[3] = 1; dma_addr[3] = PM_AW'(S4_B + i - 10080); dma_wdata[3] = b4[i-10080]; end
      if (i < 840) begin dma_we[4] = 1; dma_addr[4] = PM_AW'(S5_W + i); dma_wdata[4] = w5[i]; end
      else if (i < 850) begin dma_we[4] = 1; dma_addr[4] = PM_AW'(S5_B + i - 840); dma_wdata[4] = b5[i-840]; end
    end
    @(negedge clk);
    for (int a = 0; a < 5; a++) dma_we[a] = 0;
  endtask

  // ---------------- host model ----------------
  task automatic sb_access(input bit we, input logic [SB_AW-1:0] a, input logic [31:0] d,
                           output logic [31:0] rd);
    @(negedge clk);
    h_req = '{req: 1, we: we, addr: a, wdata: d};
    do @(posedge clk); while (!h_rsp.gnt);
    #1; h_req.req = 0;
    rd = h_rsp.rdata;
  endtask

  // serve one call; returns the function id served
  task automatic host_call(input int k, input int exp_func);
    logic [31:0] rd, func, ptr, len, src;
    elem_t x;
    do begin
      sb_access(0, FLAG, 0, rd);
      if (!rd[0]) n_host_poll_low++;
    end while (!rd[0]);
    sb_access(0, SB_AW'(SBD - 5), 0, func);
    sb_access(0, SB_AW'(SBD - 4), 0, ptr);
    sb_access(0, SB_AW'(SBD - 3), 0, len);
    sb_access(0, SB_AW'(SBD - 2), 0, src);
    chk(func == 32'(exp_func), $sformatf("call %0d function id %0d", k, func));
    chk(src == 32'(k + 1), $sformatf("call %0d caller id %0d", k, src));
    chk(len == ((k == 0) ? 4704 : (k == 1) ? 1600 : (k == 2) ? 120 : 84), "call length");
    for (int i = 0; i < int'(len); i++) begin
      elem_t e;
      sb_access(0, SB_AW'(ptr) + SB_AW'(i), 0, rd);      // sbLD
      x = elem_t'(rd[15:0]);
      e = (k == 0) ? r1[i] : (k == 1) ? r2[i] : (k == 2) ? r3[i] : r4[i];
      chk(x == e && rd[31:16] == {16{x[15]}},
          $sformatf("call %0d element %0d: got %0d expected %0d", k, i, x, e));
      x = act(int'(func), x);
      sb_access(1, SB_AW'(ptr) + SB_AW'(i), 32'(signed'(x)), rd); // sbST
    end
    n_calls++;
    sb_access(1, FLAG, 0, rd);                             // pull the flag low
  endtask

  task automatic inference(input int func);
    logic [31:0] rd;
    int t_start, t_done, t;
    foreach (x0[i]) x0[i] = rnd(256);
    foreach (w1[i]) w1[i] = rnd(40);   foreach (b1[i]) b1[i] = rnd(64);
    foreach (w2[i]) w2[i] = rnd(24);   foreach (b2[i]) b2[i] = rnd(64);
    foreach (w3[i]) w3[i] = rnd(12);   foreach (b3[i]) b3[i] = rnd(64);
    foreach (w4[i]) w4[i] = rnd(24);   foreach (b4[i]) b4[i] = rnd(64);
    foreach (w5[i]) w5[i] = rnd(28);   foreach (b5[i]) b5[i] = rnd(64);
    reference(func);
    dma_load();
    set_cfg(func);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t = 0;
    // the host tries to read the result early: it is stalled until S1 hands over
    sb_access(0, 0, 0, rd);
    chk(elem_t'(rd[15:0]) == r1[0], "early sbLD returns S1 result");
    for (int k = 0; k < 4; k++) host_call(k, func);
    while (!done) begin @(negedge clk); t++; end
    // final DMA: read the 10 outputs of S5
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); dma_addr[4] = PM_AW'(S5_OUT + i);
      @(posedge clk); #1;
      chk(dma_rdata[4] == r5[i], $sformatf("output %0d: got %0d expected %0d", i, dma_rdata[4], r5[i]));
    end
  endtask

  int cyc0, eng0;
  int expected_eng;

  initial begin
    start = 0; h_req = '0;
    for (int i = 0; i < 5; i++) begin dma_we[i] = 0; dma_addr[i] = 0; dma_wdata[i] = 0; cfg[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // engine cycles per inference: sum over layers of outputs*(terms+3)
    expected_eng = 4704*(75+3) + 1176*(4+3) + 1600*(150+3) + 400*(4+3)
                 + 120*(400+3) + 84*(120+3) + 10*(84+3);
    for (int f = 0; f < 2; f++) begin
      int cyc;
      eng0 = eng_cycles;
      cyc0 = $time / 10;
      inference(f);
      cyc = $time / 10 - cyc0;
      $display("inference with %s: %0d cycles including DMA, %0d engine cycles",
               f ? "Softplus" : "ReLU", cyc, eng_cycles - eng0);
      chk(eng_cycles - eng0 == expected_eng, $sformatf("engine cycles %0d expected %0d",
                                                       eng_cycles - eng0, expected_eng));
    end
    $display("mechanisms: calls=%0d host_polls_low=%0d acc_polls_high=%0d host_stall_cycles=%0d handovers=%0d conv=%0d pool=%0d fc=%0d",
             n_calls, n_host_poll_low, n_acc_poll_high, n_host_stall, n_handover, n_conv, n_pool, n_fc);
    chk(n_calls == 8, "host calls");
    chk(n_host_poll_low > 0, "host polled a low flag");
    chk(n_acc_poll_high > 0, "accelerator polled a high flag");
    chk(n_host_stall > 0, "host stalled by ownership");
    chk(n_handover == 16, "handovers");
    chk(n_conv == 4, "convolution stages");
    chk(n_pool == 4, "pooling stages");
    chk(n_fc == 6, "fully connected stages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
