// tb_layer_engine: runs a convolution, a max pooling, a fully connected
// layer and a saturating convolution on random Q8.8 data held in a model of
// the private memory, and compares every output word with a reference
// computed here. Also checks the latency N*(T+3) cycles from start to done
// (N outputs of T terms each) and that nothing outside the output region is
// written.
module tb_layer_engine;
  import sidebar_pkg::*;
  localparam int MEM = 8192;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, we;
  stage_cfg_t cfg;
  logic [PM_AW-1:0] ra_addr, rb_addr, waddr;
  elem_t ra_data, rb_data, wdata;
  int checks = 0, failures = 0;

  elem_t mem [MEM];
  always_ff @(posedge clk) begin
    ra_data <= mem[ra_addr[12:0]];
    rb_data <= mem[rb_addr[12:0]];
    if (we) mem[waddr[12:0]] <= wdata;
  end

  layer_engine dut (.clk, .rst_n, .start, .cfg, .busy, .done, .ra_addr, .ra_data,
                    .rb_addr, .rb_data, .we, .waddr, .wdata);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int out_lo, out_hi, stray;
  always @(posedge clk) if (we && (int'(waddr) < out_lo || int'(waddr) >= out_hi)) stray++;

  function automatic elem_t sat(input longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return elem_t'(v);
  endfunction

  task automatic run(input stage_cfg_t c, input int scale);
    elem_t exp [512];
    elem_t r;
    int n, t, cyc;
    // random inputs, weights, biases (scale limits the magnitude)
    for (int i = 0; i < MEM; i++) mem[i] = elem_t'($signed($urandom_range(0, 2*scale)) - scale);
    n = int'(c.out_ch) * int'(c.out_h) * int'(c.out_w);
    t = (c.op == OP_POOL) ? int'(c.k) * int'(c.k) : int'(c.in_ch) * int'(c.k) * int'(c.k);
    for (int co = 0; co < int'(c.out_ch); co++)
      for (int y = 0; y < int'(c.out_h); y++)
        for (int x = 0; x < int'(c.out_w); x++) begin
          longint acc;
          if (c.op == OP_POOL) begin
            acc = -32768;
            for (int ky = 0; ky < int'(c.k); ky++)
              for (int kx = 0; kx < int'(c.k); kx++) begin
                longint v;
                v = mem[int'(c.in_base) + (co*int'(c.in_h) + y*int'(c.stride)+ky)*int'(c.in_w)
                        + x*int'(c.stride)+kx];
                if (v > acc) acc = v;
              end
          end else begin
            acc = longint'(mem[int'(c.b_base) + co]) * 256;
            for (int ci = 0; ci < int'(c.in_ch); ci++)
              for (int ky = 0; ky < int'(c.k); ky++)
                for (int kx = 0; kx < int'(c.k); kx++)
                  acc += longint'(mem[int'(c.in_base) + (ci*int'(c.in_h) + y*int'(c.stride)+ky)*int'(c.in_w)
                                      + x*int'(c.stride)+kx])
                       * longint'(mem[int'(c.w_base) + ((co*int'(c.in_ch)+ci)*int'(c.k)+ky)*int'(c.k)+kx]);
            acc = acc >>> 8;
          end
          r = sat(acc);
          exp[(co*int'(c.out_h)+y)*int'(c.out_w)+x] = r;
        end
    out_lo = int'(c.out_base); out_hi = out_lo + n; stray = 0;
    @(negedge clk); cfg = c; start = 1;
    @(negedge clk); start = 0; cfg = '0;   // the engine must have latched it
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != n * (t + 3) + 1) begin
      failures++; $display("FAIL latency %0d expected %0d", cyc, n * (t + 3) + 1);
    end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (mem[out_lo + i] !== exp[i]) begin
        failures++;
        if (failures < 20) $display("FAIL out[%0d] got %0d expected %0d", i, mem[out_lo+i], exp[i]);
      end
    end
    checks++;
    if (stray != 0) begin failures++; $display("FAIL %0d stray writes", stray); end
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

  initial begin
    start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // convolution 2x7x7 -> 3x5x5, 3x3 kernel
    run(mk(OP_CONV, 2, 7, 7, 3, 5, 5, 3, 1, 100, 1000, 1200, 4000), 300);
    // convolution with stride 2: 3x9x9 -> 2x4x4, 3x3 kernel
    run(mk(OP_CONV, 3, 9, 9, 2, 4, 4, 3, 2, 0, 2000, 2100, 5000), 300);
    // 2x2 max pool, stride 2: 4x8x8 -> 4x4x4
    run(mk(OP_POOL, 4, 8, 8, 4, 4, 4, 2, 2, 300, 0, 0, 6000), 30000);
    // fully connected 40 -> 12
    run(mk(OP_CONV, 40, 1, 1, 12, 1, 1, 1, 1, 64, 1500, 2400, 7000), 400);
    // large values: outputs saturate
    run(mk(OP_CONV, 4, 3, 3, 4, 1, 1, 3, 1, 0, 200, 400, 7500), 30000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
