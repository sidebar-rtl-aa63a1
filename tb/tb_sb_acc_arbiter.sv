// tb_sb_acc_arbiter: five requesters with random traffic behind a downstream
// port that grants at random and returns read data one cycle after a grant.
// Checks each cycle that the forwarded request is the lowest-index one, that
// only it sees the grant, and that read data and rvalid come back to the
// port that issued the read, with the right data.
module tb_sb_acc_arbiter;
  import sidebar_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sb_req_t req [N];
  sb_rsp_t rsp [N];
  sb_req_t m_req;
  sb_rsp_t m_rsp;
  int checks = 0, failures = 0;

  sb_acc_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .rsp, .m_req, .m_rsp);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", what, $time); end
  endtask

  // downstream model: random grant, data = ~address, next cycle
  logic down_gnt;
  logic rv_q;
  logic [31:0] rd_q;
  always_comb begin
    m_rsp.gnt = down_gnt && m_req.req;
    m_rsp.rvalid = rv_q;
    m_rsp.rdata = rd_q;
  end
  always_ff @(posedge clk) begin
    rv_q <= m_rsp.gnt && !m_req.we;
    rd_q <= ~32'(m_req.addr);
  end

  int exp_port;      // port whose read was granted last cycle, -1 if none
  int grants [N];

  initial begin
    for (int i = 0; i < N; i++) begin req[i] = '0; grants[i] = 0; end
    down_gnt = 0; exp_port = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      int lowest, g;
      @(negedge clk);
      // keep pending requests, start new ones at random
      for (int i = 0; i < N; i++) begin
        if (!req[i].req && $urandom_range(0, 2) == 0) begin
          req[i].req = 1; req[i].we = $urandom_range(0, 1);
          req[i].addr = SB_AW'($urandom); req[i].wdata = $urandom;
        end
      end
      down_gnt = $urandom_range(0, 3) != 0;
      #1;
      lowest = -1;
      for (int i = N - 1; i >= 0; i--) if (req[i].req) lowest = i;
      chk(m_req.req == (lowest >= 0), "m_req.req");
      if (lowest >= 0) begin
        chk(m_req.addr == req[lowest].addr && m_req.we == req[lowest].we &&
            m_req.wdata == req[lowest].wdata, "forwarded fields");
      end
      g = 0;
      for (int i = 0; i < N; i++) begin
        chk(rsp[i].gnt == (i == lowest && down_gnt), "grant routing");
        g += rsp[i].gnt;
        // read return of the previous grant
        chk(rsp[i].rvalid == (i == exp_port), "rvalid routing");
        if (i == exp_port) chk(rsp[i].rdata == rd_q, "rdata");
      end
      exp_port = -1;
      if (lowest >= 0 && down_gnt) begin
        grants[lowest]++;
        if (!req[lowest].we) exp_port = lowest;
      end
      @(posedge clk);
      #1;
      if (lowest >= 0 && down_gnt) req[lowest].req = 0;
    end
    for (int i = 0; i < N; i++) chk(grants[i] > 0, $sformatf("port %0d served", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
