// tb_sidebar: ownership and flag protocol of the Sidebar.
// Checks reset ownership, owner reads and writes, that a non-owner request
// waits with gnt low until the flag hands ownership over, that flag reads are
// served to both sides at any time, that a non-owner flag write waits, the
// handover pulse, and that data written by one side is read by the other.
module tb_sidebar;
  import sidebar_pkg::*;
  localparam int DEPTH = 8192;
  localparam logic [SB_AW-1:0] FLAG = SB_AW'(DEPTH - 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sb_req_t host_req, acc_req;
  sb_rsp_t host_rsp, acc_rsp;
  logic owner_host, handover;
  int checks = 0, failures = 0;
  int handovers = 0;

  sidebar #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .host_req, .host_rsp, .acc_req, .acc_rsp,
                                .owner_host, .handover);

  always @(posedge clk) if (rst_n && handover) handovers++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // one access on a side; returns the cycles waited for the grant and read data
  task automatic access(input bit host, input bit we, input logic [SB_AW-1:0] a,
                        input logic [31:0] d, output int waited, output logic [31:0] rd);
    sb_req_t r;
    r.req = 1; r.we = we; r.addr = a; r.wdata = d;
    waited = 0;
    @(negedge clk);
    if (host) host_req = r; else acc_req = r;
    // gnt is sampled at the clock edge, before the edge's updates
    forever begin
      @(posedge clk);
      if (host ? host_rsp.gnt : acc_rsp.gnt) break;
      waited++;
    end
    #1;
    if (host) host_req.req = 0; else acc_req.req = 0;
    rd = '0;
    if (!we) begin
      // data returns in the cycle after the grant
      rd = host ? host_rsp.rdata : acc_rsp.rdata;
      expect_eq(32'(host ? host_rsp.rvalid : acc_rsp.rvalid), 32'd1, "rvalid");
    end
  endtask

  logic [31:0] rd;
  int w;
  logic [31:0] pattern [16];

  initial begin
    host_req = '0; acc_req = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    expect_eq(32'(owner_host), 0, "reset owner");

    // accelerator owns: writes and reads back
    for (int i = 0; i < 16; i++) begin
      pattern[i] = $urandom;
      access(0, 1, SB_AW'(i), pattern[i], w, rd);
      expect_eq(w, 0, "owner write not stalled");
    end
    access(0, 0, 3, 0, w, rd);
    expect_eq(rd, pattern[3], "acc read back");

    // host polls the flag: granted at once, reads 0
    access(1, 0, FLAG, 0, w, rd);
    expect_eq(w, 0, "host flag read granted");
    expect_eq(rd, 0, "flag low");

    // host data read while the accelerator owns: must wait until handover
    fork
      begin
        access(1, 0, 5, 0, w, rd);
        expect_eq(rd, pattern[5], "host reads accelerator data");
        checks++;
        if (w < 10) begin failures++; $display("FAIL host not stalled, waited %0d", w); end
      end
      begin
        int w2; logic [31:0] r2;
        repeat (12) @(posedge clk);
        // accelerator may still read its own data meanwhile
        access(0, 0, 7, 0, w2, r2);
        expect_eq(r2, pattern[7], "acc read while host waits");
        access(0, 1, FLAG, 1, w2, r2);   // hand over
      end
    join
    expect_eq(32'(owner_host), 1, "host owns after flag write");

    // accelerator now stalls on data, but its flag reads are served and read 1
    access(0, 0, FLAG, 0, w, rd);
    expect_eq(rd, 1, "acc sees flag high");
    expect_eq(w, 0, "acc flag read not stalled");
    fork
      begin
        access(0, 0, 9, 0, w, rd);
        expect_eq(rd, 32'hCAFE0009, "acc reads host result");
        checks++;
        if (w < 5) begin failures++; $display("FAIL acc not stalled, waited %0d", w); end
      end
      begin
        int w2; logic [31:0] r2;
        access(1, 1, 9, 32'hCAFE0009, w2, r2);
        // a flag write by the accelerator now would wait: checked below
        repeat (6) @(posedge clk);
        access(1, 1, FLAG, 0, w2, r2);   // pull low
      end
    join
    expect_eq(32'(owner_host), 0, "acc owns again");

    // non-owner flag write waits for ownership
    fork
      begin
        access(1, 1, FLAG, 0, w, rd);
        checks++;
        if (w < 4) begin failures++; $display("FAIL host flag write not stalled"); end
      end
      begin
        int w2; logic [31:0] r2;
        repeat (5) @(posedge clk);
        access(0, 1, FLAG, 1, w2, r2);
      end
    join
    expect_eq(32'(owner_host), 0, "host gave it back");

    // simultaneous data requests: exactly the owner is granted
    @(negedge clk);
    host_req = '{req: 1, we: 0, addr: 1, wdata: 0};
    acc_req  = '{req: 1, we: 0, addr: 2, wdata: 0};
    @(posedge clk);
    expect_eq({31'd0, host_rsp.gnt}, 0, "host not granted");
    expect_eq({31'd0, acc_rsp.gnt}, 1, "acc granted");
    #1; host_req = '0; acc_req = '0;
    expect_eq(acc_rsp.rdata, pattern[2], "acc read in contention");
    expect_eq({31'd0, host_rsp.rvalid}, 0, "no host rvalid");

    checks++;
    if (handovers != 4) begin failures++; $display("FAIL handovers %0d", handovers); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
