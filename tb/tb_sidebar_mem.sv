// tb_sidebar_mem: random reads and writes against a reference array.
// Checks that a read returns the last word written to that address one cycle
// later and that rdata holds while no read is made.
module tb_sidebar_mem;
  localparam int DEPTH = 8192;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [12:0] addr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [DEPTH];

  sidebar_mem #(.DEPTH(DEPTH), .DATA_W(32)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, exp);
    end
  endtask

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    // fill every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 13'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    // random mix
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      we = $urandom_range(0, 1);
      addr = 13'($urandom_range(0, DEPTH - 1));
      wdata = $urandom;
      if (en && !we) begin
        logic [31:0] exp;
        logic [12:0] a;
        exp = ref_mem[addr]; a = addr;
        @(negedge clk); en = 0;
        check(exp, $sformatf("read %0d", a));
        @(negedge clk);
        check(exp, "hold");
      end else if (en && we) begin
        ref_mem[addr] = wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
