// tb_private_mem: both read ports and the write port against a reference
// array, including a read of the address written in the same cycle (old
// data expected).
module tb_private_mem;
  localparam int DEPTH = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [11:0] ra_addr, rb_addr, waddr;
  logic [15:0] ra_data, rb_data, wdata;
  logic we;
  int checks = 0, failures = 0;
  logic [15:0] ref_mem [DEPTH];

  private_mem #(.DEPTH(DEPTH), .DATA_W(16)) dut (.clk, .ra_addr, .ra_data, .rb_addr, .rb_data,
                                                 .we, .waddr, .wdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra_addr = 0; rb_addr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 12'(i); wdata = 16'($urandom); ref_mem[i] = wdata;
    end
    for (int n = 0; n < 20000; n++) begin
      logic [15:0] ea, eb;
      @(negedge clk);
      ra_addr = 12'($urandom); rb_addr = 12'($urandom);
      we = $urandom_range(0, 1); waddr = ($urandom_range(0, 3) == 0) ? ra_addr : 12'($urandom);
      wdata = 16'($urandom);
      ea = ref_mem[ra_addr]; eb = ref_mem[rb_addr];
      if (we) ref_mem[waddr] = wdata;
      @(posedge clk); #1;
      checks += 2;
      if (ra_data !== ea) begin failures++; $display("FAIL A @%0d got %h exp %h", ra_addr, ra_data, ea); end
      if (rb_data !== eb) begin failures++; $display("FAIL B @%0d got %h exp %h", rb_addr, rb_data, eb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
