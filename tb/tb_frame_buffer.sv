// tb_frame_buffer: self-checking test of the frame store.
//
// Fills a small instance with random words, then reads them back in random
// order and compares with a copy kept in the testbench. Checks the one-cycle
// read latency, that rdata holds while re is low, and read-before-write
// behaviour when the same address is read and written in one cycle.
module tb_frame_buffer;
  localparam int unsigned DEPTH = 96;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  frame_buffer #(.WIDTH(8), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    logic [7:0] held;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; waddr = AW'(i); wdata = 8'($urandom); model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 300; n++) begin
      a = $urandom_range(0, DEPTH - 1);
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0;
      check(rdata == model[a], $sformatf("read %0d: got %02x expected %02x", a, rdata, model[a]));
      held = rdata;
      raddr = AW'($urandom_range(0, DEPTH - 1));
      @(negedge clk);
      check(rdata == held, "rdata holds while re is low");
    end
    // same-address read and write: old value returned, new value stored
    a = 5;
    re = 1; raddr = AW'(a); we = 1; waddr = AW'(a); wdata = ~model[a];
    @(negedge clk);
    check(rdata == model[a], "read during write returns the old word");
    model[a] = ~model[a];
    we = 0;
    @(negedge clk);
    check(rdata == model[a], "new word stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
