// tb_word_serializer: self-checking test of the packet-to-byte splitter.
//
// Runs a 2-byte and a 6-byte instance side by side, feeds each random words
// and takes bytes with random back-pressure. Checks that every word comes
// out most significant byte first, in order, with none lost or repeated,
// and that a word is not accepted while the previous one is still leaving.
module tb_word_serializer;
  localparam int unsigned N = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // 2-byte instance
  logic        a_in_valid, a_in_ready, a_out_valid, a_out_ready;
  logic [15:0] a_in_data;
  logic [7:0]  a_out_data;
  word_serializer #(.BYTES(2)) dut2 (
    .clk, .rst_n, .in_valid(a_in_valid), .in_data(a_in_data), .in_ready(a_in_ready),
    .out_valid(a_out_valid), .out_data(a_out_data), .out_ready(a_out_ready));

  // 6-byte instance
  logic        b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  logic [47:0] b_in_data;
  logic [7:0]  b_out_data;
  word_serializer #(.BYTES(6)) dut6 (
    .clk, .rst_n, .in_valid(b_in_valid), .in_data(b_in_data), .in_ready(b_in_ready),
    .out_valid(b_out_valid), .out_data(b_out_data), .out_ready(b_out_ready));

  logic [7:0] exp_a [$];
  logic [7:0] exp_b [$];
  int got_a = 0, got_b = 0, words_a = 0, words_b = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producers and consumers, all driven at the falling edge
  always @(negedge clk) begin
    if (rst_n) begin
      a_out_ready <= ($urandom_range(0, 3) != 0);
      b_out_ready <= ($urandom_range(0, 2) != 0);
      if (!a_in_valid && words_a < N && $urandom_range(0, 1)) begin
        a_in_valid <= 1'b1;
        a_in_data  <= 16'($urandom);
      end
      if (!b_in_valid && words_b < N && $urandom_range(0, 1)) begin
        b_in_valid <= 1'b1;
        b_in_data  <= {16'($urandom), 32'($urandom)};
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (a_in_valid && a_in_ready) begin
        exp_a.push_back(a_in_data[15:8]);
        exp_a.push_back(a_in_data[7:0]);
        words_a++;
        a_in_valid <= 1'b0;
      end
      if (b_in_valid && b_in_ready) begin
        for (int k = 5; k >= 0; k--) exp_b.push_back(b_in_data[8*k +: 8]);
        words_b++;
        b_in_valid <= 1'b0;
      end
      if (a_out_valid && a_out_ready) begin
        check(exp_a.size() > 0 && a_out_data == exp_a[0],
              $sformatf("2-byte: got %02x expected %02x", a_out_data, exp_a[0]));
        void'(exp_a.pop_front());
        got_a++;
      end
      if (b_out_valid && b_out_ready) begin
        check(exp_b.size() > 0 && b_out_data == exp_b[0],
              $sformatf("6-byte: got %02x expected %02x", b_out_data, exp_b[0]));
        void'(exp_b.pop_front());
        got_b++;
      end
      // a new word may only be taken once the previous one has fully left
      if (a_in_ready) check(!a_out_valid, "2-byte ready only when empty");
      if (b_in_ready) check(!b_out_valid, "6-byte ready only when empty");
    end
  end

  initial begin
    a_in_valid = 1'b0; b_in_valid = 1'b0;
    a_in_data = '0; b_in_data = '0;
    a_out_ready = 1'b0; b_out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (words_a == N && words_b == N);
    repeat (50) @(posedge clk);
    check(got_a == 2 * N, $sformatf("2-byte instance delivered %0d bytes", got_a));
    check(got_b == 6 * N, $sformatf("6-byte instance delivered %0d bytes", got_b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
