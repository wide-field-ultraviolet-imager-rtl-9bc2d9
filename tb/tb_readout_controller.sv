// tb_readout_controller: self-checking test of the frame transfer sequencer.
//
// A pixel source stands in for the capture block: whenever the controller
// arms it, it delivers one frame (sof, pixels in raster order with gaps,
// eof). The controller stores the frame in a frame buffer and sends it back
// as packets on two outputs with random back-pressure. The test checks every
// packet (pixel value, row ID = row mod 16, frame ID = frame mod 16) against
// the picture it sent, over 18 frames so that both IDs wrap, with the
// outputs enabled in turn both, serial only and storage only. It also
// checks that arm is low while a frame is being sent, and that pixels
// offered while not armed do not reach the outputs.
module tb_readout_controller;
  import wifi_pkg::*;
  localparam int unsigned H  = 8;
  localparam int unsigned V  = 20;
  localparam int unsigned N  = H * V;
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned NF = 18;

  logic clk = 1'b0, rst_n = 1'b0;
  logic enable, uart_en, store_en, arm;
  logic pix_valid, sof, eof;
  logic [7:0] pix_data;
  logic [$clog2(H+1)-1:0] pix_x;
  logic [$clog2(V+1)-1:0] pix_y;
  logic mem_we, mem_re;
  logic [AW-1:0] mem_waddr, mem_raddr;
  logic [7:0] mem_wdata, mem_rdata;
  logic uart_valid, uart_ready, store_valid, store_ready, busy, frame_done;
  frame_packet_t uart_pkt, store_pkt;
  logic [3:0] frame_id;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  readout_controller #(.H_ACTIVE(H), .V_ACTIVE(V)) dut (.*);
  frame_buffer #(.WIDTH(8), .DEPTH(N)) u_mem (
    .clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] pic [NF][N];
  int frame_sent = 0;     // frames delivered by the source
  int u_idx = 0, s_idx = 0, u_frame = 0, s_frame = 0;

  // enables per frame: 0 both, 1 serial only, 2 storage only
  function automatic bit u_on(int f); return (f % 3) != 2; endfunction
  function automatic bit s_on(int f); return (f % 3) != 1; endfunction

  // pixel source
  initial begin
    pix_valid = 0; sof = 0; eof = 0; pix_data = '0; pix_x = '0; pix_y = '0;
    foreach (pic[f, i]) pic[f][i] = 8'($urandom);
    wait (rst_n);
    for (int f = 0; f < NF; f++) begin
      // pixels offered while not armed must be ignored
      @(negedge clk);
      if (!arm) begin
        pix_valid = 1; pix_data = 8'hEE; pix_x = '0; pix_y = '0;
        @(negedge clk);
        pix_valid = 0;
      end
      while (!arm) @(negedge clk);
      uart_en  = u_on(f);
      store_en = s_on(f);
      repeat ($urandom_range(1, 4)) @(negedge clk);
      sof = 1;
      @(negedge clk);
      sof = 0;
      for (int i = 0; i < N; i++) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        pix_valid = 1;
        pix_data  = pic[f][i];
        pix_x     = ($clog2(H+1))'(i % H);
        pix_y     = ($clog2(V+1))'(i / H);
        @(negedge clk);
        pix_valid = 0;
      end
      eof = 1;
      @(negedge clk);
      eof = 0;
      frame_sent++;
      // garbage while the frame is being sent
      repeat (5) begin
        pix_valid = 1; pix_data = 8'h5A; pix_x = '0; pix_y = '0;
        @(negedge clk);
        pix_valid = 0;
        @(negedge clk);
      end
    end
  end

  // output consumers
  always @(negedge clk) begin
    uart_ready  <= ($urandom_range(0, 2) == 0);
    store_ready <= ($urandom_range(0, 1) == 0);
  end

  always @(posedge clk) begin
    if (rst_n) begin
      // sending: the sensor must not be armed
      if (uart_valid || store_valid) check(!arm, "arm low while sending");
      if (uart_valid && uart_ready) begin
        check(uart_pkt.pixel == pic[u_frame][u_idx] &&
              uart_pkt.row_id == 4'((u_idx / H) % 16) &&
              uart_pkt.frame_id == 4'(u_frame % 16),
              $sformatf("serial frame %0d pixel %0d: got %h", u_frame, u_idx, uart_pkt));
        u_idx++;
      end
      if (store_valid && store_ready) begin
        check(store_pkt.pixel == pic[s_frame][s_idx] &&
              store_pkt.row_id == 4'((s_idx / H) % 16) &&
              store_pkt.frame_id == 4'(s_frame % 16),
              $sformatf("storage frame %0d pixel %0d: got %h", s_frame, s_idx, store_pkt));
        s_idx++;
      end
      if (frame_done) begin
        int f;
        f = (u_frame > s_frame) ? u_frame : s_frame;
        check(u_idx == (u_on(f) ? N : 0), $sformatf("frame %0d: %0d serial packets", f, u_idx));
        check(s_idx == (s_on(f) ? N : 0), $sformatf("frame %0d: %0d storage packets", f, s_idx));
        u_idx = 0; s_idx = 0;
        u_frame = f + 1; s_frame = f + 1;
      end
    end
  end

  initial begin
    enable = 0; uart_en = 1; store_en = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    enable = 1;
    wait (u_frame == NF);
    check(frame_id == 4'(NF % 16), $sformatf("frame_id %0d after %0d frames", frame_id, NF));
    enable = 0;
    repeat (20) @(posedge clk);
    check(!busy && !arm, "controller rests when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
