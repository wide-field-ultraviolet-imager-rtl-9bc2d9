// tb_cmos_capture: self-checking test of the sensor video port receiver.
//
// A behavioural sensor sends frames of a random picture with the system
// clock four times faster than the pixel clock. The test checks that every
// pixel of an armed frame arrives once, in raster order, with the right
// value and coordinates; that sof and eof mark each frame once; that a frame
// whose sync arrives while arm is low is ignored entirely (the readout has
// stopped reading the sensor); and that capture resumes once re-armed.
module tb_cmos_capture;
  localparam int unsigned H = 16;
  localparam int unsigned V = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic arm;
  logic cam_pclk, cam_href, cam_vsync;
  logic [7:0] cam_data;
  logic pix_valid, sof, eof, in_frame;
  logic [7:0] pix_data;
  logic [$clog2(H+1)-1:0] pix_x;
  logic [$clog2(V+1)-1:0] pix_y;
  int frames_started;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cmos_sensor_model #(.H_ACTIVE(H), .V_ACTIVE(V), .HBLANK(5), .VBLANK(3), .PCLK_HALF(20)) u_cam (
    .run(1'b1), .pclk(cam_pclk), .href(cam_href), .vsync(cam_vsync), .data(cam_data),
    .frames_started);

  cmos_capture #(.H_ACTIVE(H), .V_ACTIVE(V)) dut (
    .clk, .rst_n, .cam_pclk, .cam_href, .cam_vsync, .cam_data, .arm,
    .pix_valid, .pix_data, .pix_x, .pix_y, .sof, .eof, .in_frame);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int idx = 0, nsof = 0, neof = 0, pix_in_frame = 0;
  bit armed_frame = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (sof) begin
        nsof++;
        idx = 0;
        check(in_frame, "in_frame rises with sof");
      end
      if (pix_valid) begin
        int ex, ey;
        ex = idx % H;
        ey = idx / H;
        check(pix_x == ex && pix_y == ey && pix_data == u_cam.img[ey * H + ex],
              $sformatf("pixel %0d: got (%0d,%0d)=%02x expected (%0d,%0d)=%02x",
                        idx, pix_x, pix_y, pix_data, ex, ey, u_cam.img[ey * H + ex]));
        idx++;
      end
      if (eof) begin
        neof++;
        check(idx == H * V, $sformatf("frame held %0d pixels, expected %0d", idx, H * V));
      end
    end
  end

  initial begin
    int f0, s0;
    arm = 1'b0;
    foreach (u_cam.img[i]) u_cam.img[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    arm = 1'b1;
    // two armed frames
    wait (neof == 2);
    arm = 1'b0;
    f0 = frames_started;
    s0 = nsof;
    // let the sensor send one more whole frame while not armed
    wait (frames_started == f0 + 2);
    check(nsof == s0, "no frame started while arm was low");
    check(idx == H * V, "no pixels taken while arm was low");
    arm = 1'b1;
    wait (neof == 3);
    repeat (10) @(posedge clk);
    check(nsof == 3 && neof == 3, $sformatf("sof %0d eof %0d, expected 3 each", nsof, neof));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
