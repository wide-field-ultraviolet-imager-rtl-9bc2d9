// tb_wifi_full_size: one complete operation of each mode at full size.
//
// The readout runs with all of its default parameters (1280 x 800 pixels,
// 115200 baud at 96 MHz, which the bench clock stands in for) against a
// behavioural sensor with a pixel clock a quarter of the system clock.
//   1. Frame transfer to the storage port: one whole frame of a random
//      picture is captured and all 1 024 000 packets are checked against it.
//      (Sending a full frame over the serial line would take about three
//      minutes of real time per frame, so the serial output is disabled
//      here; the reduced-size end-to-end test covers it.)
//   2. Photon counting: one whole frame with 24 photon splashes spread over
//      the detector; every event record on the serial line is checked
//      against centroids computed here.
module tb_wifi_full_size;
  import wifi_pkg::*;
  localparam int unsigned H   = 1280;
  localparam int unsigned V   = 800;
  localparam int unsigned N   = H * V;
  localparam int unsigned CPB = 833;
  localparam int unsigned NSPOTS = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  readout_mode_e mode, active_mode;
  logic uart_en, store_en, run_cam;
  logic [7:0] threshold;
  logic cam_pclk, cam_href, cam_vsync;
  logic [7:0] cam_data;
  logic cfg_valid, cfg_ready, cfg_done;
  logic [7:0] cfg_addr, cfg_data;
  logic sccb_sioc, sccb_siod_o, sccb_siod_oe, uart_txd;
  logic store_valid, store_ready;
  frame_packet_t store_data;
  logic [15:0] frame_count, event_count, events_dropped;
  logic [3:0] frame_id;
  logic frame_sent;
  int frames_started, framing_err;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cmos_sensor_model #(.H_ACTIVE(H), .V_ACTIVE(V), .HBLANK(40), .VBLANK(4), .PCLK_HALF(20)) u_cam (
    .run(run_cam), .pclk(cam_pclk), .href(cam_href), .vsync(cam_vsync), .data(cam_data),
    .frames_started);

  wifi_readout_top dut (.*);

  uart_rx_model #(.CLKS_PER_BIT(CPB)) u_rx (.clk, .rxd(uart_txd), .framing_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // storage port: compare packets on the fly
  int st_idx = 0, st_bad = 0;
  assign store_ready = 1'b1;
  always @(posedge clk) begin
    if (rst_n && store_valid) begin
      if (!(store_data.pixel == u_cam.img[st_idx] &&
            store_data.row_id == 4'((st_idx / H) % 16) && store_data.frame_id == 4'd0)) begin
        if (st_bad < 5) $display("FAIL: packet %0d = %h", st_idx, store_data);
        st_bad++;
      end
      st_idx++;
    end
  end

  function automatic int px(int x, int y);
    return int'(u_cam.img[y * H + x]);
  endfunction

  initial begin
    photon_event_t refq [$];
    mode = MODE_FRAME_TRANSFER; uart_en = 0; store_en = 1; threshold = 8'd60;
    cfg_valid = 0; cfg_addr = '0; cfg_data = '0;
    run_cam = 1'b1;
    foreach (u_cam.img[i]) u_cam.img[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. one frame transfer
    wait (frame_sent);
    @(posedge clk);
    check(st_idx == N, $sformatf("storage packets %0d, expected %0d", st_idx, N));
    check(st_bad == 0, $sformatf("%0d storage packets wrong", st_bad));

    // 2. one photon counting frame: the sensor is paused around the picture
    //    change so that exactly one frame of the spot picture is sent
    mode = MODE_PHOTON_COUNT;
    wait (active_mode == MODE_PHOTON_COUNT);
    run_cam = 1'b0;
    // let the frame in progress finish before the picture changes
    #((H + 40) * (V + 4) * 40);
    foreach (u_cam.img[i]) u_cam.img[i] = 8'($urandom_range(0, 10));
    for (int s = 0; s < NSPOTS; s++) begin
      int cx, cy, pk;
      cx = 2 + (s % 6) * 210 + $urandom_range(0, 100);
      cy = 2 + (s / 6) * 190 + $urandom_range(0, 100);
      pk = $urandom_range(120, 250);
      for (int dy = -1; dy <= 1; dy++)
        for (int dx = -1; dx <= 1; dx++)
          u_cam.img[(cy + dy) * H + cx + dx] =
            8'((dx == 0 && dy == 0) ? pk : pk * $urandom_range(10, 60) / 100);
    end
    for (int y = 1; y < V - 1; y++)
      for (int x = 1; x < H - 1; x++) begin
        int c, sm, sx, sy;
        c = px(x, y);
        if (!(c > threshold &&
              c > px(x-1, y-1) && c > px(x, y-1) && c > px(x+1, y-1) && c > px(x-1, y) &&
              c >= px(x+1, y) && c >= px(x-1, y+1) && c >= px(x, y+1) && c >= px(x+1, y+1)))
          continue;
        sm = 0; sx = 0; sy = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            sm += px(x+dx, y+dy);
            sx += dx * px(x+dx, y+dy);
            sy += dy * px(x+dx, y+dy);
          end
        refq.push_back('{x_q: 16'(x * 16 + (sx * 16) / sm), y_q: 16'(y * 16 + (sy * 16) / sm),
                         timestamp: 16'(0)});
      end
    check(refq.size() == NSPOTS, $sformatf("reference finds %0d events", refq.size()));
    run_cam = 1'b1;
    wait (frames_started > 0 && u_cam.vsync);
    run_cam = 1'b0;                       // this frame is the last one
    wait (u_rx.rx_bytes.size() == 6 * refq.size());
    repeat (20 * CPB) @(posedge clk);
    check(u_rx.rx_bytes.size() == 6 * refq.size(),
          $sformatf("%0d serial bytes, expected %0d", u_rx.rx_bytes.size(), 6 * refq.size()));
    for (int k = 0; k < refq.size() && 6 * k + 5 < u_rx.rx_bytes.size(); k++) begin
      photon_event_t e;
      for (int b = 0; b < 6; b++) e[47 - 8 * b -: 8] = u_rx.rx_bytes[6 * k + b];
      check(e.x_q == refq[k].x_q && e.y_q == refq[k].y_q && e.timestamp == frame_count,
            $sformatf("event %0d: x=%0d/16 y=%0d/16 t=%0d, expected x=%0d/16 y=%0d/16 t=%0d",
                      k, e.x_q, e.y_q, e.timestamp, refq[k].x_q, refq[k].y_q, frame_count));
    end
    check(events_dropped == 0, "no events dropped");
    check(framing_err == 0, "no serial framing errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
