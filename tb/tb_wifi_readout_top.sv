// tb_wifi_readout_top: end-to-end test of the readout at reduced size.
//
// A behavioural sensor (24 x 12 pixels) feeds the readout; the serial line
// is decoded by a receiver model. The test runs:
//   1. frame transfer with serial and storage outputs: every 16-bit packet
//      on both is checked against the picture (pixel, row ID, frame ID);
//   2. a mode switch to photon counting; a sparse picture of photon
//      splashes gives events whose 48-bit records on the serial line are
//      checked against a centroid computed here, with their time stamps;
//   3. a dense picture that overruns the event queue, so that events are
//      dropped and counted;
//   4. a switch back to frame transfer, storage only, checked again;
//   5. a sensor register write on the control bus.
// It counts how often each mechanism happened (frame sent, sensor left
// unread during a transfer, storage back-pressure, mode switch, photon
// event, event queue overflow, register write) and fails any that never did.
module tb_wifi_readout_top;
  import wifi_pkg::*;
  localparam int unsigned H   = 24;
  localparam int unsigned V   = 12;
  localparam int unsigned N   = H * V;
  localparam int unsigned CPB = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  readout_mode_e mode, active_mode;
  logic uart_en, store_en;
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

  cmos_sensor_model #(.H_ACTIVE(H), .V_ACTIVE(V), .HBLANK(6), .VBLANK(3), .PCLK_HALF(20)) u_cam (
    .run(1'b1), .pclk(cam_pclk), .href(cam_href), .vsync(cam_vsync), .data(cam_data),
    .frames_started);

  wifi_readout_top #(.H_ACTIVE(H), .V_ACTIVE(V), .CLKS_PER_BIT(CPB), .SCCB_QUARTER(4),
                     .EV_FIFO_DEPTH(4)) dut (.*);

  uart_rx_model #(.CLKS_PER_BIT(CPB)) u_rx (.clk, .rxd(uart_txd), .framing_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters --------------------------------
  int n_frame_sent = 0, n_unread = 0, n_backpressure = 0, n_switch = 0;
  int n_event = 0, n_overflow = 0, n_cfg = 0;
  readout_mode_e last_mode;
  int started_at_done;

  always @(posedge clk) begin
    if (rst_n) begin
      if (frame_sent) n_frame_sent++;
      if (store_valid && !store_ready) n_backpressure++;
      if (active_mode != last_mode) n_switch++;
      last_mode = active_mode;
      if (dut.ev_valid) n_event++;
      if (dut.ev_overflow) n_overflow++;
      if (cfg_done) n_cfg++;
    end
  end

  // ---------------- storage port checker -------------------------------
  frame_packet_t store_q [$];
  always @(negedge clk) store_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk)
    if (rst_n && store_valid && store_ready) store_q.push_back(store_data);

  // ---------------- picture helpers ------------------------------------
  function automatic int px(int x, int y);
    return int'(u_cam.img[y * H + x]);
  endfunction

  task automatic random_picture();
    foreach (u_cam.img[i]) u_cam.img[i] = 8'($urandom);
  endtask

  task automatic spot_picture(int nspots);
    foreach (u_cam.img[i]) u_cam.img[i] = 8'($urandom_range(0, 10));
    for (int s = 0; s < nspots; s++) begin
      int cx, cy, pk;
      // spots on a grid, clear of each other and of the edges
      cx = 2 + 4 * (s % 5) + $urandom_range(0, 1);
      cy = 2 + 4 * (s / 5) + $urandom_range(0, 1);
      pk = $urandom_range(120, 250);
      for (int dy = -1; dy <= 1; dy++)
        for (int dx = -1; dx <= 1; dx++)
          u_cam.img[(cy + dy) * H + cx + dx] =
            8'((dx == 0 && dy == 0) ? pk : pk * $urandom_range(10, 60) / 100);
    end
  endtask

  // events expected from the current picture, raster order
  task automatic reference(ref photon_event_t q[$]);
    q.delete();
    for (int y = 1; y < V - 1; y++)
      for (int x = 1; x < H - 1; x++) begin
        int c, s, sx, sy;
        c = px(x, y);
        if (!(c > threshold &&
              c > px(x-1, y-1) && c > px(x, y-1) && c > px(x+1, y-1) && c > px(x-1, y) &&
              c >= px(x+1, y) && c >= px(x-1, y+1) && c >= px(x, y+1) && c >= px(x+1, y+1)))
          continue;
        s = 0; sx = 0; sy = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            s  += px(x+dx, y+dy);
            sx += dx * px(x+dx, y+dy);
            sy += dy * px(x+dx, y+dy);
          end
        q.push_back('{x_q: 16'(x * 16 + (sx * 16) / s), y_q: 16'(y * 16 + (sy * 16) / s),
                      timestamp: 16'(0)});
      end
  endtask

  task automatic check_frame_packets(frame_packet_t got [$], logic [3:0] fid, string where);
    check(got.size() == N, $sformatf("%s: %0d packets, expected %0d", where, got.size(), N));
    for (int i = 0; i < N && i < got.size(); i++)
      check(got[i].pixel == u_cam.img[i] && got[i].row_id == 4'((i / H) % 16) &&
            got[i].frame_id == fid,
            $sformatf("%s: packet %0d = %h, expected pixel %02x row %0d frame %0d",
                      where, i, got[i], u_cam.img[i], (i / H) % 16, fid));
  endtask

  // ---------------- test sequence --------------------------------------
  initial begin
    frame_packet_t uq [$];
    photon_event_t refq [$];
    int f0;
    mode = MODE_FRAME_TRANSFER; uart_en = 1; store_en = 1; threshold = 8'd60;
    cfg_valid = 0; cfg_addr = '0; cfg_data = '0;
    last_mode = MODE_FRAME_TRANSFER;
    random_picture();
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. frame transfer, both outputs
    wait (n_frame_sent == 1);
    started_at_done = frames_started;
    wait (u_rx.rx_bytes.size() == 2 * N);
    repeat (20 * CPB) @(posedge clk);
    check(u_rx.rx_bytes.size() == 2 * N, $sformatf("serial bytes %0d", u_rx.rx_bytes.size()));
    for (int i = 0; i + 1 < u_rx.rx_bytes.size(); i += 2)
      uq.push_back({u_rx.rx_bytes[i], u_rx.rx_bytes[i + 1]});
    check_frame_packets(uq, 4'd0, "serial");
    check_frame_packets(store_q, 4'd0, "storage");
    u_rx.rx_bytes.delete();
    store_q.delete();
    uq.delete();

    // the sensor kept sending frames while the frame was transferred
    n_unread = frames_started - 1;

    // 2. switch to photon counting with a sparse picture
    spot_picture(3);
    reference(refq);
    mode = MODE_PHOTON_COUNT;
    wait (active_mode == MODE_PHOTON_COUNT);
    f0 = n_event;
    wait (n_event >= f0 + 2 * refq.size());
    repeat (2 * 6 * 10 * CPB * 4) @(posedge clk);
    begin
      int ne;
      ne = u_rx.rx_bytes.size() / 6;
      check(ne >= 2 * refq.size(), $sformatf("%0d event records, expected at least %0d", ne, 2 * refq.size()));
      for (int k = 0; k < ne; k++) begin
        photon_event_t e, r;
        for (int b = 0; b < 6; b++) e[47 - 8 * b -: 8] = u_rx.rx_bytes[6 * k + b];
        r = refq[k % refq.size()];
        check(e.x_q == r.x_q && e.y_q == r.y_q,
              $sformatf("event %0d: x=%0d/16 y=%0d/16, expected x=%0d/16 y=%0d/16",
                        k, e.x_q, e.y_q, r.x_q, r.y_q));
        if (k >= refq.size()) begin
          logic [15:0] prev;
          prev = {u_rx.rx_bytes[6 * (k - refq.size()) + 4], u_rx.rx_bytes[6 * (k - refq.size()) + 5]};
          check(16'(e.timestamp - prev) == 16'd1, "time stamp advances by one per frame");
        end
      end
      check(events_dropped == 0, "no events dropped with a sparse picture");
    end

    // 3. dense picture: overrun the event queue
    spot_picture(10);
    wait (events_dropped > 0);
    repeat (2000) @(posedge clk);
    check(n_overflow > 0, "event queue overflowed");

    // 4. back to frame transfer, storage only
    random_picture();
    mode = MODE_FRAME_TRANSFER;
    uart_en = 0;
    wait (active_mode == MODE_FRAME_TRANSFER);
    u_rx.rx_bytes.delete();
    store_q.delete();
    wait (n_frame_sent == 2);
    repeat (20) @(posedge clk);
    check(u_rx.rx_bytes.size() == 0, "no serial output when disabled");
    check_frame_packets(store_q, 4'd1, "storage after switch");
    check(event_count - events_dropped >= 16'(u_rx.rx_bytes.size() / 6), "event accounting");

    // 5. sensor register write
    @(negedge clk);
    cfg_valid = 1; cfg_addr = 8'h12; cfg_data = 8'h80;
    @(negedge clk);
    cfg_valid = 0;
    wait (n_cfg == 1);

    check(framing_err == 0, "no serial framing errors");
    check(n_frame_sent >= 2,   $sformatf("frames sent: %0d", n_frame_sent));
    check(n_unread >= 1,       $sformatf("sensor frames left unread: %0d", n_unread));
    check(n_backpressure >= 1, $sformatf("storage back-pressure cycles: %0d", n_backpressure));
    check(n_switch >= 2,       $sformatf("mode switches: %0d", n_switch));
    check(n_event >= 1,        $sformatf("photon events: %0d", n_event));
    check(n_overflow >= 1,     $sformatf("event queue overflows: %0d", n_overflow));
    check(n_cfg >= 1,          $sformatf("register writes: %0d", n_cfg));
    $display("mechanisms: frames_sent=%0d unread_frames=%0d backpressure=%0d switches=%0d events=%0d overflows=%0d reg_writes=%0d",
             n_frame_sent, n_unread, n_backpressure, n_switch, n_event, n_overflow, n_cfg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
