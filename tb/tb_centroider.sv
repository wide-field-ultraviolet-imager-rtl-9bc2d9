// tb_centroider: self-checking test of photon event detection and
// centroiding.
//
// Builds pictures with a noisy dark background and photon splashes of
// random shape and brightness, some touching the frame edges and some with
// flat (tied) tops, streams them with random gaps, and compares the event
// list with one computed here directly from the picture by the rule the
// block implements: centre above threshold, strictly brighter than the four
// neighbours before it in raster order and not darker than the four after
// it; centroid offset = trunc(16 * (right column - left column) / window sum)
// and likewise for rows. Also checks the time stamp and the three-cycle
// latency from the pixel that completes a window.
module tb_centroider;
  import wifi_pkg::*;
  localparam int unsigned H = 24;
  localparam int unsigned V = 16;
  localparam int unsigned NFRAMES = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pix_valid;
  logic [7:0] pix_data, threshold;
  logic [$clog2(H+1)-1:0] pix_x;
  logic [$clog2(V+1)-1:0] pix_y;
  logic [15:0] timestamp;
  logic ev_valid;
  photon_event_t ev;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  centroider #(.H_ACTIVE(H), .V_ACTIVE(V)) dut (.*);

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

  int img [V][H];
  photon_event_t expq [$];
  longint        exp_time [$];   // cycle at which each event is due
  longint        pix_time [V][H];
  int            nev = 0;

  function automatic int px(int x, int y);
    return img[y][x];
  endfunction

  task automatic make_picture(int seed_spots);
    foreach (img[y, x]) img[y][x] = $urandom_range(0, 12);
    for (int s = 0; s < seed_spots; s++) begin
      int cx, cy, pk;
      cx = $urandom_range(0, H - 1);
      cy = $urandom_range(0, V - 1);
      pk = $urandom_range(60, 250);
      for (int dy = -1; dy <= 1; dy++)
        for (int dx = -1; dx <= 1; dx++) begin
          int x, y, v;
          x = cx + dx; y = cy + dy;
          if (x < 0 || y < 0 || x >= H || y >= V) continue;
          v = (dx == 0 && dy == 0) ? pk : pk * $urandom_range(10, 60) / 100;
          if (s % 5 == 4 && dx == 1 && dy == 0) v = pk;   // flat top
          if (v > img[y][x]) img[y][x] = v;
        end
    end
  endtask

  task automatic reference(logic [15:0] ts);
    for (int y = 1; y < V - 1; y++)
      for (int x = 1; x < H - 1; x++) begin
        int c, s, sx, sy, fx, fy;
        bit hit;
        c = px(x, y);
        hit = c > threshold &&
              c > px(x-1, y-1) && c > px(x, y-1) && c > px(x+1, y-1) && c > px(x-1, y) &&
              c >= px(x+1, y) && c >= px(x-1, y+1) && c >= px(x, y+1) && c >= px(x+1, y+1);
        if (!hit) continue;
        s = 0; sx = 0; sy = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            s  += px(x+dx, y+dy);
            sx += dx * px(x+dx, y+dy);
            sy += dy * px(x+dx, y+dy);
          end
        fx = (sx * 16) / s;
        fy = (sy * 16) / s;
        expq.push_back('{x_q: 16'(x * 16 + fx), y_q: 16'(y * 16 + fy), timestamp: ts});
      end
  endtask

  always @(posedge clk) begin
    if (rst_n && ev_valid) begin
      nev++;
      if (expq.size() == 0) begin
        check(0, $sformatf("unexpected event x=%h y=%h", ev.x_q, ev.y_q));
      end else begin
        photon_event_t e;
        e = expq.pop_front();
        check(ev == e, $sformatf("event: got x=%0d/16 y=%0d/16 t=%0d, expected x=%0d/16 y=%0d/16 t=%0d",
                                 ev.x_q, ev.y_q, ev.timestamp, e.x_q, e.y_q, e.timestamp));
      end
    end
  end

  // latency: the event for centre (x, y) must appear 3 cycles after the edge
  // that took pixel (x+1, y+1)
  always @(posedge clk) begin
    if (rst_n && dut.hit) begin
      int x, y;
      x = int'(dut.x2) - 1;
      y = int'(dut.y2) - 1;
      exp_time.push_back(pix_time[y+1][x+1] + 40);
    end
    if (rst_n && ev_valid) begin
      longint due;
      due = exp_time.pop_front();
      // ev_valid is set by the third edge after the pixel edge, so this
      // block first sees it on the fourth
      check($time == due, $sformatf("event latency: seen at %0t, due %0t", $time, due));
    end
  end

  initial begin
    pix_valid = 0; pix_data = '0; pix_x = '0; pix_y = '0;
    threshold = 8'd40; timestamp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFRAMES; f++) begin
      make_picture(6 + 2 * f);
      @(negedge clk);
      timestamp = 16'(100 + f);
      reference(timestamp);
      for (int y = 0; y < V; y++)
        for (int x = 0; x < H; x++) begin
          repeat ((f % 2) ? 0 : $urandom_range(0, 3)) @(negedge clk);
          pix_valid = 1;
          pix_data  = 8'(img[y][x]);
          pix_x     = ($clog2(H+1))'(x);
          pix_y     = ($clog2(V+1))'(y);
          pix_time[y][x] = $time + 5;   // time of the edge that takes it
          @(negedge clk);
          pix_valid = 0;
        end
      repeat (10) @(negedge clk);
      check(expq.size() == 0, $sformatf("frame %0d: %0d expected events missing", f, expq.size()));
      expq.delete();
    end
    check(nev > 20, $sformatf("only %0d events seen", nev));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
