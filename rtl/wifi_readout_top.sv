// wifi_readout_top: FPGA readout of the MCP-intensified CMOS detector.
//
// The detector is an MCP image intensifier whose phosphor screen is imaged
// onto a 1-megapixel CMOS sensor. The FPGA reads the sensor's video port and
// runs in one of two modes, switchable at run time:
//
//   frame transfer   whole frames are captured into the frame buffer; while
//                    a frame is being sent the sensor is not read. Each pixel
//                    leaves as a 16-bit packet (pixel, frame ID, row ID) on
//                    the serial line and/or the storage port.
//   photon counting  the pixel stream goes straight to the centroider; every
//                    photon event found becomes a 48-bit record (x, y, time
//                    stamp) that is queued and sent on the serial line.
//
// A register-write port drives the sensor's serial control bus. The sensor's
// master clock comes from a PLL outside this design, and the storage device
// (a micro SD card on the original board) is reached through the storage
// port, whose data a card controller outside this design is expected to take.
//
// Mode switching (this design's own rule): a change of `mode` takes effect
// only when the active mode has come to rest, that is the frame transfer
// controller has finished its frame, the capture block is between frames,
// and every queued byte has left the serial transmitter. The time stamp of
// an event is the number of frames captured since reset (modulo 2^16); one
// frame is the instrument's time resolution.
//
// Clocking: one system clock `clk`, which must run at least four times
// faster than the sensor's pixel clock; everything else is synchronous to
// it. Reset is asynchronous, active low.
module wifi_readout_top
  import wifi_pkg::*;
#(
  parameter int unsigned H_ACTIVE      = 1280,
  parameter int unsigned V_ACTIVE      = 800,
  parameter int unsigned CLKS_PER_BIT  = 833,
  parameter int unsigned SCCB_QUARTER  = 240,
  parameter int unsigned EV_FIFO_DEPTH = 16,
  localparam int unsigned XW           = $clog2(H_ACTIVE + 1),
  localparam int unsigned YW           = $clog2(V_ACTIVE + 1),
  localparam int unsigned AW           = $clog2(H_ACTIVE * V_ACTIVE)
) (
  input  logic             clk,
  input  logic             rst_n,
  // operating controls
  input  readout_mode_e    mode,
  input  logic             uart_en,      // frame transfer: send on serial line
  input  logic             store_en,     // frame transfer: send to storage
  input  logic [PIX_W-1:0] threshold,    // photon counting: event threshold
  // CMOS sensor video port
  input  logic             cam_pclk,
  input  logic             cam_href,
  input  logic             cam_vsync,
  input  logic [PIX_W-1:0] cam_data,
  // CMOS sensor control bus
  input  logic             cfg_valid,
  input  logic [7:0]       cfg_addr,
  input  logic [7:0]       cfg_data,
  output logic             cfg_ready,
  output logic             cfg_done,     // pulse: register write finished
  output logic             sccb_sioc,
  output logic             sccb_siod_o,
  output logic             sccb_siod_oe,
  // serial line
  output logic             uart_txd,
  // storage port (frame transfer packets)
  output logic             store_valid,
  output frame_packet_t    store_data,
  input  logic             store_ready,
  // status
  output readout_mode_e    active_mode,
  output logic [15:0]      frame_count,
  output logic [3:0]       frame_id,
  output logic             frame_sent,   // pulse: a frame transfer finished
  output logic [15:0]      event_count,
  output logic [15:0]      events_dropped
);

  // ---------------- sensor capture --------------------------------------
  logic             arm, ctrl_arm;
  logic             pix_valid, sof, eof, in_frame;
  logic [PIX_W-1:0] pix_data;
  logic [XW-1:0]    pix_x;
  logic [YW-1:0]    pix_y;

  cmos_capture #(.H_ACTIVE(H_ACTIVE), .V_ACTIVE(V_ACTIVE), .PIX_W(PIX_W)) u_capture (
    .clk, .rst_n,
    .cam_pclk, .cam_href, .cam_vsync, .cam_data,
    .arm,
    .pix_valid, .pix_data, .pix_x, .pix_y, .sof, .eof, .in_frame
  );

  logic pc_active, ft_active;
  assign pc_active = (active_mode == MODE_PHOTON_COUNT);
  assign ft_active = (active_mode == MODE_FRAME_TRANSFER);
  assign arm = ft_active ? ctrl_arm : (mode == MODE_PHOTON_COUNT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) frame_count <= '0;
    else if (sof) frame_count <= frame_count + 16'd1;
  end

  // ---------------- frame transfer path ---------------------------------
  logic             mem_we, mem_re;
  logic [AW-1:0]    mem_waddr, mem_raddr;
  logic [PIX_W-1:0] mem_wdata, mem_rdata;
  logic             ft_valid, ft_ready, ctrl_busy;
  frame_packet_t    ft_pkt;

  readout_controller #(.H_ACTIVE(H_ACTIVE), .V_ACTIVE(V_ACTIVE)) u_ctrl (
    .clk, .rst_n,
    .enable     (ft_active && (mode == MODE_FRAME_TRANSFER)),
    .uart_en, .store_en,
    .arm        (ctrl_arm),
    .pix_valid  (pix_valid && ft_active),
    .pix_data, .pix_x, .pix_y,
    .sof        (sof && ft_active),
    .eof        (eof && ft_active),
    .mem_we, .mem_waddr, .mem_wdata, .mem_re, .mem_raddr, .mem_rdata,
    .uart_valid (ft_valid),
    .uart_pkt   (ft_pkt),
    .uart_ready (ft_ready),
    .store_valid,
    .store_pkt  (store_data),
    .store_ready,
    .frame_id,
    .busy       (ctrl_busy),
    .frame_done (frame_sent)
  );

  frame_buffer #(.WIDTH(PIX_W), .DEPTH(H_ACTIVE * V_ACTIVE)) u_fbuf (
    .clk,
    .we (mem_we), .waddr (mem_waddr), .wdata (mem_wdata),
    .re (mem_re), .raddr (mem_raddr), .rdata (mem_rdata)
  );

  logic       ftb_valid, ftb_ready;
  logic [7:0] ftb_data;

  word_serializer #(.BYTES(2)) u_ft_ser (
    .clk, .rst_n,
    .in_valid (ft_valid), .in_data (ft_pkt), .in_ready (ft_ready),
    .out_valid (ftb_valid), .out_data (ftb_data), .out_ready (ftb_ready)
  );

  // ---------------- photon counting path --------------------------------
  logic          ev_valid, ev_overflow;
  photon_event_t ev;
  logic          evq_valid, evq_ready;
  photon_event_t evq_data;
  logic [$clog2(EV_FIFO_DEPTH):0] evq_count;

  centroider #(.H_ACTIVE(H_ACTIVE), .V_ACTIVE(V_ACTIVE)) u_centroid (
    .clk, .rst_n,
    .pix_valid (pix_valid && pc_active),
    .pix_data, .pix_x, .pix_y,
    .threshold,
    .timestamp (frame_count),
    .ev_valid, .ev
  );

  sync_fifo #(.WIDTH($bits(photon_event_t)), .DEPTH(EV_FIFO_DEPTH)) u_evq (
    .clk, .rst_n,
    .push (ev_valid), .in_data (ev), .overflow (ev_overflow),
    .out_valid (evq_valid), .out_data (evq_data), .out_ready (evq_ready),
    .count (evq_count)
  );

  logic       evb_valid, evb_ready, ev_ser_idle;
  logic [7:0] evb_data;

  word_serializer #(.BYTES(6)) u_ev_ser (
    .clk, .rst_n,
    .in_valid (evq_valid), .in_data (evq_data), .in_ready (evq_ready),
    .out_valid (evb_valid), .out_data (evb_data), .out_ready (evb_ready)
  );
  assign ev_ser_idle = !evb_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      event_count    <= '0;
      events_dropped <= '0;
    end else begin
      if (ev_valid)    event_count    <= event_count + 16'd1;
      if (ev_overflow) events_dropped <= events_dropped + 16'd1;
    end
  end

  // ---------------- serial line -----------------------------------------
  logic       tx_valid, tx_ready;
  logic [7:0] tx_data;

  always_comb begin
    tx_valid  = pc_active ? evb_valid : ftb_valid;
    tx_data   = pc_active ? evb_data  : ftb_data;
    evb_ready = pc_active && tx_ready;
    ftb_ready = ft_active && tx_ready;
  end

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n,
    .valid (tx_valid), .data (tx_data), .ready (tx_ready), .txd (uart_txd)
  );

  // ---------------- mode switching --------------------------------------
  logic at_rest;
  assign at_rest = !ctrl_busy && !in_frame && (evq_count == '0) &&
                   ev_ser_idle && !ftb_valid && tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) active_mode <= MODE_FRAME_TRANSFER;
    else if (mode != active_mode && at_rest) active_mode <= mode;
  end

  // ---------------- sensor control bus ----------------------------------
  sccb_master #(.QUARTER(SCCB_QUARTER)) u_sccb (
    .clk, .rst_n,
    .req_valid (cfg_valid), .req_addr (cfg_addr), .req_data (cfg_data),
    .req_ready (cfg_ready), .done (cfg_done),
    .sioc (sccb_sioc), .siod_o (sccb_siod_o), .siod_oe (sccb_siod_oe)
  );

endmodule
