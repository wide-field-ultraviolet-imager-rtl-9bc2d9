// readout_controller: sequencer of the frame transfer mode.
//
// One frame at a time is moved from the sensor to the outputs in three
// phases. CAPTURE: the controller arms the capture block, which starts at the
// next frame sync, and writes every pixel to the frame buffer at address
// y * H_ACTIVE + x. At the end of the frame it drops arm, so the sensor is no
// longer read. SEND: it reads the frame back in raster order and turns each
// pixel into a 16-bit packet of 8-bit pixel value, 4-bit frame ID and 4-bit
// row ID (frame and row number modulo 16), which goes to the serial port
// and/or to the storage port, as enabled. DONE: the frame ID advances and,
// while enable is high, the next frame is captured.
// The phases and the packet contents follow the paper; the handshakes, the
// field order in the packet and the choice to finish a started frame before
// honouring enable=0 (an armed frame that has not started is abandoned) are
// this design's own.
//
// Interface: the pixel stream from cmos_capture; the write and read ports of
// the frame buffer (read data one cycle after re); two valid/ready packet
// outputs. When both outputs are enabled a packet is held until both have
// taken it. Each pixel costs at least three cycles in SEND (address, data,
// hand-over), so the outputs, not the controller, set the frame rate.
module readout_controller
  import wifi_pkg::*;
#(
  parameter int unsigned H_ACTIVE = 1280,
  parameter int unsigned V_ACTIVE = 800,
  localparam int unsigned NPIX    = H_ACTIVE * V_ACTIVE,
  localparam int unsigned AW      = $clog2(NPIX),
  localparam int unsigned XW      = $clog2(H_ACTIVE + 1),
  localparam int unsigned YW      = $clog2(V_ACTIVE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // control
  input  logic             enable,
  input  logic             uart_en,
  input  logic             store_en,
  // pixel stream from the capture block
  output logic             arm,
  input  logic             pix_valid,
  input  logic [PIX_W-1:0] pix_data,
  input  logic [XW-1:0]    pix_x,
  input  logic [YW-1:0]    pix_y,
  input  logic             sof,
  input  logic             eof,
  // frame buffer
  output logic             mem_we,
  output logic [AW-1:0]    mem_waddr,
  output logic [PIX_W-1:0] mem_wdata,
  output logic             mem_re,
  output logic [AW-1:0]    mem_raddr,
  input  logic [PIX_W-1:0] mem_rdata,
  // packet outputs
  output logic             uart_valid,
  output frame_packet_t    uart_pkt,
  input  logic             uart_ready,
  output logic             store_valid,
  output frame_packet_t    store_pkt,
  input  logic             store_ready,
  // status
  output logic [3:0]       frame_id,
  output logic             busy,
  output logic             frame_done   // one-cycle pulse after a frame is sent
);

  typedef enum logic [2:0] {
    S_IDLE, S_ARM, S_CAPTURE, S_RD_ADDR, S_RD_DATA, S_SEND, S_DONE
  } state_e;

  state_e        state;
  logic [AW-1:0] rd_addr;
  logic [XW-1:0] rd_col;
  logic [YW-1:0] rd_row;
  frame_packet_t pkt;
  logic          uart_taken, store_taken;
  logic          uart_need, store_need;

  assign arm  = (state == S_ARM) || (state == S_CAPTURE);
  assign busy = (state != S_IDLE);

  // frame buffer write: straight from the capture stream
  always_comb begin
    mem_we    = (state == S_CAPTURE) && pix_valid;
    mem_waddr = AW'(pix_y) * AW'(H_ACTIVE) + AW'(pix_x);
    mem_wdata = pix_data;
    mem_re    = (state == S_RD_ADDR);
    mem_raddr = rd_addr;
  end

  assign uart_need   = uart_en  && !uart_taken;
  assign store_need  = store_en && !store_taken;
  assign uart_valid  = (state == S_SEND) && uart_need;
  assign store_valid = (state == S_SEND) && store_need;
  assign uart_pkt    = pkt;
  assign store_pkt   = pkt;

  logic send_done;
  assign send_done = (!uart_need  || uart_ready) &&
                     (!store_need || store_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      rd_addr     <= '0;
      rd_col      <= '0;
      rd_row      <= '0;
      pkt         <= '0;
      uart_taken  <= 1'b0;
      store_taken <= 1'b0;
      frame_id    <= '0;
      frame_done  <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        S_IDLE:    if (enable) state <= S_ARM;
        S_ARM:     if (sof) state <= S_CAPTURE;
                   else if (!enable) state <= S_IDLE;
        S_CAPTURE: if (eof) begin
          state   <= S_RD_ADDR;
          rd_addr <= '0;
          rd_col  <= '0;
          rd_row  <= '0;
        end
        S_RD_ADDR: state <= S_RD_DATA;
        S_RD_DATA: begin
          pkt.frame_id <= frame_id;
          pkt.row_id   <= rd_row[3:0];
          pkt.pixel    <= mem_rdata;
          uart_taken   <= 1'b0;
          store_taken  <= 1'b0;
          state        <= S_SEND;
        end
        S_SEND: begin
          if (uart_valid  && uart_ready)  uart_taken  <= 1'b1;
          if (store_valid && store_ready) store_taken <= 1'b1;
          if (send_done) begin
            if (rd_addr == AW'(NPIX - 1)) begin
              state <= S_DONE;
            end else begin
              rd_addr <= rd_addr + AW'(1);
              if (rd_col == XW'(H_ACTIVE - 1)) begin
                rd_col <= '0;
                rd_row <= rd_row + YW'(1);
              end else begin
                rd_col <= rd_col + XW'(1);
              end
              state <= S_RD_ADDR;
            end
          end
        end
        S_DONE: begin
          frame_id   <= frame_id + 4'd1;
          frame_done <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
