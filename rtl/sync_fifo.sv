// sync_fifo: single-clock first-in first-out buffer.
//
// Holds up to DEPTH words of WIDTH bits. Writes with push while full are
// refused (the word is lost) and reported by the overflow strobe, so the
// producer never has to stall; this suits a stream, such as photon events,
// that cannot be held up. Reads use a valid/ready handshake on the head word
// (first-word fall-through: out_data shows the head while out_valid is
// high). DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned WIDTH = 48,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] in_data,
  output logic             overflow,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data,
  input  logic             out_ready,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             full, do_push, do_pop;

  assign full      = (count == (AW+1)'(DEPTH));
  assign count     = wptr - rptr;
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr[AW-1:0]];
  assign do_push   = push && !full;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= push && full;
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
    end
  end

endmodule
