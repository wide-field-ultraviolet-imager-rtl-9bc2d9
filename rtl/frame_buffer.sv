// frame_buffer: storage for one complete sensor frame.
//
// In frame transfer mode the readout stores a whole frame before it sends any
// of it, so that the slow serial link never has to keep pace with the sensor.
// On the original board this store is an external SDRAM. Here it is a simple
// dual-port synchronous RAM (one write port, one read port, one clock) that
// holds DEPTH words of WIDTH bits; the SDRAM command protocol, refresh and
// bursts are not modelled, only the storage function.
//
// Interface and timing: a write with we=1 stores wdata at waddr on the rising
// edge. A read presents raddr with re=1; rdata holds the word one clock later
// and keeps it until the next read. A read and a write of the same address in
// the same cycle return the old word.
// Default depth is one 1280 x 800 frame of 8-bit pixels (a 1-megapixel
// sensor; the exact format is this design's assumption).
module frame_buffer #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1280 * 800,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
