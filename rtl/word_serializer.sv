// word_serializer: splits a multi-byte packet into bytes, most significant
// byte first, for the byte-wide serial transmitter.
//
// Frame-transfer packets are 16 bits (2 bytes) and photon event records are
// 48 bits (6 bytes); the same block serves both through the BYTES parameter.
// The byte order is this design's choice.
//
// Interface: valid/ready on both sides. A word is accepted when in_valid and
// in_ready are high; in_ready stays low until its last byte has been taken
// downstream. Bytes leave on out_data with out_valid; the first byte is
// offered the cycle after the word is accepted.
module word_serializer #(
  parameter int unsigned BYTES = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [8*BYTES-1:0] in_data,
  output logic               in_ready,
  output logic               out_valid,
  output logic [7:0]         out_data,
  input  logic               out_ready
);

  localparam int unsigned IW = (BYTES > 1) ? $clog2(BYTES + 1) : 1;

  logic [8*BYTES-1:0] word;
  logic [IW-1:0]      left;    // bytes still to send

  assign in_ready  = (left == '0);
  assign out_valid = (left != '0);
  assign out_data  = word[8*BYTES-1 -: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word <= '0;
      left <= '0;
    end else if (in_valid && in_ready) begin
      word <= in_data;
      left <= IW'(BYTES);
    end else if (out_valid && out_ready) begin
      word <= word << 8;
      left <= left - IW'(1);
    end
  end

endmodule
