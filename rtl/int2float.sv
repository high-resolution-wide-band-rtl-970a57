// int2float: unsigned IN_W-bit integer to IEEE-754 single precision.
//
// The position p of the leading one gives the exponent 127 + p; the 23 bits
// below it are the mantissa. Bits further down are dropped (round toward
// zero), and 0 becomes +0.0. For IN_W = 72 the largest exponent is 198, so no
// infinities occur. The conversion itself follows the paper (72-bit integer
// to 32-bit float); the rounding mode is this design's choice.
// Timing: one register stage; in_tag (e.g. the channel number) travels
// alongside the value.
module int2float #(
  parameter int IN_W  = spec_pkg::ACC_W,
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_data,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [31:0]      out_data,
  output logic [TAG_W-1:0] out_tag
);
  localparam int PW = $clog2(IN_W);

  logic [PW-1:0]   msb;
  logic            nz;
  logic [IN_W-1:0] norm;

  always_comb begin
    msb = '0;
    nz  = 1'b0;
    for (int i = 0; i < IN_W; i++)
      if (in_data[i]) begin
        msb = PW'(i);
        nz  = 1'b1;
      end
    norm = in_data << (PW'(IN_W - 1) - msb);   // leading one at bit IN_W-1
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) begin
      out_tag <= in_tag;
      if (!nz) out_data <= '0;
      else     out_data <= {1'b0, 8'(127 + int'(msb)), norm[IN_W-2 -: 23]};
    end
  end
endmodule
