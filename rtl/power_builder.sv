// power_builder: squared magnitude Re^2 + Im^2 of every channel.
//
// NL channels per clock, each IN_W-bit signed complex, become NL unsigned
// power values of 2*IN_W bits (30 -> 60 bits: the width doubles, as in the
// paper; no bits are dropped, so the result is exact). One register stage:
// out_valid/out_sof follow in_valid/in_sof by one clock.
module power_builder #(
  parameter int NL   = 16,
  parameter int IN_W = spec_pkg::CT_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic                           in_sof,
  input  logic signed [NL-1:0][IN_W-1:0] in_re,
  input  logic signed [NL-1:0][IN_W-1:0] in_im,
  output logic                           out_valid,
  output logic                           out_sof,
  output logic [NL-1:0][2*IN_W-1:0]      out_pwr
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sof <= in_valid && in_sof;
    end
    if (in_valid) begin
      for (int s = 0; s < NL; s++) begin
        automatic logic signed [2*IN_W-1:0] r2, i2;
        r2 = (2*IN_W)'($signed(in_re[s])) * (2*IN_W)'($signed(in_re[s]));
        i2 = (2*IN_W)'($signed(in_im[s])) * (2*IN_W)'($signed(in_im[s]));
        out_pwr[s] <= $unsigned(r2) + $unsigned(i2);
      end
    end
  end
endmodule
