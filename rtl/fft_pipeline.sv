// fft_pipeline: streaming NP-point complex FFT, one sample per clock, output
// in natural order.
//
// log2(NP) radix-2 SDF stages (sdf_stage, delays NP/2 ... 1) compute the
// decimation-in-frequency FFT with one bit of growth per stage, so
// OUT_W = IN_W + log2(NP) and nothing is rounded or scaled. Their output
// leaves in bit-reversed order; a ping-pong reorder memory writes each frame
// at the bit-reversed address and reads the previous frame back in natural
// order, one word per input word.
//
//   X[b] = sum_{t=0}^{NP-1} x[t] * exp(-j*2*pi*t*b/NP)     (unscaled)
//
// Interface: in_sof marks t = 0; out_sof marks b = 0. Latency: the stages
// take NP-1 valid samples plus log2(NP) clocks, the reorder one more frame of
// NP valid samples plus one clock. The stream is assumed continuous within a
// frame (the spectrometer input never pauses); gaps only stretch the latency.
// The paper configures these pipeline FFTs with the FPGA vendor's core
// generator; this is an equivalent built from plain logic.
module fft_pipeline #(
  parameter int NP   = 2048,
  parameter int IN_W = 18,
  parameter int TW_W = spec_pkg::TW_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic                            in_sof,
  input  logic signed [IN_W-1:0]          in_re,
  input  logic signed [IN_W-1:0]          in_im,
  output logic                            out_valid,
  output logic                            out_sof,
  output logic signed [IN_W+$clog2(NP)-1:0] out_re,
  output logic signed [IN_W+$clog2(NP)-1:0] out_im
);
  localparam int L  = $clog2(NP);
  localparam int OW = IN_W + L;

  for (genvar i = 0; i < L; i++) begin : g_stg
    logic                    v, s;
    logic signed [IN_W+i:0]  re, im;
    if (i == 0) begin : g_first
      sdf_stage #(.D(NP >> 1), .NP(NP), .IN_W(IN_W), .TW_W(TW_W)) u_stage (
        .clk, .rst_n, .in_valid, .in_sof, .in_re, .in_im,
        .out_valid(v), .out_sof(s), .out_re(re), .out_im(im));
    end else begin : g_next
      sdf_stage #(.D(NP >> (i + 1)), .NP(NP), .IN_W(IN_W + i), .TW_W(TW_W)) u_stage (
        .clk, .rst_n,
        .in_valid(g_stg[i-1].v), .in_sof(g_stg[i-1].s),
        .in_re(g_stg[i-1].re), .in_im(g_stg[i-1].im),
        .out_valid(v), .out_sof(s), .out_re(re), .out_im(im));
    end
  end

  // bit-reversed -> natural order
  logic                 br_v, br_s;
  logic signed [OW-1:0] br_re, br_im;
  assign br_v  = g_stg[L-1].v;
  assign br_s  = g_stg[L-1].s;
  assign br_re = g_stg[L-1].re;
  assign br_im = g_stg[L-1].im;

  logic signed [OW-1:0] ro_re [2*NP];
  logic signed [OW-1:0] ro_im [2*NP];
  logic          started, wh, have_frame;
  logic [L-1:0]  cnt, i_cur;

  assign i_cur = br_s ? '0 : cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= 1'b0;
      wh <= 1'b0;
      have_frame <= 1'b0;
      cnt <= '0;
    end else if (br_v && (started || br_s)) begin
      started <= 1'b1;
      cnt <= i_cur + 1'b1;
      if (i_cur == L'(NP - 1)) begin
        wh <= ~wh;
        have_frame <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (br_v && (started || br_s)) begin
      ro_re[{wh, L'(spec_pkg::bitrev(int'(i_cur), L))}] <= br_re;
      ro_im[{wh, L'(spec_pkg::bitrev(int'(i_cur), L))}] <= br_im;
      out_re <= ro_re[{~wh, i_cur}];
      out_im <= ro_im[{~wh, i_cur}];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof <= 1'b0;
    end else begin
      out_valid <= br_v && (started || br_s) && have_frame;
      out_sof <= br_v && br_s && have_frame;
    end
  end

endmodule
