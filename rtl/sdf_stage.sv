// sdf_stage: one radix-2 single-path delay-feedback (SDF) stage of a
// decimation-in-frequency pipeline FFT.
//
// Within each block of 2*D samples the first D inputs are parked in a D-deep
// feedback memory. During the second D inputs the stage emits the butterfly
// sums a+b and parks the differences a-b; the differences leave during the
// first half of the next block, multiplied by the twiddle exp(-j*2*pi*j/2D),
// j = position in the half block. Every stage adds one bit (OUT_W = IN_W+1)
// and the output is truncated, never rounded. Twiddles are 1.0 = 2^(TW_W-2).
//
// Interface: one complex sample per in_valid; in_sof marks index 0 of an
// NP-sample frame. The output is registered and runs one-for-one with the
// input; output index 0 of a frame appears when input index D is accepted,
// so the latency is D valid samples plus one clock. out_valid stays low until
// the first out_sof.
//
// The paper takes its pipeline FFTs from the FPGA vendor's core generator;
// the SDF structure is the textbook one chosen here.
module sdf_stage #(
  parameter int D    = 1024,
  parameter int NP   = 2048,
  parameter int IN_W = 18,
  parameter int TW_W = spec_pkg::TW_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_sof,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    out_valid,
  output logic                    out_sof,
  output logic signed [IN_W:0]    out_re,
  output logic signed [IN_W:0]    out_im
);
  localparam int OW = IN_W + 1;
  localparam int CW = $clog2(NP);
  localparam int PW = OW + TW_W;

  typedef logic signed [TW_W-1:0] tw_t [D];

  function automatic tw_t mk_cos();
    tw_t r;
    for (int j = 0; j < D; j++) r[j] = TW_W'(spec_pkg::tw_cos(j, 2 * D));
    return r;
  endfunction
  function automatic tw_t mk_msin();
    tw_t r;
    for (int j = 0; j < D; j++) r[j] = TW_W'(spec_pkg::tw_msin(j, 2 * D));
    return r;
  endfunction
  localparam tw_t TWC = mk_cos();
  localparam tw_t TWS = mk_msin();

  logic signed [OW-1:0] fb_re [D];
  logic signed [OW-1:0] fb_im [D];

  logic          started, primed;
  logic [CW-1:0] cnt;
  logic [CW-1:0] t_cur;
  logic          go;

  assign t_cur = in_sof ? '0 : cnt;
  assign go    = in_valid && (started || in_sof);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= 1'b0;
      primed <= 1'b0;
      cnt <= '0;
    end else if (go) begin
      started <= 1'b1;
      cnt <= t_cur + 1'b1;
      if (int'(t_cur) == D) primed <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof <= 1'b0;
    end else begin
      out_valid <= go && (primed || int'(t_cur) == D);
      out_sof <= go && int'(t_cur) == D;
    end
  end

  always_ff @(posedge clk) begin
    if (go) begin
      automatic int h, j;
      automatic logic signed [OW-1:0] a_re, a_im, x_re, x_im;
      automatic logic signed [PW-1:0] p_re, p_im;
      h = int'(t_cur) % (2 * D);
      j = h % D;
      a_re = fb_re[j];
      a_im = fb_im[j];
      x_re = OW'(in_re);
      x_im = OW'(in_im);
      if (h < D) begin
        p_re = PW'(a_re) * PW'(TWC[j]) - PW'(a_im) * PW'(TWS[j]);
        p_im = PW'(a_re) * PW'(TWS[j]) + PW'(a_im) * PW'(TWC[j]);
        out_re <= OW'(p_re >>> (TW_W - 2));
        out_im <= OW'(p_im >>> (TW_W - 2));
        fb_re[j] <= x_re;
        fb_im[j] <= x_im;
      end else begin
        out_re <= a_re + x_re;
        out_im <= a_im + x_im;
        fb_re[j] <= a_re - x_re;
        fb_im[j] <= a_im - x_im;
      end
    end
  end

endmodule
