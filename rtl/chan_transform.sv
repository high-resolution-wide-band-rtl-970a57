// chan_transform: channel transformation from the N-point complex FFT of the
// packed signal to the N channels of the 2N-point real FFT.
//
// The combined FFT transforms z[n] = x[2n] + j*x[2n+1], so its bins mix the
// spectra of the even and the odd samples. With Z the complex FFT and
// W = exp(-j*pi*k/N), the real signal's spectrum is
//     A = Z[k] + conj(Z[N-k]),  B = Z[k] - conj(Z[N-k])
//     X[k] = (A - j*W*B) / 2          k = 0 .. N-1
// (the sample at k = N, the Nyquist bin, is not produced). Bin k arrives on
// stream s = k mod NL at index b = k div NL, and its partner N-k lies on
// stream (NL-s) mod NL at index NP-1-b, or (NP-b) mod NP when s = 0. The
// streams thus form NL/2 transform units, as in the paper's figure: streams
// 0 and NL/2 are each their own partner (one unit), and s pairs with NL-s
// (1 with 15, 2 with 14, ... 7 with 9). Each unit buffers a frame of both its
// streams in a ping-pong memory, because the partner is read in reverse order.
//
// Output stream s carries channel s + NL*b at index b; every clock all NL
// channels of one index leave together. Width grows by one bit (29 -> 30);
// the halving is an arithmetic shift, and the result saturates.
// Timing: one frame (NP valid samples) plus 2 clocks; out_sof marks b = 0.
// The pairing and the widths follow the paper; the formula is the standard
// real-from-complex FFT step, and the buffering is this design's choice.
module chan_transform #(
  parameter int NL    = 16,
  parameter int NP    = 2048,
  parameter int IN_W  = spec_pkg::FFT_W,
  parameter int OUT_W = spec_pkg::CT_W,
  parameter int TW_W  = spec_pkg::TW_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic                            in_sof,
  input  logic signed [NL-1:0][IN_W-1:0]  in_re,
  input  logic signed [NL-1:0][IN_W-1:0]  in_im,
  output logic                            out_valid,
  output logic                            out_sof,
  output logic signed [NL-1:0][OUT_W-1:0] out_re,
  output logic signed [NL-1:0][OUT_W-1:0] out_im
);
  localparam int LP = $clog2(NP);
  localparam int N  = NL * NP;
  localparam int AW = IN_W + 1;           // A, B
  localparam int PW = AW + TW_W + 1;
  localparam int XW = AW + 2;

  // ---- frame bookkeeping ---------------------------------------------------
  logic          started, wh, have_frame;
  logic [LP-1:0] cnt, b_cur;
  logic          go;
  assign b_cur = in_sof ? '0 : cnt;
  assign go    = in_valid && (started || in_sof);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= 1'b0;
      wh <= 1'b0;
      have_frame <= 1'b0;
      cnt <= '0;
    end else if (go) begin
      started <= 1'b1;
      cnt <= b_cur + 1'b1;
      if (b_cur == LP'(NP - 1)) begin
        wh <= ~wh;
        have_frame <= 1'b1;
      end
    end
  end

  // ---- frame buffers: one per input stream ---------------------------------
  logic signed [IN_W-1:0] buf_re [NL][2*NP];
  logic signed [IN_W-1:0] buf_im [NL][2*NP];

  always_ff @(posedge clk) begin
    if (go) begin
      for (int s = 0; s < NL; s++) begin
        buf_re[s][{wh, b_cur}] <= in_re[s];
        buf_im[s][{wh, b_cur}] <= in_im[s];
      end
    end
  end

  logic          v1, s1, v2, s2;
  logic [LP-1:0] b1;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; s1 <= 1'b0;
      v2 <= 1'b0; s2 <= 1'b0;
    end else begin
      v1 <= go && have_frame;
      s1 <= go && have_frame && in_sof;
      v2 <= v1;
      s2 <= s1;
    end
    if (go) b1 <= b_cur;
  end
  assign out_valid = v2;
  assign out_sof   = s2;

  // twiddle table of output stream s: exp(-j*pi*(s + NL*b)/N), b = 0..NP-1
  typedef logic signed [TW_W-1:0] tw_t [NP];
  function automatic tw_t mk_tw(input bit sin_part, input int s);
    tw_t r;
    for (int b = 0; b < NP; b++)
      r[b] = TW_W'(sin_part ? spec_pkg::tw_msin(longint'(s + NL * b), longint'(2 * N))
                            : spec_pkg::tw_cos(longint'(s + NL * b), longint'(2 * N)));
    return r;
  endfunction

  // ---- one output lane per stream; lanes s and (NL-s)%NL form a unit -------
  for (genvar s = 0; s < NL; s++) begin : g_ch
    localparam int P = (NL - s) % NL;     // partner stream
    localparam tw_t TWC = mk_tw(1'b0, s);
    localparam tw_t TWS = mk_tw(1'b1, s);

    logic signed [IN_W-1:0] zk_re, zk_im, zm_re, zm_im;
    logic [LP-1:0] pi_cur;
    assign pi_cur = (s == 0) ? LP'(NP - int'(b_cur)) : LP'(NP - 1 - int'(b_cur));

    // stage 1: read own bin and partner bin of the previous frame
    always_ff @(posedge clk) begin
      if (go) begin
        zk_re <= buf_re[s][{~wh, b_cur}];
        zk_im <= buf_im[s][{~wh, b_cur}];
        zm_re <= buf_re[P][{~wh, pi_cur}];
        zm_im <= buf_im[P][{~wh, pi_cur}];
      end
    end

    // stage 2: X = (A - jWB)/2
    always_ff @(posedge clk) begin
      if (v1) begin
        automatic logic signed [AW-1:0] a_re, a_im, bb_re, bb_im;
        automatic logic signed [PW-1:0] c_re, c_im;
        automatic logic signed [XW-1:0] x_re, x_im;
        a_re  = AW'(zk_re) + AW'(zm_re);
        a_im  = AW'(zk_im) - AW'(zm_im);
        bb_re = AW'(zk_re) - AW'(zm_re);
        bb_im = AW'(zk_im) + AW'(zm_im);
        c_re = PW'(bb_re) * PW'(TWC[b1]) - PW'(bb_im) * PW'(TWS[b1]);
        c_im = PW'(bb_re) * PW'(TWS[b1]) + PW'(bb_im) * PW'(TWC[b1]);
        c_re = c_re >>> (TW_W - 2);
        c_im = c_im >>> (TW_W - 2);
        x_re = (XW'(a_re) + XW'(c_im)) >>> 1;
        x_im = (XW'(a_im) - XW'(c_re)) >>> 1;
        out_re[s] <= sat(x_re);
        out_im[s] <= sat(x_im);
      end
    end
  end

  localparam logic signed [XW-1:0] MAXX = XW'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [XW-1:0] MINX = -MAXX - 1;
  function automatic logic signed [OUT_W-1:0] sat(input logic signed [XW-1:0] v);
    if (v > MAXX) return OUT_W'(MAXX);
    if (v < MINX) return OUT_W'(MINX);
    return OUT_W'(v);
  endfunction

endmodule
