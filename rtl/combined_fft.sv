// combined_fft: N = NL*NP point complex FFT over NL parallel lanes
// (the "combined FFT (16 x 2048)" of the 32k core: NL = 16, NP = 2048).
//
// Input (block order, see sample_demux): at index t complex lane l carries
// z[NP*l + t]. Writing the bin as k = s + NL*b, the transform splits as
//     Z[s + NL*b] = sum_t exp(-j2pi*t*b/NP) * [ exp(-j2pi*t*s/N) *
//                     sum_l z[NP*l + t] * exp(-j2pi*l*s/NL) ]
// so the design computes, every clock,
//   1. an NL-point DFT across the lanes (radix-2 decimation in frequency,
//      +log2(NL) bits),
//   2. a rotation of lane s by exp(-j2pi*t*s/N) (+1 guard bit: this and the
//      window bit are the two extra bits the paper reserves),
//   3. one NP-point pipeline FFT per lane (fft_pipeline, +log2(NP) bits).
// Output stream s therefore carries bins s, s+NL, s+2NL, ... in order of b,
// which is what the paper's figure shows: stream s is paired with stream
// (NL-s) mod NL by the channel transformation (0 with 8, 1 with 15, ...).
// OUT_W = IN_W + log2(N) + 1 (13 -> 29 bits). Nothing is rounded.
//
// Timing: steps 1-2 take two clocks, then the fft_pipeline latency (about two
// frames). One frame of NP clocks per transform: full rate.
// The paper gives the 16 x 2048 split and the widths; the decomposition
// order, the across-lane network and the twiddle tables are this design's.
module combined_fft #(
  parameter int NL   = 16,
  parameter int NP   = 2048,
  parameter int IN_W = spec_pkg::WOLA_W,
  parameter int TW_W = spec_pkg::TW_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic                                   in_sof,
  input  logic signed [NL-1:0][IN_W-1:0]         in_re,
  input  logic signed [NL-1:0][IN_W-1:0]         in_im,
  output logic                                   out_valid,
  output logic                                   out_sof,
  output logic signed [NL-1:0][IN_W+$clog2(NL*NP):0] out_re,
  output logic signed [NL-1:0][IN_W+$clog2(NL*NP):0] out_im
);
  localparam int LL  = $clog2(NL);
  localparam int LP  = $clog2(NP);
  localparam int N   = NL * NP;
  localparam int DW  = IN_W + LL;        // after lane DFT
  localparam int RW  = DW + 1;           // after rotation (guard bit)
  localparam int OW  = RW + LP;
  localparam int PW  = DW + TW_W + 1;

  // ---- frame index tracking ------------------------------------------------
  logic          started;
  logic [LP-1:0] cnt, t_cur;
  logic          go;
  assign t_cur = in_sof ? '0 : cnt;
  assign go    = in_valid && (started || in_sof);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= 1'b0;
      cnt <= '0;
    end else if (go) begin
      started <= 1'b1;
      cnt <= t_cur + 1'b1;
    end
  end

  // ---- 1. NL-point DFT across lanes --------------------------------------
  // twiddles exp(-j2pi*j/NL), j = 0 .. NL/2-1
  typedef logic signed [TW_W-1:0] ltw_t [NL/2];
  function automatic ltw_t mk_ltw(input bit sin_part);
    ltw_t r;
    for (int j = 0; j < NL / 2; j++)
      r[j] = TW_W'(sin_part ? spec_pkg::tw_msin(longint'(j), longint'(NL))
                            : spec_pkg::tw_cos(longint'(j), longint'(NL)));
    return r;
  endfunction
  localparam ltw_t LWC = mk_ltw(1'b0);
  localparam ltw_t LWS = mk_ltw(1'b1);

  typedef logic signed [DW-1:0] lane_t [NL];
  lane_t u_re, u_im;                      // combinational, natural order
  always_comb begin
    automatic lane_t a_re, a_im;
    for (int l = 0; l < NL; l++) begin
      a_re[l] = DW'($signed(in_re[l]));
      a_im[l] = DW'($signed(in_im[l]));
    end
    for (int st = 0; st < LL; st++) begin
      automatic int h = NL >> (st + 1);
      for (int g = 0; g < NL; g += 2 * h) begin
        for (int i = 0; i < h; i++) begin
          automatic logic signed [DW-1:0] x_re, x_im, y_re, y_im, d_re, d_im;
          automatic logic signed [PW-1:0] p_re, p_im;
          automatic logic signed [TW_W-1:0] wc, ws;
          x_re = a_re[g + i];     x_im = a_im[g + i];
          y_re = a_re[g + i + h]; y_im = a_im[g + i + h];
          d_re = x_re - y_re;     d_im = x_im - y_im;
          wc = LWC[i * (NL / (2 * h))];
          ws = LWS[i * (NL / (2 * h))];
          p_re = PW'(d_re) * PW'(wc) - PW'(d_im) * PW'(ws);
          p_im = PW'(d_re) * PW'(ws) + PW'(d_im) * PW'(wc);
          a_re[g + i] = x_re + y_re;
          a_im[g + i] = x_im + y_im;
          a_re[g + i + h] = DW'(p_re >>> (TW_W - 2));
          a_im[g + i + h] = DW'(p_im >>> (TW_W - 2));
        end
      end
    end
    for (int s = 0; s < NL; s++) begin
      u_re[s] = a_re[spec_pkg::bitrev(s, LL)];
      u_im[s] = a_im[spec_pkg::bitrev(s, LL)];
    end
  end

  lane_t u_re_q, u_im_q;
  logic [LP-1:0] t_q;
  logic          v_q, s_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      s_q <= 1'b0;
    end else begin
      v_q <= go;
      s_q <= go && in_sof;
    end
    if (go) begin
      u_re_q <= u_re;
      u_im_q <= u_im;
      t_q <= t_cur;
    end
  end

  // ---- 2. rotation by exp(-j2pi*t*s/N) and 3. per-lane pipeline FFT ------
  // rotation table of lane s: exp(-j2pi*t*s/N), t = 0..NP-1
  typedef logic signed [TW_W-1:0] tw_t [NP];
  function automatic tw_t mk_rot(input bit sin_part, input int s);
    tw_t r;
    for (int t = 0; t < NP; t++)
      r[t] = TW_W'(sin_part ? spec_pkg::tw_msin(longint'(t) * s, longint'(N))
                            : spec_pkg::tw_cos(longint'(t) * s, longint'(N)));
    return r;
  endfunction

  logic [NL-1:0] f_v, f_s;
  for (genvar s = 0; s < NL; s++) begin : g_lane
    localparam tw_t TWC = mk_rot(1'b0, s);
    localparam tw_t TWS = mk_rot(1'b1, s);

    logic signed [RW-1:0] r_re, r_im;
    logic                 r_v, r_s;
    always_ff @(posedge clk) begin
      automatic logic signed [PW-1:0] p_re, p_im;
      p_re = PW'(u_re_q[s]) * PW'(TWC[t_q]) - PW'(u_im_q[s]) * PW'(TWS[t_q]);
      p_im = PW'(u_re_q[s]) * PW'(TWS[t_q]) + PW'(u_im_q[s]) * PW'(TWC[t_q]);
      if (!rst_n) begin
        r_v <= 1'b0;
        r_s <= 1'b0;
      end else begin
        r_v <= v_q;
        r_s <= s_q;
      end
      if (v_q) begin
        r_re <= RW'(p_re >>> (TW_W - 2));
        r_im <= RW'(p_im >>> (TW_W - 2));
      end
    end

    fft_pipeline #(.NP(NP), .IN_W(RW), .TW_W(TW_W)) u_fft (
      .clk, .rst_n,
      .in_valid(r_v), .in_sof(r_s), .in_re(r_re), .in_im(r_im),
      .out_valid(f_v[s]), .out_sof(f_s[s]), .out_re(out_re[s]), .out_im(out_im[s]));
  end

  // all lanes run in lock step
  assign out_valid = f_v[0];
  assign out_sof   = f_s[0];

  // lanes must stay aligned
  a_lanes_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (f_v == '0 || f_v == '1) && (f_s == '0 || f_s == '1));

endmodule
