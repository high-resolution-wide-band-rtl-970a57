// wola: four-tap weighted overlap-add (WOLA) polyphase pre-filter.
//
// For every real sample position n of a frame (FRAME = 2*NL*NP samples, the
// K of the paper) the output is
//     y[n] = sum_{m=0..TAPS-1} h[m*FRAME + n] * x_m[n]
// where x_m is the input delayed by m frames ("K delay" in the paper's
// figure) and h is the 4K-point coefficient set; tap 0 uses coefficients
// 0..K-1 on the undelayed input, tap 1 uses K..2K-1 on the input delayed by
// K, and so on, as drawn in the paper. The sum of the TAPS products is shifted
// right by COEF_W-2 (a coefficient of 1.0 is 2^(COEF_W-2), so windows with
// gains up to 2 are representable) and saturated to OUT_W = 13 bits, which is
// the +log2(4)+1 bits of growth the paper gives for this stage.
//
// The lanes arrive in the block order of sample_demux: real lane 2l+e at frame
// index t holds position n = 2*(NP*l + t) + e. Each lane therefore has its own
// K-delay lines (TAPS-1 memories of NP words) and its own slice of the
// coefficient memory. Coefficients are written one at a time through
// coef_we/coef_addr/coef_data, coef_addr = m*FRAME + n; they are not reset.
//
// Timing: 2 clocks from input to output. out_valid stays low until TAPS-1
// whole frames have filled the delay lines; out_sof marks n in 0/1 (t = 0).
// The filter structure follows the paper; coefficient width, scaling,
// saturation and the write port are this design's choice (the paper gives
// no coefficient values).
module wola #(
  parameter int NL     = 16,
  parameter int NP     = 2048,
  parameter int IN_W   = spec_pkg::SAMPLE_W,
  parameter int OUT_W  = spec_pkg::WOLA_W,
  parameter int COEF_W = spec_pkg::COEF_W,
  parameter int TAPS   = spec_pkg::TAPS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  logic                             in_sof,
  input  logic signed [2*NL-1:0][IN_W-1:0] in_data,
  input  logic                             coef_we,
  input  logic [$clog2(TAPS*2*NL*NP)-1:0]  coef_addr,
  input  logic signed [COEF_W-1:0]         coef_data,
  output logic                             out_valid,
  output logic                             out_sof,
  output logic signed [2*NL-1:0][OUT_W-1:0] out_data
);
  localparam int LANES = 2 * NL;
  localparam int FRAME = 2 * NL * NP;
  localparam int CW    = $clog2(NP);
  localparam int PW    = IN_W + COEF_W;          // product width
  localparam int SW    = PW + $clog2(TAPS);      // sum width
  localparam int TWB   = $clog2(TAPS);

  logic signed [COEF_W-1:0] coef [LANES][TAPS*NP];
  logic signed [IN_W-1:0]   dly  [LANES][TAPS-1][NP];

  logic          started;
  logic [CW-1:0] t_nxt;
  logic [1:0]    fidx;      // saturating frame count, 0..TAPS-1
  logic [CW-1:0] t_cur;
  logic [1:0]    f_cur;

  always_comb begin
    t_cur = in_sof ? '0 : t_nxt;
    if (in_sof) f_cur = started ? ((fidx == 2'(TAPS - 1)) ? fidx : fidx + 1'b1) : '0;
    else        f_cur = fidx;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= 1'b0;
      t_nxt <= '0;
      fidx <= '0;
    end else if (in_valid && (started || in_sof)) begin
      started <= 1'b1;
      t_nxt <= t_cur + 1'b1;
      fidx <= f_cur;
    end
  end

  // coefficient load
  always_ff @(posedge clk) begin
    if (coef_we) begin
      automatic int g, m, n, p, r, t;
      g = int'(coef_addr);
      m = g / FRAME;
      n = g % FRAME;
      p = n / 2;
      r = 2 * (p / NP) + n % 2;
      t = p % NP;
      coef[r][m * NP + t] <= coef_data;
    end
  end

  // stage 1: delay lines and products
  logic signed [PW-1:0] prod [LANES][TAPS];
  logic                 s1_v, s1_sof;

  always_ff @(posedge clk) begin
    if (in_valid && (started || in_sof)) begin
      for (int r = 0; r < LANES; r++) begin
        for (int m = 0; m < TAPS; m++) begin
          automatic logic signed [IN_W-1:0] xm;
          xm = (m == 0) ? in_data[r] : dly[r][m-1][t_cur];
          prod[r][m] <= PW'(xm) * PW'(coef[r][{TWB'(m), t_cur}]);
          if (m < TAPS - 1) dly[r][m][t_cur] <= xm;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      s1_sof <= 1'b0;
    end else begin
      s1_v <= in_valid && (started || in_sof) && (f_cur == 2'(TAPS - 1));
      s1_sof <= in_valid && in_sof && (f_cur == 2'(TAPS - 1));
    end
  end

  // stage 2: sum, scale, saturate
  localparam logic signed [OUT_W-1:0] MAXV = {1'b0, {(OUT_W-1){1'b1}}};
  localparam logic signed [OUT_W-1:0] MINV = {1'b1, {(OUT_W-1){1'b0}}};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof <= 1'b0;
    end else begin
      out_valid <= s1_v;
      out_sof <= s1_sof;
    end
    if (s1_v) begin
      for (int r = 0; r < LANES; r++) begin
        automatic logic signed [SW-1:0] acc;
        automatic logic signed [SW-1:0] sh;
        acc = '0;
        for (int m = 0; m < TAPS; m++) acc += SW'(prod[r][m]);
        sh = acc >>> (COEF_W - 2);
        if (sh > SW'(MAXV))      out_data[r] <= MAXV;
        else if (sh < SW'(MINV)) out_data[r] <= MINV;
        else                     out_data[r] <= OUT_W'(sh);
      end
    end
  end

endmodule
