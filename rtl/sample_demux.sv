// sample_demux: demultiplexes the ADC sample stream onto the parallel lanes of
// the processing pipeline and presents every frame in "block order".
//
// Input: LANES = 2*NL real samples per clock, in time order (element j of a
// word is the j-th sample of that word). A frame is FRAME = 2*NL*NP samples,
// i.e. NP input words; frames are counted from reset.
// Output: at frame index t (0..NP-1) complex lane l carries the sample pair
//   real lane 2l   = x[2*(NP*l + t)]      (real part of z[NP*l + t])
//   real lane 2l+1 = x[2*(NP*l + t) + 1]  (imaginary part)
// so each complex lane holds one contiguous 1/NL block of the frame. This is
// the order in which the combined FFT can do its NL-point transform across
// lanes first (see combined_fft).
//
// How: a ping-pong frame memory split into LANES banks. Word c of a frame is
// written rotated by 2*(c / (NP/NL)) banks; with that skew the LANES samples
// needed at one output index always lie in LANES different banks, so one read
// per bank per clock suffices. One word is read for every word written, so the
// output runs at the input rate with a latency of one frame plus 2 clocks.
// out_sof marks index t = 0 of each output frame; out_valid stays low until
// the first frame is complete.
//
// The paper only names this "demultiplexing" stage; the block ordering and the
// skewed memory are this design's choice, made so that the FFT described in
// the paper (16 x 2048 with streams k mod 16) can be built.
module sample_demux #(
  parameter int NL = 16,                 // complex lanes (FFT streams)
  parameter int NP = 2048,               // points per lane per frame
  parameter int W  = spec_pkg::SAMPLE_W  // sample width
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic signed [2*NL-1:0][W-1:0] in_data,
  output logic                         out_valid,
  output logic                         out_sof,
  output logic signed [2*NL-1:0][W-1:0] out_data
);
  localparam int LANES = 2 * NL;
  localparam int BLK   = NP / NL;        // words per lane block
  localparam int CW    = $clog2(NP);

  logic signed [W-1:0] mem [LANES][2*NP];

  logic [CW-1:0] c;          // word index within frame
  logic          wh;         // half being written
  logic          have_frame; // one frame complete
  logic          rd_v;
  logic [CW-1:0] rd_t;
  logic signed [W-1:0] rd [LANES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c <= '0;
      wh <= 1'b0;
      have_frame <= 1'b0;
    end else if (in_valid) begin
      c <= c + 1'b1;
      if (c == CW'(NP - 1)) begin
        wh <= ~wh;
        have_frame <= 1'b1;
      end
    end
  end

  // skewed write and read
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int q = 0; q < LANES; q++) begin
        automatic int rot, j, l, addr;
        rot = (2 * (int'(c) / BLK)) % LANES;
        j = (q - rot + LANES) % LANES;
        mem[q][{wh, c}] <= in_data[j];
        l = ((q / 2) - (int'(c) % NL) + NL) % NL;
        addr = BLK * l + int'(c) / NL;
        rd[q] <= mem[q][{~wh, CW'(addr)}];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_v <= 1'b0;
      rd_t <= '0;
    end else begin
      rd_v <= in_valid && have_frame;
      if (in_valid) rd_t <= c;
    end
  end

  // undo the skew: real lane r = 2l+e sits in bank (2*(t%NL + l) + e) % LANES
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof <= 1'b0;
    end else begin
      out_valid <= rd_v;
      out_sof <= rd_v && (rd_t == '0);
    end
    if (rd_v) begin
      for (int r = 0; r < LANES; r++) begin
        automatic int q;
        q = (2 * ((int'(rd_t) % NL) + r / 2) + r % 2) % LANES;
        out_data[r] <= rd[q];
      end
    end
  end

endmodule
