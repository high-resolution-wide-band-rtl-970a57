// spec_accum: integrates power spectra and stores the result for read-out
// ("accumulate and store" in the paper).
//
// Every frame brings NL power values per clock for NP clocks; lane s at index
// b is channel k = s + NL*b. Each lane owns a two-bank accumulator memory of
// NP words of ACC_W = 72 bits. An integration is cfg_nint consecutive
// spectra (the adjustable time period): the first spectrum of an integration
// is written into the active bank, the following ones are added to it. After
// the last spectrum the banks swap: integration carries on, without losing a
// spectrum, in the other bank while the finished one is read out.
//
// Read-out runs on its own at one channel per clock, channels 0 .. N-1 in
// order (rd_chan, rd_data, rd_last), starting two clocks after the dump; it
// takes N clocks, so an integration must last at least NL spectra. If a new
// dump comes before a read-out has reached its last channel, that read-out is
// abandoned,
// the new one starts and `overrun` pulses. Additions saturate at 2^ACC_W - 1
// and pulse `overflow`. cfg_enable and cfg_nint are sampled at the start of
// each spectrum; a spectrum that starts while cfg_enable is low is ignored
// and the integration in progress is dropped.
// The 72-bit width, the adjustable integration and the accumulation follow
// the paper; double buffering, saturation and the read-out order are this
// design's choice.
module spec_accum #(
  parameter int NL    = 16,
  parameter int NP    = 2048,
  parameter int IN_W  = spec_pkg::PWR_W,
  parameter int ACC_W = spec_pkg::ACC_W,
  parameter int CNT_W = 24
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_sof,
  input  logic [NL-1:0][IN_W-1:0]      in_pwr,
  input  logic                         cfg_enable,
  input  logic [CNT_W-1:0]             cfg_nint,
  output logic                         rd_valid,
  output logic [$clog2(NL*NP)-1:0]     rd_chan,
  output logic [ACC_W-1:0]             rd_data,
  output logic                         rd_last,
  output logic                         dump,      // integration finished
  output logic                         overflow,  // an addition saturated
  output logic                         overrun    // read-out cut short
);
  localparam int LP = $clog2(NP);
  localparam int LL = $clog2(NL);
  localparam int N  = NL * NP;
  localparam int KW = $clog2(N);

  // ---- integration control -------------------------------------------------
  logic             started, active, first, bank;
  logic [LP-1:0]    cnt, b_cur;
  logic [CNT_W-1:0] nspec;        // spectra done in this integration
  logic [CNT_W-1:0] nint_q;
  logic             go, act_cur, first_cur;

  assign b_cur = in_sof ? '0 : cnt;
  assign go    = in_valid && (started || in_sof);
  always_comb begin
    act_cur   = in_sof ? cfg_enable : active;
    first_cur = in_sof ? (nspec == '0) : first;
  end

  logic end_of_int;
  assign end_of_int = go && act_cur && (b_cur == LP'(NP - 1)) &&
                      (nspec + 1'b1 >= (in_sof ? cfg_nint : nint_q));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= 1'b0;
      active <= 1'b0;
      first <= 1'b0;
      bank <= 1'b0;
      cnt <= '0;
      nspec <= '0;
      nint_q <= CNT_W'(1);
    end else if (go) begin
      started <= 1'b1;
      cnt <= b_cur + 1'b1;
      if (in_sof) begin
        active <= cfg_enable;
        first <= (nspec == '0);
        nint_q <= cfg_nint;
        if (!cfg_enable) nspec <= '0;
      end
      if (act_cur && b_cur == LP'(NP - 1)) begin
        if (end_of_int) begin
          nspec <= '0;
          bank <= ~bank;
        end else begin
          nspec <= nspec + 1'b1;
        end
      end
    end
  end

  // ---- read-out control --------------------------------------------------------
  logic          rd_busy, rd_bank, rd_v1, rd_l1;
  logic [KW-1:0] rd_k, rd_k1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rd_bank <= 1'b0;
      rd_k <= '0;
      rd_v1 <= 1'b0;
      rd_l1 <= 1'b0;
      rd_valid <= 1'b0;
      rd_last <= 1'b0;
      dump <= 1'b0;
      overrun <= 1'b0;
    end else begin
      dump <= end_of_int;
      overrun <= end_of_int && rd_busy && (rd_k != KW'(N - 1));
      rd_v1 <= rd_busy;
      rd_l1 <= rd_busy && (rd_k == KW'(N - 1));
      rd_valid <= rd_v1;
      rd_last <= rd_l1;
      if (end_of_int) begin
        rd_busy <= 1'b1;
        rd_bank <= bank;
        rd_k <= '0;
      end else if (rd_busy) begin
        rd_k <= rd_k + 1'b1;
        if (rd_k == KW'(N - 1)) rd_busy <= 1'b0;
      end
    end
  end

  // ---- accumulate: one memory per lane -------------------------------------
  logic [NL-1:0]            ovf_l;
  logic [NL-1:0][ACC_W-1:0] rq;           // read-out word of every lane
  for (genvar s = 0; s < NL; s++) begin : g_lane
    logic [ACC_W-1:0] acc [2*NP];
    always_ff @(posedge clk) begin
      ovf_l[s] <= 1'b0;
      if (go && act_cur) begin
        automatic logic [ACC_W:0] sum;
        sum = first_cur ? (ACC_W + 1)'(in_pwr[s])
                        : (ACC_W + 1)'(acc[{bank, b_cur}]) + (ACC_W + 1)'(in_pwr[s]);
        if (sum[ACC_W]) begin
          acc[{bank, b_cur}] <= '1;
          ovf_l[s] <= 1'b1;
        end else begin
          acc[{bank, b_cur}] <= sum[ACC_W-1:0];
        end
      end
      if (rd_busy) rq[s] <= acc[{rd_bank, rd_k[KW-1:LL]}];
    end
  end
  assign overflow = |ovf_l;

  always_ff @(posedge clk) begin
    if (rd_busy) rd_k1 <= rd_k;
    if (rd_v1) begin
      rd_chan <= rd_k1;
      rd_data <= rq[rd_k1[LL-1:0]];
    end
  end

  a_nint_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (go && in_sof && cfg_enable) |-> cfg_nint != '0);

endmodule
