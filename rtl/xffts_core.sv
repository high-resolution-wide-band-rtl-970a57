// xffts_core: polyphase-filter-bank FFT spectrometer core, 32768 channels over
// the 2.5 GHz band of a 5 GS/s, 10-bit ADC stream.
//
// Datapath, one frame = K = 2*NL*NP = 65536 real samples = NP = 2048 clocks:
//   sample_demux   ADC words -> 32 lanes, block order            10 bit
//   wola           4-tap weighted overlap-add pre-filter          13 bit
//   combined_fft   32768-point complex FFT (16 x 2048)            29 bit
//   chan_transform 32768 channels of the 65536-point real FFT     30 bit
//   power_builder  Re^2 + Im^2                                    60 bit
//   spec_accum     integration over cfg NINT spectra, read-out    72 bit
//   int2float      IEEE-754 single per channel                    32 bit
// plus ctrl_regs, the register interface of the host link.
//
// Interface: adc_valid/adc_data bring 2*NL samples per clock in time order
// (at 5 GS/s this is a 156.25 MHz clock); frames are counted from reset. The
// host bus (bus_we, bus_addr, bus_wdata, bus_rdata; map in ctrl_regs) loads
// the WOLA coefficients, sets the integration length and starts the run.
// Each finished integration leaves on spec_valid/spec_chan/spec_data as N
// floats, channel 0 first, spec_last on channel N-1; spec_dump pulses when an
// integration ends. Channel k covers frequency k * fs / (2N).
// Latency from a frame's last sample to its first spectrum contribution is
// about four frames (demux, 2 in the FFT, channel transformation) once the
// WOLA delay lines hold 3 frames.
// Stages, widths and sizes follow the paper; the lane ordering, the register
// map and the streaming handshake are this design's own.
module xffts_core #(
  parameter int NL    = 16,
  parameter int NP    = 2048,
  parameter int ACC_W = spec_pkg::ACC_W,
  parameter int CNT_W = 24
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       adc_valid,
  input  logic signed [2*NL-1:0][spec_pkg::SAMPLE_W-1:0] adc_data,
  input  logic                                       bus_we,
  input  logic [19:0]                                bus_addr,
  input  logic [31:0]                                bus_wdata,
  output logic [31:0]                                bus_rdata,
  output logic                                       spec_valid,
  output logic [$clog2(NL*NP)-1:0]                   spec_chan,
  output logic [31:0]                                spec_data,
  output logic                                       spec_last,
  output logic                                       spec_dump
);
  import spec_pkg::*;

  localparam int N    = NL * NP;
  localparam int KW   = $clog2(N);
  localparam int CA_W = $clog2(TAPS * 2 * N);
  // stage widths: 29 / 30 / 60 bits at the default size (FFT_W, CT_W, PWR_W)
  localparam int F_W  = WOLA_W + KW + 1;
  localparam int C_W  = F_W + 1;
  localparam int P_W  = 2 * C_W;

  // ---- control ---------------------------------------------------------------
  logic                     cfg_enable;
  logic [CNT_W-1:0]         cfg_nint;
  logic                     coef_we;
  logic [CA_W-1:0]          coef_addr;
  logic signed [COEF_W-1:0] coef_data;
  logic                     acc_dump, acc_ovf, acc_ovr;

  ctrl_regs #(.CA_W(CA_W), .COEF_W(COEF_W), .CNT_W(CNT_W)) u_ctrl (
    .clk, .rst_n, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .cfg_enable, .cfg_nint, .coef_we, .coef_addr, .coef_data,
    .st_dump(acc_dump), .st_overflow(acc_ovf), .st_overrun(acc_ovr));

  // ---- demultiplexing ------------------------------------------------------
  logic                                    dm_v, dm_s;
  logic signed [2*NL-1:0][SAMPLE_W-1:0]    dm_d;

  sample_demux #(.NL(NL), .NP(NP), .W(SAMPLE_W)) u_demux (
    .clk, .rst_n, .in_valid(adc_valid), .in_data(adc_data),
    .out_valid(dm_v), .out_sof(dm_s), .out_data(dm_d));

  // ---- WOLA ------------------------------------------------------------------
  logic                                    wo_v, wo_s;
  logic signed [2*NL-1:0][WOLA_W-1:0]      wo_d;

  wola #(.NL(NL), .NP(NP), .IN_W(SAMPLE_W), .OUT_W(WOLA_W), .COEF_W(COEF_W), .TAPS(TAPS)) u_wola (
    .clk, .rst_n, .in_valid(dm_v), .in_sof(dm_s), .in_data(dm_d),
    .coef_we, .coef_addr, .coef_data,
    .out_valid(wo_v), .out_sof(wo_s), .out_data(wo_d));

  // real lanes 2l / 2l+1 are the real / imaginary parts of complex lane l
  logic signed [NL-1:0][WOLA_W-1:0] z_re, z_im;
  always_comb
    for (int l = 0; l < NL; l++) begin
      z_re[l] = wo_d[2*l];
      z_im[l] = wo_d[2*l+1];
    end

  // ---- combined FFT ----------------------------------------------------------
  logic                           ff_v, ff_s;
  logic signed [NL-1:0][F_W-1:0] ff_re, ff_im;

  combined_fft #(.NL(NL), .NP(NP), .IN_W(WOLA_W), .TW_W(TW_W)) u_fft (
    .clk, .rst_n, .in_valid(wo_v), .in_sof(wo_s), .in_re(z_re), .in_im(z_im),
    .out_valid(ff_v), .out_sof(ff_s), .out_re(ff_re), .out_im(ff_im));

  // ---- channel transformation ------------------------------------------------
  logic                          ct_v, ct_s;
  logic signed [NL-1:0][C_W-1:0] ct_re, ct_im;

  chan_transform #(.NL(NL), .NP(NP), .IN_W(F_W), .OUT_W(C_W), .TW_W(TW_W)) u_ct (
    .clk, .rst_n, .in_valid(ff_v), .in_sof(ff_s), .in_re(ff_re), .in_im(ff_im),
    .out_valid(ct_v), .out_sof(ct_s), .out_re(ct_re), .out_im(ct_im));

  // ---- power -----------------------------------------------------------------
  logic                     pw_v, pw_s;
  logic [NL-1:0][P_W-1:0] pw_d;

  power_builder #(.NL(NL), .IN_W(C_W)) u_pwr (
    .clk, .rst_n, .in_valid(ct_v), .in_sof(ct_s), .in_re(ct_re), .in_im(ct_im),
    .out_valid(pw_v), .out_sof(pw_s), .out_pwr(pw_d));

  // ---- accumulate and store ----------------------------------------------------
  logic             rd_v, rd_last;
  logic [KW-1:0]    rd_chan;
  logic [ACC_W-1:0] rd_data;

  spec_accum #(.NL(NL), .NP(NP), .IN_W(P_W), .ACC_W(ACC_W), .CNT_W(CNT_W)) u_acc (
    .clk, .rst_n, .in_valid(pw_v), .in_sof(pw_s), .in_pwr(pw_d),
    .cfg_enable, .cfg_nint,
    .rd_valid(rd_v), .rd_chan, .rd_data, .rd_last,
    .dump(acc_dump), .overflow(acc_ovf), .overrun(acc_ovr));

  assign spec_dump = acc_dump;

  initial assert (NL != 16 || NP != 2048 || (F_W == FFT_W && C_W == CT_W && P_W == PWR_W))
    else $error("stage widths differ from the 32k core");

  // ---- floating-point conversion -----------------------------------------------
  int2float #(.IN_W(ACC_W), .TAG_W(KW + 1)) u_flt (
    .clk, .rst_n, .in_valid(rd_v), .in_data(rd_data), .in_tag({rd_last, rd_chan}),
    .out_valid(spec_valid), .out_data(spec_data), .out_tag({spec_last, spec_chan}));

endmodule
