// tb_xffts_full: one complete operation of the spectrometer core at its full
// size (16 lanes x 2048 points: 65536-sample frames, 32768 channels, 72-bit
// integrator), with every parameter at its default.
//
// The host bus loads the 4 x 65536 WOLA coefficients (tap 0 = 1.0, the other
// taps 0, so the filter bank reduces to a plain 65536-point real FFT), keeps
// the reset integration length of 16 spectra and starts the run. The ADC
// stream is a cosine of amplitude 200 LSB placed exactly on channel K0. The
// first integration that is read out is checked:
//   - the read-out brings all 32768 channels in order, one per clock;
//   - the largest channel is K0 and holds 16 * (200 * 65536 / 2)^2 within 1%;
//   - every channel more than two away from K0 is below 1e-6 of the peak;
//   - consecutive dumps are 16 * 2048 clocks apart (one spectrum per frame).
module tb_xffts_full;
  localparam int NL = 16, NP = 2048, LANES = 2 * NL, K = LANES * NP, N = NL * NP;
  localparam int TAPS = 4, NINT = 16, K0 = 1000;
  localparam real PI = 3.14159265358979323846;
  localparam real AMP = 200.0;

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  logic signed [LANES-1:0][9:0] adc_data = '0;
  logic bus_we = 0;
  logic [19:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic spec_valid, spec_last, spec_dump;
  logic [$clog2(N)-1:0] spec_chan;
  logic [31:0] spec_data;

  int checks = 0, failures = 0;
  int ndump = 0, nread = 0, nval = 0, cyc = 0, last_dump = -1, peak_k = -1;
  real peak = 0.0, worst_far = 0.0;
  real pwr [N];
  bit done = 0;

  xffts_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic bus_write(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  function automatic real f2r(input logic [31:0] f);
    real r;
    int e;
    if (f[30:23] == 0) return 0.0;
    r = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    while (e > 0) begin r = r * 2.0; e--; end
    while (e < 0) begin r = r / 2.0; e++; end
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < TAPS * K; g++)
      bus_write(20'h40000 | 20'(g), (g < K) ? 32'd16384 : 32'd0);
    bus_write(20'h0, 32'd1);
    // stream until the first integration has been read out
    for (longint n = 0; !done; n++) begin
      @(negedge clk);
      adc_valid = 1;
      for (int j = 0; j < LANES; j++) begin
        automatic longint i = n * LANES + j;
        adc_data[j] = 10'($rtoi($floor(AMP * $cos(2.0 * PI * K0 * real'(i % K) / K) + 0.5)));
      end
    end
    @(negedge clk); adc_valid = 0;

    begin
      real expect_pk;
      expect_pk = NINT * (AMP * K / 2.0) ** 2;
      checks += 3;
      if (peak_k != K0) begin failures++; $display("FAIL: peak at channel %0d", peak_k); end
      if ((peak - expect_pk) ** 2 > (0.01 * expect_pk) ** 2) begin
        failures++; $display("FAIL: peak %e, expected %e", peak, expect_pk);
      end
      if (worst_far > 1.0e-6 * expect_pk) begin
        failures++; $display("FAIL: leakage %e", worst_far);
      end
      $display("peak channel %0d power %e (expected %e), worst far channel %e",
               peak_k, peak, expect_pk, worst_far);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && spec_dump) begin
    if (last_dump >= 0) begin
      checks++;
      if (cyc - last_dump != NINT * NP) begin
        failures++; $display("FAIL: dump spacing %0d", cyc - last_dump);
      end
    end
    last_dump = cyc;
    ndump++;
  end

  always @(posedge clk) if (rst_n && spec_valid && nread == 0) begin
    automatic real p = f2r(spec_data);
    checks++;
    if (int'(spec_chan) != nval) begin failures++; $display("FAIL: channel %0d at %0d", spec_chan, nval); end
    if (p > peak) begin peak = p; peak_k = int'(spec_chan); end
    if ((int'(spec_chan) - K0) ** 2 > 4 && p > worst_far) worst_far = p;
    nval++;
    if (spec_last) begin
      checks++;
      if (nval != N) begin failures++; $display("FAIL: read-out of %0d channels", nval); end
      nread++;
      done = 1;
    end
  end

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
