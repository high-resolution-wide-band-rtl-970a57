// tb_xffts_core: end-to-end test of the spectrometer core at reduced size:
// NL = 4 lanes, NP = 8 points per lane (64-sample frames, 32 channels) and a
// 28-bit integrator so that saturation is reachable in a short run.
//
// The host bus loads 256 random WOLA coefficients (|h| <= 1), sets NINT = 4
// and starts the run; ADC frames then stream without a break.
//   1. Noise plus a tone; the first two integrations are compared channel by
//      channel with a model built here in real arithmetic: exact WOLA (same
//      shift and saturation), direct 64-point real DFT, |X|^2 summed over 4
//      spectra, float decoded by hand. Dumps must be 4*NP clocks apart.
//   2. NINT = 2: integrations shorter than the 32-clock read-out -> overrun.
//   3. NINT = 8 with a full-scale tone -> the integrator saturates.
//   4. CONTROL = 0: no further dumps.
// Counted mechanisms (each must occur): coefficient load, dumps at NINT 4,
// integration-length switch, overrun, overflow, stop.
module tb_xffts_core;
  localparam int NL = 4, NP = 8, LANES = 2 * NL, K = LANES * NP, N = NL * NP;
  localparam int ACC_W = 28, TAPS = 4, NFR = 64;
  localparam real PI = 3.14159265358979323846;
  localparam real AMAX = 268435455.0;              // 2^ACC_W - 1

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
  int h [TAPS*K];
  int x [NFR][K];
  real expP [2][N];
  real tolP [2][N];
  int ndump = 0, nread = 0, nval = 0, cyc = 0, last_dump = -1;
  int n_coef = 0, n_dump4 = 0, n_switch = 0, n_ovr = 0, n_ovf = 0, n_stop = 0;
  int dumps_at_stop = 0;

  xffts_core #(.NL(NL), .NP(NP), .ACC_W(ACC_W)) dut (.*);

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

  // reference for the first two integrations (spectra 0..7 = frames 3..10)
  task automatic build_reference();
    for (int i = 0; i < 2; i++)
      for (int k = 0; k < N; k++) begin expP[i][k] = 0; tolP[i][k] = 0; end
    for (int j = 0; j < 8; j++) begin
      int y [K];
      for (int n = 0; n < K; n++) begin
        longint acc;
        acc = 0;
        for (int m = 0; m < TAPS; m++) acc += longint'(h[m * K + n]) * x[j + 3 - m][n];
        acc = acc >>> 14;
        if (acc > 4095) acc = 4095;
        if (acc < -4096) acc = -4096;
        y[n] = int'(acc);
      end
      for (int k = 0; k < N; k++) begin
        real er, ei, a, mag, ec;
        er = 0; ei = 0;
        for (int n = 0; n < K; n++) begin
          a = -2.0 * PI * n * k / K;
          er += y[n] * $cos(a);
          ei += y[n] * $sin(a);
        end
        mag = (er * er + ei * ei) ** 0.5;
        ec = 40.0 + 1.0e-4 * mag;
        expP[j / 4][k] += er * er + ei * ei;
        tolP[j / 4][k] += 3.0 * mag * ec + 2.0 * ec * ec;
      end
    end
  endtask

  initial begin
    for (int g = 0; g < TAPS * K; g++) h[g] = int'($urandom_range(0, 32768)) - 16384;
    for (int f = 0; f < NFR; f++)
      for (int n = 0; n < K; n++) begin
        real tone;
        if (f < 28) begin
          tone = 150.0 * $cos(2.0 * PI * 5.3 * n / K + f);
          x[f][n] = int'(tone) + int'($urandom_range(0, 500)) - 250;
        end else begin
          x[f][n] = (n % 4 < 2) ? 511 : -512;    // full-scale square wave at fs/4
        end
      end
    build_reference();

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < TAPS * K; g++) begin
      bus_write(20'h40000 | 20'(g), 32'(h[g]));
      n_coef++;
    end
    bus_write(20'h1, 32'd4);
    bus_write(20'h0, 32'd1);

    // stream the frames; register writes are interleaved with the stream
    fork
      begin
        for (int f = 0; f < NFR; f++)
          for (int c = 0; c < NP; c++) begin
            @(negedge clk);
            adc_valid = 1;
            for (int j = 0; j < LANES; j++) adc_data[j] = 10'(x[f][LANES * c + j]);
          end
        @(negedge clk); adc_valid = 0;
      end
      begin
        repeat (24 * NP) @(posedge clk);
        bus_write(20'h1, 32'd2); n_switch++;
        repeat (8 * NP) @(posedge clk);
        bus_write(20'h1, 32'd8);
        repeat (22 * NP) @(posedge clk);
        bus_write(20'h0, 32'd0);
        repeat (8 * NP) @(posedge clk);
        dumps_at_stop = ndump;
      end
    join
    repeat (10 * NP) @(posedge clk);
    if (ndump == dumps_at_stop) n_stop++;

    // read STATUS: overflow and overrun flags
    @(negedge clk); bus_addr = 20'h2;
    @(negedge clk);
    if (bus_rdata[16]) n_ovf++;
    if (bus_rdata[17]) n_ovr++;
    checks++;
    if (int'(bus_rdata[15:0]) != ndump) begin
      failures++; $display("FAIL: STATUS dump count %0d vs %0d", bus_rdata[15:0], ndump);
    end

    $display("mechanisms: coef_load=%0d dumps_nint4=%0d nint_switch=%0d overrun=%0d overflow=%0d stop=%0d",
             n_coef, n_dump4, n_switch, n_ovr, n_ovf, n_stop);
    checks += 6;
    if (n_coef == 0)   begin failures++; $display("FAIL: no coefficient load"); end
    if (n_dump4 < 2)   begin failures++; $display("FAIL: integrations of 4 not seen"); end
    if (n_switch == 0) begin failures++; $display("FAIL: no integration switch"); end
    if (n_ovr == 0)    begin failures++; $display("FAIL: no overrun"); end
    if (n_ovf == 0)    begin failures++; $display("FAIL: no overflow"); end
    if (n_stop == 0)   begin failures++; $display("FAIL: dumps continued after stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // dumps and their spacing during the first phase
  always @(posedge clk) if (rst_n && spec_dump) begin
    if (ndump == 1) begin
      checks++;
      if (cyc - last_dump != 4 * NP) begin failures++; $display("FAIL: dump spacing %0d", cyc - last_dump); end
      else n_dump4 += 2;
    end
    last_dump = cyc;
    ndump++;
  end

  // read-out of the first two integrations against the model
  always @(posedge clk) if (rst_n && spec_valid) begin
    if (nread < 2) begin
      real got, e, t;
      got = f2r(spec_data);
      e = expP[nread][spec_chan];
      t = tolP[nread][spec_chan] + e * 2.0 ** -22;
      if (e > AMAX) begin e = AMAX; t = t + 1.0; end   // integrator saturates
      checks++;
      if (int'(spec_chan) != nval || (got - e) ** 2 > t * t) begin
        failures++;
        $display("FAIL integ %0d ch %0d (exp ch %0d): %e vs %e (tol %e)", nread, spec_chan, nval, got, e, t);
      end
    end
    nval++;
    if (spec_last) begin
      if (nread < 2) begin
        checks++;
        if (nval != N) begin failures++; $display("FAIL: read-out of %0d channels", nval); end
      end
      nread++;
      nval = 0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
