// tb_wola: wola with NL = 2, NP = 4 (4 lanes, K = 16-sample frames, 64
// coefficients). Random coefficients are loaded through the write port, then
// random frames are fed in block order. From the fourth frame on, every
// output must equal sum_m h[m*K + n] * x[f-m][n], shifted right by 14 and
// saturated to 13 bits, computed by the testbench. Includes frames of
// full-scale samples so that saturation is exercised.
module tb_wola;
  localparam int NL = 2, NP = 4, LANES = 2 * NL, K = LANES * NP, TAPS = 4, NF = 8;
  localparam int IN_W = 10, OUT_W = 13, COEF_W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic signed [LANES-1:0][IN_W-1:0] in_data = '0;
  logic coef_we = 0;
  logic [$clog2(TAPS*K)-1:0] coef_addr = '0;
  logic signed [COEF_W-1:0] coef_data = '0;
  logic out_valid, out_sof;
  logic signed [LANES-1:0][OUT_W-1:0] out_data;
  int checks = 0, failures = 0, nsat = 0;
  int h [TAPS*K];
  int x [NF][K];
  int ofr = 2, t = 0;

  wola #(.NL(NL), .NP(NP)) dut (.*);
  always #5 clk = ~clk;

  function automatic int expect_y(int f, int n);
    longint acc;
    acc = 0;
    for (int m = 0; m < TAPS; m++) acc += longint'(h[m * K + n]) * x[f - m][n];
    acc = acc >>> (COEF_W - 2);
    if (acc > 4095) acc = 4095;
    if (acc < -4096) acc = -4096;
    return int'(acc);
  endfunction

  initial begin
    for (int g = 0; g < TAPS * K; g++) h[g] = ((g % K) % 3 == 0) ? -32768 : int'($urandom_range(0, 65535)) - 32768;
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < K; n++)
        x[f][n] = (f >= 2 && f <= 5) ? ((n % 3 == 0) ? -512 : 511) : int'($urandom_range(0, 1023)) - 512;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < TAPS * K; g++) begin
      @(negedge clk); coef_we = 1; coef_addr = 6'(g); coef_data = COEF_W'(h[g]);
    end
    @(negedge clk); coef_we = 0;
    for (int f = 0; f < NF; f++)
      for (int tt = 0; tt < NP; tt++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (tt == 0);
        for (int r = 0; r < LANES; r++) in_data[r] = IN_W'(x[f][2 * (NP * (r / 2) + tt) + r % 2]);
      end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks += 2;
    if (ofr != NF - 1) begin failures++; $display("FAIL: last output frame %0d", ofr); end
    if (nsat == 0) begin failures++; $display("FAIL: saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin ofr++; t = 0; end
    for (int r = 0; r < LANES; r++) begin
      int n, e;
      n = 2 * (NP * (r / 2) + t) + r % 2;
      e = expect_y(ofr, n);
      if (e == 4095 || e == -4096) nsat++;
      checks++;
      if (int'($signed(out_data[r])) != e) begin
        failures++;
        $display("FAIL frame %0d n %0d: %0d vs %0d", ofr, n, $signed(out_data[r]), e);
      end
    end
    t++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
