// tb_fft_pipeline: drives fft_pipeline (NP = 32) with four frames of random
// complex samples and compares every output bin of the first three frames
// with a direct DFT computed in real arithmetic. Also checks that output
// frames are exactly NP clocks apart (one sample per clock).
module tb_fft_pipeline;
  localparam int NP = 32, IN_W = 12, L = $clog2(NP), OW = IN_W + L, NF = 4;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic signed [IN_W-1:0] in_re = '0, in_im = '0;
  logic out_valid, out_sof;
  logic signed [OW-1:0] out_re, out_im;
  int checks = 0, failures = 0;
  int xr [NF][NP], xi [NF][NP];
  int ofr = -1, oix = 0, last_sof = -1, cyc = 0;

  fft_pipeline #(.NP(NP), .IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int f = 0; f < NF; f++)
      for (int t = 0; t < NP; t++) begin
        xr[f][t] = int'($urandom_range(0, 2047)) - 1024;
        xi[f][t] = int'($urandom_range(0, 2047)) - 1024;
      end
    xr[0][3] = 2047; xi[0][3] = -2048;  // a strong tone-like outlier
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF + 2; f++)
      for (int t = 0; t < NP; t++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (t == 0);
        in_re = IN_W'(f < NF ? xr[f][t] : 0);
        in_im = IN_W'(f < NF ? xi[f][t] : 0);
      end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    if (ofr < NF - 1) begin failures++; $display("FAIL: only %0d output frames", ofr + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin
      if (last_sof >= 0) begin
        checks++;
        if (cyc - last_sof != NP) begin failures++; $display("FAIL: frame spacing %0d", cyc - last_sof); end
      end
      last_sof = cyc; ofr++; oix = 0;
    end
    if (ofr >= 0 && ofr < NF) begin
      real er, ei, a;
      er = 0; ei = 0;
      for (int t = 0; t < NP; t++) begin
        a = -2.0 * PI * t * oix / NP;
        er += xr[ofr][t] * $cos(a) - xi[ofr][t] * $sin(a);
        ei += xr[ofr][t] * $sin(a) + xi[ofr][t] * $cos(a);
      end
      checks++;
      if ((er - real'(out_re)) ** 2 > 16.0 * L * L || (ei - real'(out_im)) ** 2 > 16.0 * L * L) begin
        failures++;
        $display("FAIL frame %0d bin %0d: got %0d %0d exp %f %f", ofr, oix, out_re, out_im, er, ei);
      end
    end
    oix++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
