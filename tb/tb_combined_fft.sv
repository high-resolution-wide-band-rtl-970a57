// tb_combined_fft: combined_fft with NL = 4 lanes and NP = 8 points per lane
// (a 32-point FFT). Random frames are fed in block order (lane l, index t
// carries z[NP*l + t]); output stream s at index b must equal bin s + NL*b of
// a direct DFT computed in real arithmetic. Frame spacing must be NP clocks.
module tb_combined_fft;
  localparam int NL = 4, NP = 8, N = NL * NP, IN_W = 13, OW = IN_W + $clog2(N) + 1, NF = 4;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic signed [NL-1:0][IN_W-1:0] in_re = '0, in_im = '0;
  logic out_valid, out_sof;
  logic signed [NL-1:0][OW-1:0] out_re, out_im;
  int checks = 0, failures = 0;
  int zr [NF][N], zi [NF][N];
  int ofr = -1, oix = 0, last_sof = -1, cyc = 0;

  combined_fft #(.NL(NL), .NP(NP), .IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < N; n++) begin
        zr[f][n] = int'($urandom_range(0, 8191)) - 4096;
        zi[f][n] = int'($urandom_range(0, 8191)) - 4096;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF + 3; f++)
      for (int t = 0; t < NP; t++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (t == 0);
        for (int l = 0; l < NL; l++) begin
          in_re[l] = IN_W'(f < NF ? zr[f][NP * l + t] : 0);
          in_im[l] = IN_W'(f < NF ? zi[f][NP * l + t] : 0);
        end
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
      for (int s = 0; s < NL; s++) begin
        real er, ei, a;
        int k;
        k = s + NL * oix;
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          a = -2.0 * PI * n * k / N;
          er += zr[ofr][n] * $cos(a) - zi[ofr][n] * $sin(a);
          ei += zr[ofr][n] * $sin(a) + zi[ofr][n] * $cos(a);
        end
        checks++;
        if ((er - real'($signed(out_re[s]))) ** 2 > 400.0 || (ei - real'($signed(out_im[s]))) ** 2 > 400.0) begin
          failures++;
          $display("FAIL frame %0d bin %0d: got %0d %0d exp %f %f", ofr, k, $signed(out_re[s]), $signed(out_im[s]), er, ei);
        end
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
