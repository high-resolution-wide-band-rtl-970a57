// tb_chan_transform: chan_transform with NL = 4 streams of NP = 4 bins
// (N = 16 channels of a 32-sample real signal). For each frame the testbench
// draws a random real signal x, packs it as z[n] = x[2n] + j*x[2n+1], computes
// the complex DFT Z in real arithmetic, rounds it and feeds bin s + NL*b on
// stream s at index b. Output stream s at index b must equal channel
// s + NL*b of the real DFT of x (within rounding). Covers the self-paired
// streams 0 and NL/2 and the pair 1/3.
module tb_chan_transform;
  localparam int NL = 4, NP = 4, N = NL * NP, IN_W = 29, OUT_W = 30, NF = 4;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic signed [NL-1:0][IN_W-1:0] in_re = '0, in_im = '0;
  logic out_valid, out_sof;
  logic signed [NL-1:0][OUT_W-1:0] out_re, out_im;
  int checks = 0, failures = 0;
  real x [NF][2*N];
  int zr [NF][N], zi [NF][N];
  int ofr = -1, oix = 0, nsof = 0;

  chan_transform #(.NL(NL), .NP(NP), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int f = 0; f < NF; f++) begin
      for (int n = 0; n < 2 * N; n++) x[f][n] = real'(int'($urandom_range(0, 2000000)) - 1000000);
      for (int k = 0; k < N; k++) begin
        real er, ei, a;
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          a = -2.0 * PI * n * k / N;
          er += x[f][2*n] * $cos(a) - x[f][2*n+1] * $sin(a);
          ei += x[f][2*n] * $sin(a) + x[f][2*n+1] * $cos(a);
        end
        zr[f][k] = int'($floor(er + 0.5));
        zi[f][k] = int'($floor(ei + 0.5));
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF + 2; f++)
      for (int b = 0; b < NP; b++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (b == 0);
        for (int s = 0; s < NL; s++) begin
          in_re[s] = IN_W'(f < NF ? zr[f][s + NL * b] : 0);
          in_im[s] = IN_W'(f < NF ? zi[f][s + NL * b] : 0);
        end
      end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (ofr < NF - 1) begin failures++; $display("FAIL: only %0d output frames", ofr + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin ofr++; oix = 0; end
    if (ofr >= 0 && ofr < NF) begin
      for (int s = 0; s < NL; s++) begin
        real er, ei, a, tol;
        int k, gr, gi;
        k = s + NL * oix;
        gr = int'($signed(out_re[s]));
        gi = int'($signed(out_im[s]));
        er = 0; ei = 0;
        for (int n = 0; n < 2 * N; n++) begin
          a = -PI * n * k / N;
          er += x[ofr][n] * $cos(a);
          ei += x[ofr][n] * $sin(a);
        end
        checks++;
        tol = 8.0 + 2.0e-5 * (er * er + ei * ei) ** 0.5;
        if ((er - real'(gr)) ** 2 > tol * tol || (ei - real'(gi)) ** 2 > tol * tol) begin
          failures++;
          $display("FAIL frame %0d ch %0d: got %0d %0d exp %f %f", ofr, k,
                   gr, gi, er, ei);
        end
      end
    end
    oix++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
