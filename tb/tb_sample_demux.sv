// tb_sample_demux: sample_demux with NL = 4, NP = 8 (8 lanes, 64-sample
// frames). Random samples are fed in time order, 8 per clock, with a gap in
// the valid signal; output real lane 2l+e at index t must carry sample
// 2*(NP*l + t) + e of the same frame, output frames must start one frame
// after the input frame, and out_sof must mark t = 0.
module tb_sample_demux;
  localparam int NL = 4, NP = 8, LANES = 2 * NL, FR = LANES * NP, W = 10, NF = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [LANES-1:0][W-1:0] in_data = '0;
  logic out_valid, out_sof;
  logic signed [LANES-1:0][W-1:0] out_data;
  int checks = 0, failures = 0;
  int x [NF][FR];
  int ofr = -1, t = 0, nsof = 0;

  sample_demux #(.NL(NL), .NP(NP), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int f = 0; f < NF; f++) for (int n = 0; n < FR; n++) x[f][n] = int'($urandom_range(0, 1023)) - 512;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NP; c++) begin
        @(negedge clk);
        if (f == 2 && c == 3) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int j = 0; j < LANES; j++) in_data[j] = W'(x[f][LANES * c + j]);
      end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nsof != NF - 1) begin failures++; $display("FAIL: %0d output frames", nsof); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin ofr++; t = 0; nsof++; end
    checks++;
    if (ofr < 0 || (t == 0) != out_sof) begin failures++; $display("FAIL: sof misplaced"); end
    else
      for (int l = 0; l < NL; l++)
        for (int e = 0; e < 2; e++) begin
          checks++;
          if (int'($signed(out_data[2*l+e])) != x[ofr][2 * (NP * l + t) + e]) begin
            failures++;
            $display("FAIL frame %0d t %0d lane %0d: %0d vs %0d", ofr, t, 2*l+e,
                     $signed(out_data[2*l+e]), x[ofr][2 * (NP * l + t) + e]);
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
