// tb_spec_accum: spec_accum with NL = 2 lanes, NP = 4 (8 channels), 16-bit
// powers and an 18-bit accumulator so that saturation can be reached.
//   A: integrations of 3 spectra with random powers; every read-out channel
//      must equal the sum computed by the testbench; dumps must come every
//      3 spectra.
//   B: integrations of 5 spectra of full-scale power: results saturate at
//      2^18-1 and `overflow` pulses.
//   C: cfg_enable low for two spectra: nothing is dumped.
//   D: integrations of 1 spectrum (shorter than the 8-clock read-out):
//      `overrun` must pulse.
module tb_spec_accum;
  localparam int NL = 2, NP = 4, N = NL * NP, IN_W = 16, ACC_W = 18;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic [NL-1:0][IN_W-1:0] in_pwr = '0;
  logic cfg_enable = 0;
  logic [23:0] cfg_nint = 24'd3;
  logic rd_valid, rd_last, dump, overflow, overrun;
  logic [$clog2(N)-1:0] rd_chan;
  logic [ACC_W-1:0] rd_data;
  int checks = 0, failures = 0;
  typedef longint spec_t [N];
  spec_t exp_q [$];
  spec_t sum;
  int nspec = 0, ndump = 0, novf = 0, novr = 0, nrd = 0;
  bit checking = 1;

  spec_accum #(.NL(NL), .NP(NP), .IN_W(IN_W), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic spectrum(input int nint, input bit en, input int maxv);
    for (int b = 0; b < NP; b++) begin
      @(negedge clk);
      in_valid = 1; in_sof = (b == 0);
      cfg_enable = en; cfg_nint = 24'(nint);
      for (int s = 0; s < NL; s++) begin
        int v;
        v = (maxv < 0) ? 65535 : int'($urandom_range(0, maxv));
        in_pwr[s] = IN_W'(v);
        if (en) begin
          if (nspec == 0) sum[s + NL * b] = v;
          else sum[s + NL * b] += v;
          if (sum[s + NL * b] > (1 << ACC_W) - 1) sum[s + NL * b] = (1 << ACC_W) - 1;
        end
      end
    end
    if (en) begin
      nspec++;
      if (nspec == nint) begin exp_q.push_back(sum); nspec = 0; end
    end else nspec = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 9; i++) spectrum(3, 1, 4000);              // A
    for (int i = 0; i < 10; i++) spectrum(5, 1, -1);               // B
    for (int i = 0; i < 2; i++) spectrum(5, 0, 100);               // C
    begin
      int d0;
      d0 = ndump;
      for (int i = 0; i < 4; i++) spectrum(5, 1, 100);
      checks++;
      if (ndump != d0) begin failures++; $display("FAIL: dump while disabled"); end
    end
    checking = 0;
    for (int i = 0; i < 6; i++) spectrum(1, 1, 100);               // D
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks += 3;
    if (ndump != 3 + 2 + 6) begin failures++; $display("FAIL: %0d dumps", ndump); end
    if (novf == 0) begin failures++; $display("FAIL: no overflow"); end
    if (novr == 0) begin failures++; $display("FAIL: no overrun"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dump) ndump++;
    if (overflow) novf++;
    if (overrun) novr++;
    if (rd_valid && checking) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected read-out"); end
      else begin
        if (64'(rd_data) != exp_q[0][rd_chan] || int'(rd_chan) != nrd) begin
          failures++;
          $display("FAIL ch %0d (exp %0d): %0d vs %0d", rd_chan, nrd, rd_data, exp_q[0][rd_chan]);
        end
        nrd++;
        if (rd_last) begin void'(exp_q.pop_front()); nrd = 0; end
      end
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
