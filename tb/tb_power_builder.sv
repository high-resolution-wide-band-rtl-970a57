// tb_power_builder: random and extreme complex values on NL = 4 lanes at the
// full 30-bit width; every output must equal re*re + im*im computed with
// 64-bit integers, one clock after the input.
module tb_power_builder;
  localparam int NL = 4, IN_W = 30;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic signed [NL-1:0][IN_W-1:0] in_re = '0, in_im = '0;
  logic out_valid, out_sof;
  logic [NL-1:0][2*IN_W-1:0] out_pwr;
  int checks = 0, failures = 0;
  longint exp_q [$];

  power_builder #(.NL(NL), .IN_W(IN_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_valid = (i % 7 != 3); in_sof = (i % 16 == 0);
      for (int s = 0; s < NL; s++) begin
        longint r, m;
        if (i < 4) begin
          r = (i[0]) ? -(longint'(1) << (IN_W - 1)) : (longint'(1) << (IN_W - 1)) - 1;
          m = (i[1]) ? -(longint'(1) << (IN_W - 1)) : (longint'(1) << (IN_W - 1)) - 1;
        end else begin
          r = longint'($urandom) - longint'(32'h8000_0000); r = r >>> 2;
          m = longint'($urandom) - longint'(32'h8000_0000); m = m >>> 2;
        end
        in_re[s] = IN_W'(r); in_im[s] = IN_W'(m);
        if (in_valid) exp_q.push_back(r * r + m * m);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int s = 0; s < NL; s++) begin
      longint e;
      e = exp_q.pop_front();
      checks++;
      if (64'(out_pwr[s]) != e) begin failures++; $display("FAIL lane %0d: %0d vs %0d", s, out_pwr[s], e); end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
