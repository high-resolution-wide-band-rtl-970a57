// tb_int2float: converts zero, powers of two, all-ones, values below 2^24 and
// random 72-bit values; the expected float is built independently from the
// real value (exponent by repeated doubling, mantissa by division) after
// truncating the integer to its 24 leading bits (round toward zero).
module tb_int2float;
  localparam int IN_W = 72, TAG_W = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [IN_W-1:0] in_data = '0;
  logic [TAG_W-1:0] in_tag = '0;
  logic out_valid;
  logic [31:0] out_data;
  logic [TAG_W-1:0] out_tag;
  int checks = 0, failures = 0;
  logic [31:0] exp_q [$];
  logic [TAG_W-1:0] tag_q [$];

  int2float #(.IN_W(IN_W), .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] ref_float(input logic [IN_W-1:0] v);
    int p;
    logic [IN_W-1:0] t;
    real r;
    int e;
    longint m;
    p = -1;
    for (int i = 0; i < IN_W; i++) if (v[i]) p = i;
    if (p < 0) return 32'h0;
    t = v;
    if (p > 23) t = (v >> (p - 23)) << (p - 23);  // keep 24 leading bits
    r = 0.0;
    for (int i = 0; i < IN_W; i++) if (t[i]) r += 2.0 ** i;
    e = 0;
    while (2.0 ** (e + 1) <= r) e++;
    m = longint'((r / 2.0 ** e - 1.0) * 2.0 ** 23);
    return {1'b0, 8'(127 + e), 23'(m)};
  endfunction

  task automatic put(input logic [IN_W-1:0] v);
    @(negedge clk);
    in_valid = 1; in_data = v; in_tag = TAG_W'($urandom);
    exp_q.push_back(ref_float(v));
    tag_q.push_back(in_tag);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    put('0);
    put('1);
    for (int i = 0; i < IN_W; i++) put(IN_W'(1) << i);
    for (int i = 0; i < 50; i++) put(IN_W'($urandom_range(0, 32'h00ff_ffff)));
    for (int i = 0; i < 300; i++) put({$urandom, $urandom, $urandom} >> $urandom_range(0, 95));
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] e;
    logic [TAG_W-1:0] t;
    e = exp_q.pop_front();
    t = tag_q.pop_front();
    checks++;
    if (out_data != e || out_tag != t) begin
      failures++;
      $display("FAIL: got %h exp %h", out_data, e);
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
