// tb_ctrl_regs: writes and reads back CONTROL and NINT, checks their reset
// values, counts dump pulses and sticky flags in STATUS, clears them through
// CLEAR, and checks that a write into the coefficient window appears as a
// one-clock coefficient write with the right address and data.
module tb_ctrl_regs;
  logic clk = 0, rst_n = 0;
  logic bus_we = 0;
  logic [19:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic cfg_enable, coef_we;
  logic [23:0] cfg_nint;
  logic [17:0] coef_addr;
  logic signed [15:0] coef_data;
  logic st_dump = 0, st_overflow = 0, st_overrun = 0;
  int checks = 0, failures = 0, ncoef = 0;

  ctrl_regs dut (.*);
  always #5 clk = ~clk;

  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd_chk(input logic [19:0] a, input logic [31:0] e, input string what);
    @(negedge clk); bus_addr = a;
    @(negedge clk);
    checks++;
    if (bus_rdata !== e) begin failures++; $display("FAIL %s: %h vs %h", what, bus_rdata, e); end
  endtask

  always @(posedge clk) if (rst_n && coef_we) begin
    ncoef++;
    checks++;
    if (coef_addr != 18'h2a5a5 || coef_data != -16'sd1234) begin
      failures++; $display("FAIL coef write %h %0d", coef_addr, coef_data);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd_chk(20'h1, 32'd16, "NINT reset");
    rd_chk(20'h0, 32'd0, "CONTROL reset");
    wr(20'h0, 32'h1);
    wr(20'h1, 32'd1000);
    rd_chk(20'h0, 32'd1, "CONTROL");
    rd_chk(20'h1, 32'd1000, "NINT");
    checks += 2;
    if (cfg_enable !== 1'b1) begin failures++; $display("FAIL cfg_enable"); end
    if (cfg_nint !== 24'd1000) begin failures++; $display("FAIL cfg_nint"); end
    repeat (5) begin @(negedge clk); st_dump = 1; @(negedge clk); st_dump = 0; end
    @(negedge clk); st_overrun = 1; @(negedge clk); st_overrun = 0;
    rd_chk(20'h2, {14'b0, 1'b1, 1'b0, 16'd5}, "STATUS");
    @(negedge clk); st_overflow = 1; @(negedge clk); st_overflow = 0;
    rd_chk(20'h2, {14'b0, 1'b1, 1'b1, 16'd5}, "STATUS 2");
    wr(20'h3, 32'h1);
    rd_chk(20'h2, 32'h0, "STATUS cleared");
    wr(20'h40000 | 20'h2a5a5, 32'(-1234));
    repeat (3) @(posedge clk);
    checks++;
    if (ncoef != 1) begin failures++; $display("FAIL %0d coef writes", ncoef); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
