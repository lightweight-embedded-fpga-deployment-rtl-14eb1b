// tb_gdn_multiply_unit: the multiply unit against a real-number model, round(a*b/2^16) with
// saturation, for random operands of mixed size and sign, streamed one per clock.
module tb_gdn_multiply_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic signed [31:0] a = 0, b = 0, p;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gdn_multiply_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_p(input logic signed [31:0] x, input logic signed [31:0] y);
    real r;
    r = $floor((real'(x) * real'(y)) / 65536.0 + 0.5);
    if (r > 2147483647.0)  return 64'sh7FFF_FFFF;
    if (r < -2147483648.0) return -64'sh8000_0000;
    return longint'(r);
  endfunction

  logic signed [31:0] qa[$], qb[$];
  initial begin
    logic signed [31:0] va, vb;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 500; n++) begin
      @(posedge clk);
      va = $signed($urandom_range(0, 32'h03FF_FFFF)) - 32'sh0200_0000;
      vb = $signed($urandom_range(0, 32'h0003_FFFF)) - 32'sh0002_0000;
      if (n == 7) begin va = 32'sh7FFF_0000; vb = 32'sh0010_0000; end   // positive saturation
      if (n == 9) begin va = 32'sh7FFF_0000; vb = -32'sh0010_0000; end  // negative saturation
      a <= va; b <= vb; in_valid <= 1;
      qa.push_back(va); qb.push_back(vb);
    end
    @(posedge clk);
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (qa.size() != 0) begin failures++; $display("FAIL %0d results missing", qa.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e, d;
    logic signed [31:0] ea, eb;
    ea = qa.pop_front(); eb = qb.pop_front();
    e = expect_p(ea, eb);
    d = longint'(p) - e;
    checks++;
    if (d > 1 || d < -1) begin
      failures++;
      $display("FAIL a=%h b=%h got %h exp %h", ea, eb, p, e);
    end
  end
endmodule
