// tb_gdn_divide_unit: quotients of random signed dividends by positive divisors spread over
// 2^-16 .. 2^15, streamed one per clock, against real division; error within 5e-4 relative plus
// 2 LSB, a divisor of zero gives the clipped value, and latency is four cycles.
module tb_gdn_divide_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic signed [31:0] x = 0, s = 0, y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gdn_divide_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic signed [31:0] x, s; int cyc; } item_t;
  item_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    logic signed [31:0] vx, vs;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 2000; k++) begin
      @(posedge clk);
      vx = $signed($urandom_range(0, 32'h00FF_FFFF)) - 32'sh0080_0000;
      vs = 32'($urandom_range(1, 32'h7FFF_FFFF)) >> $urandom_range(0, 30);
      if (vs == 0) vs = 1;
      if (k == 5)  vs = 0;
      if (k == 6)  begin vs = 0; vx = -32'sh100; end
      x <= vx; s <= vs; in_valid <= 1;
      q.push_back('{vx, vs, cyc});
    end
    @(posedge clk);
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    item_t it;
    real ex, err;
    it = q.pop_front();
    if (it.s == 0) ex = (it.x < 0) ? -2147483648.0 : 2147483647.0;
    else begin
      ex = real'(it.x) / real'(it.s) * 65536.0;
      if (ex > 2147483647.0)  ex = 2147483647.0;
      if (ex < -2147483648.0) ex = -2147483648.0;
    end
    err = real'(y) - ex;
    if (err < 0) err = -err;
    checks++;
    if (err > (ex < 0 ? -ex : ex) * 5.0e-4 + 2.0) begin
      failures++;
      $display("FAIL %h / %h got %h exp %f", it.x, it.s, y, ex);
    end
    checks++;
    // input driven after edge c, sampled at c+1, out_valid high after c+4, seen here at c+5
    if (cyc - it.cyc != 4 + 1) begin failures++; $display("FAIL latency %0d", cyc - it.cyc); end
  end
endmodule
