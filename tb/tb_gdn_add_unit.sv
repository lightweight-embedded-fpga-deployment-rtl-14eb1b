// tb_gdn_add_unit: random-length sums (1 to 40 terms, gaps between terms) through the add
// unit; each emitted sum must equal beta plus the terms, clipped to [0, 2^31-1].
module tb_gdn_add_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0, sum_valid;
  logic signed [31:0] beta = 0, term = 0, sum;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gdn_add_unit dut (.*);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_q[$];
  initial begin
    int len;
    longint acc;
    logic signed [31:0] t, bt;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < 200; s++) begin
      len = $urandom_range(1, 40);
      bt  = $urandom_range(0, 32'h0004_0000);
      acc = bt;
      for (int k = 0; k < len; k++) begin
        @(posedge clk);
        if (s % 10 == 3) t = 32'sh7000_0000;            // drives the sum into clipping
        else             t = $urandom_range(0, 32'h0100_0000);
        acc += t;
        in_valid <= 1; first <= (k == 0); last <= (k == len - 1); beta <= bt; term <= t;
        if ($urandom_range(0, 3) == 0) begin
          @(posedge clk);
          in_valid <= 0;
        end
      end
      exp_q.push_back(acc > 64'sh7FFF_FFFF ? 64'sh7FFF_FFFF : acc);
    end
    @(posedge clk);
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d sums missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && sum_valid) begin
    longint e;
    e = exp_q.pop_front();
    checks++;
    if (longint'(sum) != e) begin failures++; $display("FAIL sum %h exp %h", sum, e); end
  end
endmodule
