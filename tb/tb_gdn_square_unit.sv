// tb_gdn_square_unit: random and corner operands through the square unit; the expected
// square is computed with 64-bit integer arithmetic, and the one-cycle latency is checked.
module tb_gdn_square_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic signed [31:0] x = 0, x2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gdn_square_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [31:0] model(input logic signed [31:0] v);
    longint p;
    p = (longint'(v) * longint'(v)) >>> 16;
    return (p > 64'sh7FFF_FFFF) ? 32'sh7FFF_FFFF : 32'(p);
  endfunction

  initial begin
    logic signed [31:0] v, e;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      case (n)
        0: v = 0;
        1: v = 32'sh0001_0000;              // 1.0
        2: v = -32'sh0002_8000;             // -2.5
        3: v = 32'sh7FFF_FFFF;              // saturates
        4: v = -32'sh0100_0000;             // -256 -> 65536, saturates
        default: v = (n % 3 == 0) ? $signed($urandom) : $signed($urandom_range(0, 32'h00FF_FFFF)) - 32'sh0080_0000;
      endcase
      e = model(v);
      x <= v; in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1;
      checks++;
      if (!out_valid || x2 !== e) begin
        failures++;
        $display("FAIL x=%h got %h (v=%b) exp %h", v, x2, out_valid, e);
      end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
