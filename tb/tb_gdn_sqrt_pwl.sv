// tb_gdn_sqrt_pwl: the table square root against $sqrt over the whole 31-bit input range
// (log-uniform random arguments plus exact squares), streamed one per clock, at three table
// resolutions side by side: SEG_BITS = 4, 6 (the default) and 8. Every result must appear two
// cycles after its input. The error bound follows from the chord error of a linear segment of
// width h = 4 / 2^SEG_BITS on sqrt over [1,4): at most h^2/32 relative, plus the Q16 table
// rounding (4e-5 relative) and 2 LSB. The largest relative error seen for arguments of at
// least 1.0 must also fall as SEG_BITS grows, which is the precision/size trade-off the table
// is parameterised for.
module tb_gdn_sqrt_pwl;
  localparam int NV = 3;
  localparam int SEGS [NV] = '{4, 6, 8};

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [31:0] n = 0;
  logic               out_valid [NV];
  logic signed [31:0] s [NV];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  for (genvar g = 0; g < NV; g++) begin : g_dut
    gdn_sqrt_pwl #(.SEG_BITS(SEGS[g])) dut (
      .clk, .rst_n, .in_valid, .n, .out_valid(out_valid[g]), .s(s[g])
    );
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic signed [31:0] v; int cyc; } item_t;
  item_t q [NV][$];
  real   max_rel [NV] = '{0.0, 0.0, 0.0};
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    logic signed [31:0] v;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 2000; k++) begin
      @(posedge clk);
      if (k < 64)       v = 32'(k * k) << 16;                            // exact squares
      else if (k == 64) v = 32'sh7FFF_FFFF;
      else              v = 32'($urandom) >> $urandom_range(1, 31);
      n <= v; in_valid <= 1;
      for (int g = 0; g < NV; g++) q[g].push_back('{v, cyc});
    end
    @(posedge clk);
    in_valid <= 0;
    repeat (4) @(posedge clk);
    for (int g = 0; g < NV; g++) begin
      checks++;
      if (q[g].size() != 0) begin failures++; $display("FAIL SEG_BITS=%0d: %0d results missing", SEGS[g], q[g].size()); end
      $display("SEG_BITS=%0d: largest relative error %e", SEGS[g], max_rel[g]);
    end
    for (int g = 1; g < NV; g++) begin
      checks++;
      if (!(max_rel[g] < max_rel[g-1])) begin
        failures++; $display("FAIL error does not fall from SEG_BITS=%0d to %0d", SEGS[g-1], SEGS[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NV; g++) begin : g_chk
    always @(posedge clk) if (rst_n && out_valid[g]) begin
      item_t it;
      real ex, err, h, bound;
      it    = q[g].pop_front();
      ex    = $sqrt(real'(it.v) / 65536.0) * 65536.0;
      err   = real'(s[g]) - ex;
      if (err < 0) err = -err;
      h     = 4.0 / real'(1 << SEGS[g]);
      bound = ex * (h * h / 32.0 + 4.0e-5) + 2.0;
      checks++;
      if (err > bound) begin
        failures++;
        $display("FAIL SEG_BITS=%0d sqrt(%h) got %h exp %f", SEGS[g], it.v, s[g], ex);
      end
      if (it.v >= 32'sh1_0000 && err / ex > max_rel[g]) max_rel[g] = err / ex;
      checks++;
      // input driven after edge c, sampled at c+1, registered at c+2, seen here at c+3
      if (cyc - it.cyc != 2 + 1) begin failures++; $display("FAIL latency %0d", cyc - it.cyc); end
    end
  end
endmodule
