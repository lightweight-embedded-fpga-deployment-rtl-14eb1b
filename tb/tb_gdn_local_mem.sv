// tb_gdn_local_mem: fills gamma, beta, x and x^2 of a local pool (MAX_C = 12) with random
// words, then reads every location back through all four read ports, checking the data and
// the one-cycle read latency against a shadow copy kept in the testbench.
module tb_gdn_local_mem;
  localparam int MAX_C = 12;
  localparam int CW = $clog2(MAX_C);
  localparam int GW = $clog2(MAX_C * MAX_C);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pw_en = 0, pw_sel = 0;
  logic [15:0] pw_addr = 0;
  logic [31:0] pw_data = 0;
  logic [GW-1:0] g_addr = 0;
  logic [CW-1:0] b_addr = 0, x_waddr = 0, x_raddr = 0, x2_raddr = 0;
  logic signed [31:0] g_data, b_data, x_wdata = 0, x2_wdata = 0, x_rdata, x2_rdata;
  logic x_we = 0;

  gdn_local_mem #(.MAX_C(MAX_C)) dut (.*);

  logic [31:0] sg [MAX_C * MAX_C], sb [MAX_C], sx [MAX_C], sx2 [MAX_C];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < MAX_C * MAX_C; k++) begin
      @(posedge clk);
      sg[k] = $urandom;
      pw_en <= 1; pw_sel <= 1; pw_addr <= 16'(k); pw_data <= sg[k];
    end
    for (int k = 0; k < MAX_C; k++) begin
      @(posedge clk);
      sb[k] = $urandom; sx[k] = $urandom; sx2[k] = $urandom;
      pw_en <= 1; pw_sel <= 0; pw_addr <= 16'(k); pw_data <= sb[k];
      x_we <= 1; x_waddr <= CW'(k); x_wdata <= sx[k]; x2_wdata <= sx2[k];
    end
    @(posedge clk);
    pw_en <= 0; x_we <= 0;
    for (int k = 0; k < MAX_C * MAX_C; k++) begin
      g_addr <= GW'(k);
      b_addr <= CW'(k % MAX_C); x_raddr <= CW'((k + 3) % MAX_C); x2_raddr <= CW'((k + 7) % MAX_C);
      @(posedge clk);
      #1;
      checks += 4;
      if (g_data !== sg[k])                 begin failures++; $display("FAIL gamma %0d", k); end
      if (b_data !== sb[k % MAX_C])         begin failures++; $display("FAIL beta %0d", k); end
      if (x_rdata !== sx[(k + 3) % MAX_C])  begin failures++; $display("FAIL x %0d", k); end
      if (x2_rdata !== sx2[(k + 7) % MAX_C]) begin failures++; $display("FAIL x2 %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
