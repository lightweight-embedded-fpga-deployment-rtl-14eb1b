// tb_gdn_engine: one engine (MAX_C = 16) on random parameters and pixels, in GDN and iGDN
// mode and with several channel counts (16, 12, 5, 1). Every int8 result is compared with a
// double-precision reference (at most 1 LSB apart), each output channel must be written exactly
// once before `done`, and the pixel time must be C + C*C + 12 clocks (measured here as C + C*C + 14, from
// driving start one edge before it is sampled to seeing done one edge after it rises).
// Parameters are loaded once per test through the parameter port.
module tb_gdn_engine;
  import gdn_pkg::*;
  import gdn_ref_pkg::*;
  localparam int MAX_C = 16;
  localparam int CW = $clog2(MAX_C);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  gdn_mode_e mode = MODE_GDN;
  logic [CW-1:0] channels = '0;
  logic [3:0] in_fp = 0, out_fp = 0;
  logic pw_en = 0, pw_sel = 0;
  logic [15:0] pw_addr = 0;
  logic [31:0] pw_data = 0;
  logic [CW-1:0] act_raddr;
  act_t act_rdata;
  logic res_we;
  logic [CW-1:0] res_waddr;
  act_t res_wdata;
  logic [31:0] sat_count;

  gdn_engine #(.MAX_C(MAX_C)) dut (.*);

  int act[];
  int unsigned gamma[], beta[];
  int got[MAX_C];
  int wr_cnt[MAX_C];

  always_ff @(posedge clk) act_rdata <= act_t'(act[act_raddr]);
  always @(posedge clk) if (res_we) begin
    got[res_waddr] = int'(res_wdata);
    wr_cnt[res_waddr]++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_params(input int c, input int gmax);
    gamma = new[c * c];
    beta  = new[c];
    for (int i = 0; i < c; i++) beta[i] = $urandom_range(32'h0000_8000, 32'h0002_0000);
    for (int k = 0; k < c * c; k++) gamma[k] = $urandom_range(0, gmax);
    for (int k = 0; k < c + c * c; k++) begin
      @(posedge clk);
      pw_en   <= 1;
      pw_sel  <= (k >= c);
      pw_addr <= 16'((k >= c) ? k - c : k);
      pw_data <= (k >= c) ? gamma[k - c] : beta[k];
    end
    @(posedge clk);
    pw_en <= 0;
  endtask

  int n_sat_ref = 0;
  task automatic run_pixel(input int c, input bit igdn, input int ifp, input int ofp);
    int t0, t1, e;
    bit s;
    act = new[MAX_C];
    for (int j = 0; j < MAX_C; j++) act[j] = $urandom_range(0, 255) - 128;
    for (int j = 0; j < MAX_C; j++) wr_cnt[j] = 0;
    @(posedge clk);
    start <= 1; mode <= igdn ? MODE_IGDN : MODE_GDN; channels <= CW'(c);
    in_fp <= 4'(ifp); out_fp <= 4'(ofp);
    t0 = $time;
    @(posedge clk);
    start <= 0;
    do @(posedge clk); while (!done);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != c + c * c + 14) begin
      failures++;
      $display("FAIL pixel time %0d cycles, expected %0d", (t1 - t0) / 10, c + c * c + 14);
    end
    @(posedge clk);
    for (int i = 0; i < c; i++) begin
      e = ref_out(igdn, ifp, ofp, c, i, act, gamma, beta, s);
      n_sat_ref += s;
      checks++;
      if (wr_cnt[i] != 1 || got[i] > e + 1 || got[i] < e - 1) begin
        failures++;
        $display("FAIL c=%0d igdn=%0d ch %0d got %0d exp %0d (writes %0d)", c, igdn, i, got[i], e, wr_cnt[i]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    load_params(16, 32'h4000);
    for (int n = 0; n < 6; n++) run_pixel(16, 0, 4, 6);
    for (int n = 0; n < 6; n++) run_pixel(16, 1, 5, 2);
    load_params(12, 32'h2000);
    for (int n = 0; n < 4; n++) run_pixel(12, n % 2, 4, 5);
    load_params(5, 32'h8000);
    for (int n = 0; n < 4; n++) run_pixel(5, n % 2, 3, 4);
    load_params(1, 32'h10000);
    for (int n = 0; n < 4; n++) run_pixel(1, n % 2, 2, 6);
    checks++;
    if (n_sat_ref == 0 || sat_count == 0) begin
      failures++;
      $display("FAIL saturation never exercised (ref %0d, dut %0d)", n_sat_ref, sat_count);
    end
    $display("engine: %0d saturated outputs (reference %0d)", sat_count, n_sat_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
