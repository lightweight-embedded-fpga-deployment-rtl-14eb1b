// tb_gdn_workloads: the GDN and inverse-GDN layers of the four evaluated model widths
// (96, 128, 160 and 192 channels), plus a 134-channel GDN layer standing for the 192-channel
// model with 30% of its filters pruned, run back to back as one nine-descriptor chain on the
// default-size core, three pixels per layer so that each engine takes one pixel of every layer.
// Checks: every output byte within 1 LSB of a double-precision reference, and every engine
// busy for exactly C*C + C + 12 clocks per pixel. It prints the measured cycles per pixel and
// what they imply for one 256x256 patch, whose first GDN layer has 128x128 pixels.
module tb_gdn_workloads;
  import gdn_pkg::*;
  import gdn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, irq;
  logic [31:0] desc_addr = 0;
  logic ram_req, ram_we, ram_gnt, ram_rvalid;
  logic [31:0] ram_addr, ram_wdata, ram_rdata;
  logic [31:0] sat_count, param_words, pix_stored;

  gdn_core dut (.*);
  ram_model #(.WORDS(262144), .LAT(3), .STALL_ONE_IN(0)) u_ram (
    .clk, .rst_n, .req(ram_req), .we(ram_we), .addr(ram_addr), .wdata(ram_wdata),
    .gnt(ram_gnt), .rvalid(ram_rvalid), .rdata(ram_rdata)
  );

  localparam int NL = 9, NPIX = 3;
  int lc [NL] = '{96, 96, 128, 128, 160, 160, 192, 192, 134};
  bit ligdn [NL] = '{0, 1, 0, 1, 0, 1, 0, 1, 0};
  int pbase [NL], src [NL], dst [NL];

  // per-engine busy-period measurement
  int cur_layer = -1;
  int busy_len [3], busy_bad = 0, busy_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ifetch.desc_valid && dut.u_ifetch.desc_ready) cur_layer++;
    for (int k = 0; k < 3; k++) begin
      if (dut.eng_busy[k]) busy_len[k]++;
      else if (busy_len[k] != 0) begin
        busy_seen++;
        if (busy_len[k] != lc[cur_layer] * lc[cur_layer] + lc[cur_layer] + 12) begin
          busy_bad++;
          $display("FAIL layer %0d engine %0d busy %0d cycles", cur_layer, k, busy_len[k]);
        end
        busy_len[k] = 0;
      end
    end
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, w, c, e, got;
    bit s;
    int act[];
    int unsigned gamma[], beta[];
    logic [31:0] m;
    for (int k = 0; k < 3; k++) busy_len[k] = 0;
    a = 64;
    for (int n = 0; n < NL; n++) begin
      c = lc[n]; w = (c + 3) / 4;
      pbase[n] = a; a += c + c * c;
      src[n] = a;   a += NPIX * w;
      dst[n] = a;   a += NPIX * w;
      u_ram.mem[5 * n + 0] = {ligdn[n], n == NL - 1, 2'b00, 4'd4, ligdn[n] ? 4'd3 : 4'd6, 4'h0, 16'(c)};
      u_ram.mem[5 * n + 1] = NPIX;
      u_ram.mem[5 * n + 2] = pbase[n];
      u_ram.mem[5 * n + 3] = src[n];
      u_ram.mem[5 * n + 4] = dst[n];
      for (int i = 0; i < c; i++) u_ram.mem[pbase[n] + i] = $urandom_range(32'h0000_8000, 32'h0002_0000);
      for (int k = 0; k < c * c; k++) u_ram.mem[pbase[n] + c + k] = $urandom_range(0, 32'h0400);
      for (int k = 0; k < NPIX * w; k++) u_ram.mem[src[n] + k] = $urandom;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    do @(posedge clk); while (!irq);
    repeat (3) @(posedge clk);

    for (int n = 0; n < NL; n++) begin
      c = lc[n]; w = (c + 3) / 4;
      gamma = new[c * c]; beta = new[c]; act = new[c];
      for (int i = 0; i < c; i++) beta[i] = u_ram.mem[pbase[n] + i];
      for (int k = 0; k < c * c; k++) gamma[k] = u_ram.mem[pbase[n] + c + k];
      for (int p = 0; p < NPIX; p++) begin
        for (int j = 0; j < c; j++) begin
          m = u_ram.mem[src[n] + p * w + j / 4];
          act[j] = int'($signed(m[8*(j%4) +: 8]));
        end
        for (int i = 0; i < c; i++) begin
          e = ref_out(ligdn[n], 4, ligdn[n] ? 3 : 6, c, i, act, gamma, beta, s);
          m = u_ram.mem[dst[n] + p * w + i / 4];
          got = int'($signed(m[8*(i%4) +: 8]));
          checks++;
          if (got > e + 1 || got < e - 1) begin
            failures++;
            $display("FAIL layer %0d (C=%0d) pixel %0d ch %0d: got %0d exp %0d", n, c, p, i, got, e);
          end
        end
      end
      $display("C=%0d %s: %0d cycles per pixel per engine; a 128x128 feature map on 3 engines: %0d cycles",
               c, ligdn[n] ? "iGDN" : "GDN ", c * c + c + 12, (128 * 128 / 3 + 1) * (c * c + c + 12));
    end
    checks++;
    if (busy_seen != NL * NPIX) begin failures++; $display("FAIL %0d busy periods seen", busy_seen); end
    checks++;
    if (busy_bad != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
