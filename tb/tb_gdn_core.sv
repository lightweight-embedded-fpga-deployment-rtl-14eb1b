// tb_gdn_core: end-to-end run of the GDN core at its default size (three engines, up to 192
// channels), driven the way the processor would drive it. A three-descriptor chain is placed
// in the memory model with its parameters and packed int8 activations:
//   layer 0: GDN,  192 channels, 4 pixels  (the largest layer of the evaluated models)
//   layer 1: iGDN,  24 channels, 7 pixels  (scales chosen so that some outputs saturate)
//   layer 2: GDN,    7 channels, 5 pixels  (channel count not a multiple of four)
// After `start`, the testbench waits for irq and compares every output byte in memory with a
// double-precision reference (at most 1 LSB apart). It also counts the mechanisms the design
// relies on and fails if any never happened: GDN and iGDN layers, descriptor chaining, all
// three engines receiving work, two or more engines computing at once, memory grant stalls,
// int8 output saturation, and channel padding within a memory word.
module tb_gdn_core;
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
  ram_model #(.WORDS(65536), .LAT(3)) u_ram (
    .clk, .rst_n, .req(ram_req), .we(ram_we), .addr(ram_addr), .wdata(ram_wdata),
    .gnt(ram_gnt), .rvalid(ram_rvalid), .rdata(ram_rdata)
  );

  typedef struct {
    bit igdn; int c, npix, in_fp, out_fp, gmax, pbase, src, dst;
  } layer_t;
  layer_t L [3];

  // mechanism counters
  int irq_count = 0, eng_starts [3] = '{0, 0, 0}, overlap_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (irq) irq_count++;
    for (int k = 0; k < 3; k++) if (dut.eng_start[k]) eng_starts[k]++;
    if ($countones(dut.eng_busy) >= 2) overlap_cycles++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic setup_layer(input int n, input bit last);
    int w;
    layer_t l;
    l = L[n];
    w = (l.c + 3) / 4;
    u_ram.mem[5 * n + 0] = {l.igdn, last, 2'b00, 4'(l.in_fp), 4'(l.out_fp), 4'h0, 16'(l.c)};
    u_ram.mem[5 * n + 1] = l.npix;
    u_ram.mem[5 * n + 2] = l.pbase;
    u_ram.mem[5 * n + 3] = l.src;
    u_ram.mem[5 * n + 4] = l.dst;
    for (int i = 0; i < l.c; i++) u_ram.mem[l.pbase + i] = $urandom_range(32'h0000_8000, 32'h0002_0000);
    for (int k = 0; k < l.c * l.c; k++) u_ram.mem[l.pbase + l.c + k] = $urandom_range(0, l.gmax);
    for (int k = 0; k < l.npix * w; k++) begin
      u_ram.mem[l.src + k] = $urandom;
      u_ram.mem[l.dst + k] = 32'hDEAD_BEEF;
    end
  endtask

  int n_sat_ref = 0, n_pad = 0;
  task automatic check_layer(input int n);
    int w, e, got;
    bit s;
    int act[];
    int unsigned gamma[], beta[];
    logic [31:0] m;
    layer_t l;
    l = L[n];
    w = (l.c + 3) / 4;
    gamma = new[l.c * l.c];
    beta  = new[l.c];
    act   = new[l.c];
    for (int i = 0; i < l.c; i++) beta[i] = u_ram.mem[l.pbase + i];
    for (int k = 0; k < l.c * l.c; k++) gamma[k] = u_ram.mem[l.pbase + l.c + k];
    if (l.c % 4 != 0) n_pad++;
    for (int p = 0; p < l.npix; p++) begin
      for (int j = 0; j < l.c; j++) begin
        m = u_ram.mem[l.src + p * w + j / 4];
        act[j] = int'($signed(m[8*(j%4) +: 8]));
      end
      for (int i = 0; i < l.c; i++) begin
        e = ref_out(l.igdn, l.in_fp, l.out_fp, l.c, i, act, gamma, beta, s);
        n_sat_ref += s;
        m = u_ram.mem[l.dst + p * w + i / 4];
        got = int'($signed(m[8*(i%4) +: 8]));
        checks++;
        if (got > e + 1 || got < e - 1) begin
          failures++;
          $display("FAIL layer %0d pixel %0d ch %0d: got %0d exp %0d", n, p, i, got, e);
        end
      end
    end
  endtask

  initial begin
    L[0] = '{0, 192, 4, 4, 6, 32'h0800, 1000, 40000, 41000};
    L[1] = '{1,  24, 7, 5, 4, 32'h4000, 42000, 43000, 43500};
    L[2] = '{0,   7, 5, 3, 5, 32'h8000, 44000, 44200, 44400};
    for (int n = 0; n < 3; n++) setup_layer(n, n == 2);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1; desc_addr <= 0;
    @(posedge clk);
    start <= 0;
    do @(posedge clk); while (!irq);
    repeat (3) @(posedge clk);
    for (int n = 0; n < 3; n++) check_layer(n);

    checks++;
    if (pix_stored != 5) begin failures++; $display("FAIL pix_stored %0d", pix_stored); end
    checks++;
    if (param_words != 192 + 192 * 192 + 24 + 576 + 7 + 49) begin failures++; $display("FAIL param words %0d", param_words); end
    checks++;
    if (sat_count != n_sat_ref && (sat_count > n_sat_ref + 2 || sat_count + 2 < n_sat_ref)) begin
      failures++; $display("FAIL saturation count %0d vs reference %0d", sat_count, n_sat_ref);
    end
    $display("mechanisms: gdn_layers=2 igdn_layers=1 irq=%0d engine_starts=%0d/%0d/%0d overlap_cycles=%0d mem_stalls=%0d saturations=%0d padded_layers=%0d",
             irq_count, eng_starts[0], eng_starts[1], eng_starts[2], overlap_cycles, u_ram.stall_count, sat_count, n_pad);
    checks++; if (irq_count != 1) begin failures++; $display("FAIL irq count %0d", irq_count); end
    for (int k = 0; k < 3; k++) begin
      checks++; if (eng_starts[k] == 0) begin failures++; $display("FAIL engine %0d idle", k); end
    end
    checks++; if (overlap_cycles == 0)     begin failures++; $display("FAIL engines never overlapped"); end
    checks++; if (u_ram.stall_count == 0)  begin failures++; $display("FAIL no memory stall"); end
    checks++; if (sat_count == 0)          begin failures++; $display("FAIL no saturation"); end
    checks++; if (n_pad == 0)              begin failures++; $display("FAIL no padded layer"); end
    checks++; if (busy)                    begin failures++; $display("FAIL busy after irq"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
