// tb_gdn_scheduler: the scheduler with the real global pool, the memory model (random grant
// stalls) and three behavioural engines. A behavioural engine, once started, waits a random
// time, reads its slot's C input bytes and writes each byte XOR (0x5A + engine) as its
// result, then pulses done. Two layers are run (C = 10 with 11 pixels, then C = 8 with 4).
// Checked: every parameter word broadcast in order (beta then gamma, with the right select and
// address), pixel p started on engine p mod 3, every result byte in memory equal to
// input XOR (0x5A + p mod 3), no engine started while busy, and one layer_done per layer.
module tb_gdn_scheduler;
  import gdn_pkg::*;
  localparam int N_ENG = 3, MAX_C = 16;
  localparam int CW = $clog2(MAX_C), WPS = (MAX_C + 3) / 4, WW = $clog2(WPS), SW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic desc_valid = 0, desc_ready, layer_done;
  desc_t desc = '0;
  logic ram_req, ram_we, ram_gnt, ram_rvalid;
  logic [31:0] ram_addr, ram_wdata, ram_rdata;
  logic [N_ENG-1:0] eng_start, eng_done;
  gdn_mode_e cfg_mode;
  logic [CW-1:0] cfg_channels;
  logic [3:0] cfg_in_fp, cfg_out_fp;
  logic pw_en, pw_sel;
  logic [15:0] pw_addr;
  logic [31:0] pw_data;
  logic gm_wr_en;
  logic [SW-1:0] gm_wr_slot, gm_rd_slot;
  logic [WW-1:0] gm_wr_word, gm_rd_word;
  logic [31:0] gm_wr_data, gm_rd_data;
  logic [31:0] param_words, pix_loaded, pix_stored;

  gdn_scheduler #(.N_ENG(N_ENG), .MAX_C(MAX_C)) dut (.*);
  ram_model #(.WORDS(4096), .LAT(3)) u_ram (
    .clk, .rst_n, .req(ram_req), .we(ram_we), .addr(ram_addr), .wdata(ram_wdata),
    .gnt(ram_gnt), .rvalid(ram_rvalid), .rdata(ram_rdata)
  );

  logic [CW-1:0] eng_raddr [N_ENG];
  logic [7:0]    eng_rdata [N_ENG];
  logic          eng_we    [N_ENG];
  logic [CW-1:0] eng_waddr [N_ENG];
  logic [7:0]    eng_wdata [N_ENG];
  gdn_global_mem #(.N_ENG(N_ENG), .MAX_C(MAX_C)) u_gm (
    .clk, .wr_en(gm_wr_en), .wr_slot(gm_wr_slot), .wr_word(gm_wr_word), .wr_data(gm_wr_data),
    .rd_slot(gm_rd_slot), .rd_word(gm_rd_word), .rd_data(gm_rd_data),
    .eng_raddr, .eng_rdata, .eng_we, .eng_waddr, .eng_wdata
  );

  // behavioural engines
  logic [N_ENG-1:0] ebusy = '0;
  logic [N_ENG-1:0] edone = '0;
  assign eng_done = edone;
  int start_log[$];
  for (genvar k = 0; k < N_ENG; k++) begin : g_beh
    initial begin
      eng_raddr[k] = '0; eng_we[k] = 0; eng_waddr[k] = '0; eng_wdata[k] = '0;
      forever begin
        @(posedge clk);
        if (rst_n && eng_start[k]) begin
          if (ebusy[k]) begin failures++; $display("FAIL engine %0d started while busy", k); end
          start_log.push_back(k);
          ebusy[k] = 1;
          repeat ($urandom_range(20, 60)) @(posedge clk);
          for (int j = 0; j <= int'(cfg_channels); j++) begin
            if (j < int'(cfg_channels)) eng_raddr[k] <= CW'(j);
            eng_we[k] <= (j > 0);
            eng_waddr[k] <= CW'(j - 1);
            eng_wdata[k] <= eng_rdata[k] ^ (8'h5A + 8'(k));
            @(posedge clk);
            #1;
          end
          eng_we[k] <= 0;
          edone[k] <= 1;
          @(posedge clk);
          edone[k] <= 0;
          ebusy[k] = 0;
        end
      end
    end
  end

  // parameter broadcast monitor
  int pexp_base, pexp_c, pidx;
  always @(posedge clk) if (rst_n && pw_en) begin
    checks++;
    if (pw_data !== u_ram.mem[pexp_base + pidx] || pw_sel !== (pidx >= pexp_c) ||
        pw_addr !== 16'((pidx >= pexp_c) ? pidx - pexp_c : pidx)) begin
      failures++; $display("FAIL param word %0d", pidx);
    end
    pidx++;
  end

  int done_cnt = 0;
  always @(posedge clk) if (rst_n && layer_done) done_cnt++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(input int c, input int npix, input int pbase, input int src, input int dst);
    int w;
    logic [31:0] m;
    w = (c + 3) / 4;
    for (int k = 0; k < c + c * c; k++) u_ram.mem[pbase + k] = $urandom;
    for (int k = 0; k < npix * w; k++) begin u_ram.mem[src + k] = $urandom; u_ram.mem[dst + k] = 0; end
    pexp_base = pbase; pexp_c = c; pidx = 0;
    start_log.delete();
    @(posedge clk);
    desc_valid <= 1;
    desc <= '{mode: MODE_GDN, last: 1'b1, in_fp: 4'd4, out_fp: 4'd4, channels: 16'(c), npix: npix,
              param_addr: pbase, src_addr: src, dst_addr: dst};
    do @(posedge clk); while (!desc_ready);
    desc_valid <= 0;
    do @(posedge clk); while (!layer_done);
    checks++;
    if (pidx != c + c * c) begin failures++; $display("FAIL %0d parameter words", pidx); end
    checks++;
    if (start_log.size() != npix) begin failures++; $display("FAIL %0d starts", start_log.size()); end
    for (int p = 0; p < start_log.size(); p++) begin
      checks++;
      if (start_log[p] != p % N_ENG) begin failures++; $display("FAIL pixel %0d on engine %0d", p, start_log[p]); end
    end
    for (int p = 0; p < npix; p++)
      for (int j = 0; j < c; j++) begin
        m = u_ram.mem[dst + p * w + j / 4];
        checks++;
        if (m[8*(j%4) +: 8] !== (u_ram.mem[src + p * w + j / 4][8*(j%4) +: 8] ^ (8'h5A + 8'(p % N_ENG)))) begin
          failures++; $display("FAIL pixel %0d byte %0d", p, j);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_layer(10, 11, 0, 1000, 2000);
    run_layer(8, 4, 300, 1100, 2100);
    repeat (3) @(posedge clk);
    checks++;
    if (done_cnt != 2) begin failures++; $display("FAIL layer_done count %0d", done_cnt); end
    $display("memory stalls: %0d", u_ram.stall_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
