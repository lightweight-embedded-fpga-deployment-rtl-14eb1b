// tb_gdn_instr_fetch: a chain of three descriptors in the memory model (the third marked
// last). The testbench plays the scheduler: it accepts each descriptor after a random delay,
// compares every field with what was written, and answers with layer_done. irq must pulse
// exactly once, after the third layer, and busy must be low again afterwards. Memory grants
// are randomly withheld (and must have been at least once). While a layer runs no new
// descriptor may be offered, and every memory read must fall inside the five words of the
// descriptor being fetched. A second start then runs a one-descriptor chain at another address.
module tb_gdn_instr_fetch;
  import gdn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, irq;
  logic [31:0] desc_addr = 0;
  logic ram_req, ram_gnt, ram_rvalid;
  logic [31:0] ram_addr, ram_rdata;
  logic desc_valid, desc_ready = 0, layer_done = 0;
  desc_t desc;

  gdn_instr_fetch dut (.*);
  ram_model #(.WORDS(1024), .LAT(2)) u_ram (
    .clk, .rst_n, .req(ram_req), .we(1'b0), .addr(ram_addr), .wdata(32'h0),
    .gnt(ram_gnt), .rvalid(ram_rvalid), .rdata(ram_rdata)
  );

  int irq_count = 0;
  always @(posedge clk) if (rst_n && irq) irq_count++;

  // address window of the descriptor currently fetched, and whether a layer is running
  int unsigned win_lo = 0;
  bit running = 0;
  int bad_reads = 0, early_valid = 0, reads = 0;
  always @(posedge clk) if (rst_n) begin
    if (ram_req && ram_gnt) begin
      reads++;
      if (ram_addr < win_lo || ram_addr >= win_lo + 5) bad_reads++;
    end
    if (running && desc_valid) early_valid++;
  end

  task automatic check_desc(input int d, input logic [31:0] w [5]);
    checks += 9;
    if (desc.mode != gdn_mode_e'(w[0][31])) begin failures++; $display("FAIL %0d mode", d); end
    if (desc.last != w[0][30])              begin failures++; $display("FAIL %0d last", d); end
    if (desc.in_fp != w[0][27:24])          begin failures++; $display("FAIL %0d in_fp", d); end
    if (desc.out_fp != w[0][23:20])         begin failures++; $display("FAIL %0d out_fp", d); end
    if (desc.channels != w[0][15:0])        begin failures++; $display("FAIL %0d channels", d); end
    if (desc.npix != w[1])                  begin failures++; $display("FAIL %0d npix", d); end
    if (desc.param_addr != w[2])            begin failures++; $display("FAIL %0d param_addr", d); end
    if (desc.src_addr != w[3])              begin failures++; $display("FAIL %0d src_addr", d); end
    if (desc.dst_addr != w[4])              begin failures++; $display("FAIL %0d dst_addr", d); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] wd [4][5];
  initial begin
    for (int d = 0; d < 3; d++) begin
      wd[d][0] = {1'(d % 2), 1'(d == 2), 2'b00, 4'(d + 3), 4'(d + 5), 4'h0, 16'(10 + d)};
      for (int k = 1; k < 5; k++) wd[d][k] = $urandom;
      for (int k = 0; k < 5; k++) u_ram.mem[100 + 5 * d + k] = wd[d][k];
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1; desc_addr <= 100;
    @(posedge clk);
    start <= 0;
    for (int d = 0; d < 3; d++) begin
      win_lo = 100 + 5 * d;
      do @(posedge clk); while (!desc_valid);
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
      check_desc(d, wd[d]);
      desc_ready <= 1;
      @(posedge clk);
      desc_ready <= 0;
      #1 running = 1;
      repeat ($urandom_range(5, 20)) @(posedge clk);
      checks += 2;
      if (irq_count != 0) begin failures++; $display("FAIL early irq"); end
      if (!busy)          begin failures++; $display("FAIL not busy during layer %0d", d); end
      running = 0;
      layer_done <= 1;
      @(posedge clk);
      layer_done <= 0;
    end
    repeat (5) @(posedge clk);
    checks += 2;
    if (irq_count != 1) begin failures++; $display("FAIL irq count %0d", irq_count); end
    if (busy)           begin failures++; $display("FAIL still busy"); end

    // second run: a single descriptor marked last, at another address
    wd[3][0] = {1'b1, 1'b1, 2'b00, 4'd7, 4'd2, 4'h0, 16'd192};
    for (int k = 1; k < 5; k++) wd[3][k] = $urandom;
    for (int k = 0; k < 5; k++) u_ram.mem[500 + k] = wd[3][k];
    win_lo = 500;
    @(posedge clk);
    start <= 1; desc_addr <= 500;
    @(posedge clk);
    start <= 0;
    do @(posedge clk); while (!desc_valid);
    #1;
    check_desc(3, wd[3]);
    desc_ready <= 1;
    @(posedge clk);
    desc_ready <= 0;
    #1 running = 1;
    repeat (10) @(posedge clk);
    running = 0;
    layer_done <= 1;
    @(posedge clk);
    layer_done <= 0;
    repeat (5) @(posedge clk);
    checks += 6;
    if (irq_count != 2)   begin failures++; $display("FAIL irq count %0d after second run", irq_count); end
    if (busy)             begin failures++; $display("FAIL still busy after second run"); end
    if (reads != 20)      begin failures++; $display("FAIL %0d descriptor reads, expected 20", reads); end
    if (bad_reads != 0)   begin failures++; $display("FAIL %0d reads outside the descriptor", bad_reads); end
    if (early_valid != 0) begin failures++; $display("FAIL descriptor offered while a layer ran"); end
    if (u_ram.stall_count == 0) begin failures++; $display("FAIL no memory stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
