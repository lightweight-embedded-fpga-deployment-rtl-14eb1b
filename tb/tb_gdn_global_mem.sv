// tb_gdn_global_mem: writes random words into the input slots of three engines, reads them
// back byte by byte through each engine's port (byte 0 of a word is bits 7:0), writes random
// bytes through each engine's result port and reads them back as words through the scheduler
// port, checking slot separation and the one-cycle latency.
module tb_gdn_global_mem;
  localparam int N_ENG = 3, MAX_C = 20;
  localparam int CW = $clog2(MAX_C), WPS = (MAX_C + 3) / 4, WW = $clog2(WPS), SW = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0;
  logic [SW-1:0] wr_slot = 0, rd_slot = 0;
  logic [WW-1:0] wr_word = 0, rd_word = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [CW-1:0] eng_raddr [N_ENG];
  logic [7:0]    eng_rdata [N_ENG];
  logic          eng_we    [N_ENG];
  logic [CW-1:0] eng_waddr [N_ENG];
  logic [7:0]    eng_wdata [N_ENG];

  gdn_global_mem #(.N_ENG(N_ENG), .MAX_C(MAX_C)) dut (.*);

  logic [7:0] sin [N_ENG][WPS*4], sout [N_ENG][WPS*4];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w;
    for (int k = 0; k < N_ENG; k++) begin eng_we[k] = 0; eng_raddr[k] = 0; eng_waddr[k] = 0; eng_wdata[k] = 0; end
    for (int k = 0; k < N_ENG; k++)
      for (int i = 0; i < WPS; i++) begin
        @(posedge clk);
        w = $urandom;
        for (int b = 0; b < 4; b++) sin[k][4*i+b] = w[8*b +: 8];
        wr_en <= 1; wr_slot <= SW'(k); wr_word <= WW'(i); wr_data <= w;
      end
    @(posedge clk);
    wr_en <= 0;
    for (int j = 0; j < MAX_C; j++) begin
      for (int k = 0; k < N_ENG; k++) begin
        eng_raddr[k] <= CW'((j + k) % MAX_C);
        sout[k][j] = $urandom;
        eng_we[k] <= 1; eng_waddr[k] <= CW'(j); eng_wdata[k] <= sout[k][j];
      end
      @(posedge clk);
      #1;
      for (int k = 0; k < N_ENG; k++) begin
        checks++;
        if (eng_rdata[k] !== sin[k][(j + k) % MAX_C]) begin failures++; $display("FAIL in slot %0d byte %0d", k, j); end
      end
    end
    for (int k = 0; k < N_ENG; k++) eng_we[k] <= 0;
    for (int k = 0; k < N_ENG; k++)
      for (int i = 0; i < MAX_C / 4; i++) begin
        rd_slot <= SW'(k); rd_word <= WW'(i);
        @(posedge clk);
        #1;
        checks++;
        if (rd_data !== {sout[k][4*i+3], sout[k][4*i+2], sout[k][4*i+1], sout[k][4*i]}) begin
          failures++; $display("FAIL out slot %0d word %0d: %h", k, i, rd_data);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
