// gdn_core: the custom GDN / inverse-GDN core of the learned-image-compression accelerator.
//
// The convolution layers of the codec run on separate convolution processors; every
// generalised divisive normalisation (GDN, encoder) or its inverse (iGDN, decoder) is handed
// to this core. A processor writes a chain of layer descriptors, the parameters and the int8
// activations into memory and pulses `start`; the core fetches each descriptor
// (gdn_instr_fetch), the scheduler (gdn_scheduler) loads beta and gamma into all engines and
// then spreads the pixels over N_ENG = 3 engines (gdn_engine) through the global pool
// (gdn_global_mem), writing int8 results back to memory. `irq` pulses when the chain is done.
// Inside, GDN arithmetic is 32-bit fixed point while memory traffic is int8, the mixed
// precision the accelerator relies on.
//
// Memory port: ram_req/ram_we/ram_addr/ram_wdata are held until ram_gnt; read data returns on
// ram_rvalid/ram_rdata in request order. Addresses are 32-bit word addresses. Instruction
// fetch and scheduler never request at the same time (the scheduler is idle while descriptors
// are fetched), so the port is shared by a plain multiplexer.
// Three engines, 32-bit GDN arithmetic, square/multiply/add/divide units, table-based square
// root and on-chip parameter pools follow the paper; the descriptor interface, memory protocol
// and per-pixel distribution are this design's choices.
module gdn_core
  import gdn_pkg::*;
#(
  parameter int unsigned N_ENG     = 3,
  parameter int unsigned MAX_C     = 192,
  parameter int unsigned SEG_BITS  = 6,
  parameter int unsigned SEED_BITS = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  // processor side
  input  logic        start,
  input  logic [31:0] desc_addr,
  output logic        busy,
  output logic        irq,
  // memory side
  output logic        ram_req,
  output logic        ram_we,
  output logic [31:0] ram_addr,
  output logic [31:0] ram_wdata,
  input  logic        ram_gnt,
  input  logic        ram_rvalid,
  input  logic [31:0] ram_rdata,
  // status
  output logic [31:0] sat_count,
  output logic [31:0] param_words,
  output logic [31:0] pix_stored
);
  localparam int unsigned CW  = $clog2(MAX_C);
  localparam int unsigned WPS = (MAX_C + 3) / 4;
  localparam int unsigned WW  = $clog2(WPS);
  localparam int unsigned SW  = (N_ENG > 1) ? $clog2(N_ENG) : 1;

  // instruction fetch
  logic        if_req;
  logic [31:0] if_addr;
  logic        desc_valid, desc_ready, layer_done;
  desc_t       desc;

  gdn_instr_fetch u_ifetch (
    .clk, .rst_n, .start, .desc_addr, .busy, .irq,
    .ram_req(if_req), .ram_addr(if_addr), .ram_gnt(ram_gnt && if_req),
    .ram_rvalid, .ram_rdata,
    .desc_valid, .desc_ready, .desc, .layer_done
  );

  // scheduler
  logic             sc_req, sc_we;
  logic [31:0]      sc_addr, sc_wdata;
  logic [N_ENG-1:0] eng_start, eng_done, eng_busy;
  gdn_mode_e        cfg_mode;
  logic [CW-1:0]    cfg_channels;
  logic [3:0]       cfg_in_fp, cfg_out_fp;
  logic             pw_en, pw_sel;
  logic [15:0]      pw_addr;
  logic [31:0]      pw_data;
  logic             gm_wr_en;
  logic [SW-1:0]    gm_wr_slot, gm_rd_slot;
  logic [WW-1:0]    gm_wr_word, gm_rd_word;
  logic [31:0]      gm_wr_data, gm_rd_data;
  logic [31:0]      pix_loaded;

  gdn_scheduler #(.N_ENG(N_ENG), .MAX_C(MAX_C)) u_sched (
    .clk, .rst_n,
    .desc_valid, .desc_ready, .desc, .layer_done,
    .ram_req(sc_req), .ram_we(sc_we), .ram_addr(sc_addr), .ram_wdata(sc_wdata),
    .ram_gnt(ram_gnt && sc_req), .ram_rvalid, .ram_rdata,
    .eng_start, .eng_done,
    .cfg_mode, .cfg_channels, .cfg_in_fp, .cfg_out_fp,
    .pw_en, .pw_sel, .pw_addr, .pw_data,
    .gm_wr_en, .gm_wr_slot, .gm_wr_word, .gm_wr_data,
    .gm_rd_slot, .gm_rd_word, .gm_rd_data,
    .param_words, .pix_loaded, .pix_stored
  );

  assign ram_req   = if_req | sc_req;
  assign ram_we    = !if_req && sc_we;
  assign ram_addr  = if_req ? if_addr : sc_addr;
  assign ram_wdata = sc_wdata;

  // global memory pool
  logic [CW-1:0] eng_raddr [N_ENG];
  logic [7:0]    eng_rdata [N_ENG];
  logic          eng_we    [N_ENG];
  logic [CW-1:0] eng_waddr [N_ENG];
  logic [7:0]    eng_wdata [N_ENG];

  gdn_global_mem #(.N_ENG(N_ENG), .MAX_C(MAX_C)) u_gmem (
    .clk,
    .wr_en(gm_wr_en), .wr_slot(gm_wr_slot), .wr_word(gm_wr_word), .wr_data(gm_wr_data),
    .rd_slot(gm_rd_slot), .rd_word(gm_rd_word), .rd_data(gm_rd_data),
    .eng_raddr, .eng_rdata, .eng_we, .eng_waddr, .eng_wdata
  );

  // engines
  logic [31:0] eng_sat [N_ENG];
  for (genvar k = 0; k < N_ENG; k++) begin : g_eng
    act_t res_q;
    gdn_engine #(.MAX_C(MAX_C), .SEG_BITS(SEG_BITS), .SEED_BITS(SEED_BITS)) u_eng (
      .clk, .rst_n,
      .start(eng_start[k]), .mode(cfg_mode), .channels(cfg_channels),
      .in_fp(cfg_in_fp), .out_fp(cfg_out_fp),
      .busy(eng_busy[k]), .done(eng_done[k]),
      .pw_en, .pw_sel, .pw_addr, .pw_data,
      .act_raddr(eng_raddr[k]), .act_rdata(act_t'(eng_rdata[k])),
      .res_we(eng_we[k]), .res_waddr(eng_waddr[k]), .res_wdata(res_q),
      .sat_count(eng_sat[k])
    );
    assign eng_wdata[k] = 8'(res_q);
  end

  always_comb begin
    sat_count = '0;
    for (int k = 0; k < N_ENG; k++) sat_count = sat_count + eng_sat[k];
  end

  a_one_master: assert property (@(posedge clk) disable iff (!rst_n) !(if_req && sc_req));
  a_start_engine_idle: assert property (@(posedge clk) disable iff (!rst_n) (eng_start & eng_busy) == '0);
endmodule
