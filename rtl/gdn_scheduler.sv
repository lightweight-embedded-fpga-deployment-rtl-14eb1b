// gdn_scheduler: runs one GDN layer on the N_ENG engines of the core.
//
// On a descriptor (valid/ready) it first streams the layer parameters from memory,
// beta[0..C-1] followed by gamma[0..C*C-1] (row i = output channel i), and writes every word
// into the local pools of all engines at once. It then distributes the pixels: pixel p goes to
// engine p mod N_ENG. To start an engine it copies the pixel's packed int8 input
// (W = ceil(C/4) words at src_addr + p*W) into the engine's slot of the global pool and pulses
// eng_start. When an engine reports done, the scheduler copies its result slot back to memory
// (dst_addr + p*W) before the engine may take another pixel; stores take precedence over
// loads. layer_done pulses after the last result is written.
// Memory port: one request at a time, held with a stable address until ram_gnt; read data
// arrives later on ram_rvalid, in order; a write completes with its grant.
// Counters of parameter words, loads and stores are exported for observation.
// Three 32-bit data outputs are plain wires from inputs on purpose: read data from memory goes
// unregistered to the engines' parameter port (pw_data) and to the global pool (gm_wr_data),
// and a result word read from the global pool goes straight out as write data (ram_wdata).
// The scheduler only steers them through the matching enables and addresses.
// The paper names a scheduler that feeds three parallel units; the pixel-level round robin,
// the broadcast parameter load and the memory protocol are this design's choices.
module gdn_scheduler
  import gdn_pkg::*;
#(
  parameter int unsigned N_ENG = 3,
  parameter int unsigned MAX_C = 192,
  localparam int unsigned CW = $clog2(MAX_C),
  localparam int unsigned WPS = (MAX_C + 3) / 4,
  localparam int unsigned WW = $clog2(WPS),
  localparam int unsigned SW = (N_ENG > 1) ? $clog2(N_ENG) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // descriptor from instruction fetch
  input  logic             desc_valid,
  output logic             desc_ready,
  input  desc_t            desc,
  output logic             layer_done,
  // memory
  output logic             ram_req,
  output logic             ram_we,
  output logic [31:0]      ram_addr,
  output logic [31:0]      ram_wdata,
  input  logic             ram_gnt,
  input  logic             ram_rvalid,
  input  logic [31:0]      ram_rdata,
  // engines
  output logic [N_ENG-1:0] eng_start,
  input  logic [N_ENG-1:0] eng_done,
  output gdn_mode_e        cfg_mode,
  output logic [CW-1:0]    cfg_channels,
  output logic [3:0]       cfg_in_fp,
  output logic [3:0]       cfg_out_fp,
  output logic             pw_en,
  output logic             pw_sel,
  output logic [15:0]      pw_addr,
  output logic [31:0]      pw_data,
  // global memory pool
  output logic             gm_wr_en,
  output logic [SW-1:0]    gm_wr_slot,
  output logic [WW-1:0]    gm_wr_word,
  output logic [31:0]      gm_wr_data,
  output logic [SW-1:0]    gm_rd_slot,
  output logic [WW-1:0]    gm_rd_word,
  input  logic [31:0]      gm_rd_data,
  // observation
  output logic [31:0]      param_words,
  output logic [31:0]      pix_loaded,
  output logic [31:0]      pix_stored
);
  typedef enum logic [3:0] {
    S_IDLE, S_PREQ, S_PWAIT, S_DISPATCH, S_LREQ, S_LWAIT, S_START, S_SRD, S_SREQ, S_DONE
  } state_e;
  state_e state;

  desc_t              d;
  logic [31:0]        pcnt, ptotal;
  logic [WW-1:0]      w;
  logic [WW-1:0]      wlast;
  logic [SW-1:0]      rr, cur;
  logic [N_ENG-1:0]   active, pending;
  logic [31:0]        eng_pix [N_ENG];
  logic [31:0]        words_c;

  assign words_c = (32'(d.channels) + 3) >> 2;
  assign wlast   = WW'(words_c - 1);

  // lowest engine with a result waiting
  logic          any_pend;
  logic [SW-1:0] pend_idx;
  always_comb begin
    any_pend = 1'b0;
    pend_idx = '0;
    for (int k = N_ENG - 1; k >= 0; k--)
      if (pending[k]) begin any_pend = 1'b1; pend_idx = SW'(k); end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      d <= '0;
      pcnt <= '0; ptotal <= '0; w <= '0; rr <= '0; cur <= '0;
      active <= '0; pending <= '0;
      layer_done <= 1'b0;
      param_words <= '0; pix_loaded <= '0; pix_stored <= '0;
      for (int k = 0; k < N_ENG; k++) eng_pix[k] <= '0;
    end else begin
      layer_done <= 1'b0;
      for (int k = 0; k < N_ENG; k++) if (eng_done[k]) pending[k] <= 1'b1;
      unique case (state)
        S_IDLE: if (desc_valid) begin
          d      <= desc;
          pcnt   <= '0;
          ptotal <= 32'(desc.channels) + 32'(desc.channels) * 32'(desc.channels);
          rr     <= '0;
          pix_loaded <= '0; pix_stored <= '0;
          state  <= S_PREQ;
        end
        S_PREQ:  if (ram_gnt) state <= S_PWAIT;
        S_PWAIT: if (ram_rvalid) begin
          param_words <= param_words + 1'b1;
          if (pcnt == ptotal - 1) state <= S_DISPATCH;
          else begin
            pcnt  <= pcnt + 1'b1;
            state <= S_PREQ;
          end
        end
        S_DISPATCH: begin
          w <= '0;
          if (any_pend) begin
            cur   <= pend_idx;
            state <= S_SRD;
          end else if (pix_loaded != d.npix && !active[rr]) begin
            cur   <= rr;
            state <= S_LREQ;
          end else if (pix_stored == d.npix) begin
            state <= S_DONE;
          end
        end
        S_LREQ:  if (ram_gnt) state <= S_LWAIT;
        S_LWAIT: if (ram_rvalid) begin
          if (w == wlast) state <= S_START;
          else begin
            w     <= w + 1'b1;
            state <= S_LREQ;
          end
        end
        S_START: begin
          active[cur]  <= 1'b1;
          eng_pix[cur] <= pix_loaded;
          pix_loaded   <= pix_loaded + 1'b1;
          rr           <= (rr == SW'(N_ENG - 1)) ? '0 : rr + 1'b1;
          state        <= S_DISPATCH;
        end
        S_SRD:   state <= S_SREQ;                 // global pool read latency
        S_SREQ:  if (ram_gnt) begin
          if (w == wlast) begin
            pending[cur] <= 1'b0;
            active[cur]  <= 1'b0;
            pix_stored   <= pix_stored + 1'b1;
            state        <= S_DISPATCH;
          end else begin
            w     <= w + 1'b1;
            state <= S_SRD;
          end
        end
        S_DONE: begin
          layer_done <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign desc_ready = (state == S_IDLE);

  // memory requests
  always_comb begin
    ram_req   = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = '0;
    ram_wdata = gm_rd_data;
    unique case (state)
      S_PREQ: begin ram_req = 1'b1; ram_addr = d.param_addr + pcnt; end
      S_LREQ: begin ram_req = 1'b1; ram_addr = d.src_addr + pix_loaded * words_c + 32'(w); end
      S_SREQ: begin
        ram_req  = 1'b1;
        ram_we   = 1'b1;
        ram_addr = d.dst_addr + eng_pix[cur] * words_c + 32'(w);
      end
      default: ;
    endcase
  end

  // parameter broadcast
  assign pw_en   = (state == S_PWAIT) && ram_rvalid;
  assign pw_sel  = (pcnt >= 32'(d.channels));
  assign pw_addr = pw_sel ? 16'(pcnt - 32'(d.channels)) : 16'(pcnt);
  assign pw_data = ram_rdata;

  // global pool
  assign gm_wr_en   = (state == S_LWAIT) && ram_rvalid;
  assign gm_wr_slot = cur;
  assign gm_wr_word = w;
  assign gm_wr_data = ram_rdata;
  assign gm_rd_slot = cur;
  assign gm_rd_word = w;

  always_comb begin
    eng_start = '0;
    if (state == S_START) eng_start[cur] = 1'b1;
  end

  assign cfg_mode     = d.mode;
  assign cfg_channels = CW'(d.channels);
  assign cfg_in_fp    = d.in_fp;
  assign cfg_out_fp   = d.out_fp;

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 ram_req && !ram_gnt |=> ram_req && $stable(ram_addr));
  a_desc_channels: assert property (@(posedge clk) disable iff (!rst_n)
                                    desc_valid && desc_ready |-> desc.channels inside {[1:MAX_C]});
endmodule
