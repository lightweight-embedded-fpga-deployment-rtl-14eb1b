// gdn_instr_fetch: instruction fetch of the GDN core.
//
// When the processor pulses `start` with the word address of a descriptor chain, the unit
// reads the five descriptor words from memory (one read outstanding at a time), hands the
// assembled descriptor to the scheduler with a valid/ready handshake, and waits for the
// scheduler's layer_done. If the descriptor's `last` bit is clear it fetches the next
// descriptor, which follows directly in memory; otherwise it pulses irq and returns to idle.
// Memory port: ram_req is held with a stable address until ram_gnt; read data returns later
// on ram_rvalid/ram_rdata, in order. `busy` is high from start until irq.
// The paper names an instruction-fetch block between the processor and the scheduler; the
// descriptor format and the chaining are this design's choices.
module gdn_instr_fetch
  import gdn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] desc_addr,
  output logic        busy,
  output logic        irq,
  output logic        ram_req,
  output logic [31:0] ram_addr,
  input  logic        ram_gnt,
  input  logic        ram_rvalid,
  input  logic [31:0] ram_rdata,
  output logic        desc_valid,
  input  logic        desc_ready,
  output desc_t       desc,
  input  logic        layer_done
);
  typedef enum logic [2:0] { F_IDLE, F_REQ, F_WAIT, F_HAND, F_RUN } fstate_e;
  fstate_e     state;
  logic [31:0] addr;
  logic [2:0]  w;
  logic [31:0] words [DESC_WORDS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= F_IDLE;
      irq   <= 1'b0;
      addr  <= '0;
      w     <= '0;
    end else begin
      irq <= 1'b0;
      unique case (state)
        F_IDLE: if (start) begin
          addr  <= desc_addr;
          w     <= '0;
          state <= F_REQ;
        end
        F_REQ:  if (ram_gnt) state <= F_WAIT;
        F_WAIT: if (ram_rvalid) begin
          words[w] <= ram_rdata;
          if (w == 3'(DESC_WORDS - 1)) state <= F_HAND;
          else begin
            w     <= w + 1'b1;
            state <= F_REQ;
          end
        end
        F_HAND: if (desc_ready) state <= F_RUN;
        F_RUN:  if (layer_done) begin
          if (desc.last) begin
            irq   <= 1'b1;
            state <= F_IDLE;
          end else begin
            addr  <= addr + DESC_WORDS;
            w     <= '0;
            state <= F_REQ;
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end

  assign busy       = (state != F_IDLE);
  assign ram_req    = (state == F_REQ);
  assign ram_addr   = addr + 32'(w);
  assign desc_valid = (state == F_HAND);

  always_comb begin
    desc.mode       = gdn_mode_e'(words[0][31]);
    desc.last       = words[0][30];
    desc.in_fp      = words[0][27:24];
    desc.out_fp     = words[0][23:20];
    desc.channels   = words[0][15:0];
    desc.npix       = words[1];
    desc.param_addr = words[2];
    desc.src_addr   = words[3];
    desc.dst_addr   = words[4];
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 ram_req && !ram_gnt |=> ram_req && $stable(ram_addr));
endmodule
