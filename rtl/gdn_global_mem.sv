// gdn_global_mem: the global memory pool shared by the scheduler and the N_ENG engines.
//
// Each engine owns one slot: an input vector of MAX_C int8 activations and an output vector
// of MAX_C int8 results. The scheduler fills an input slot four bytes (one 32-bit memory word,
// byte 0 in bits 7:0) at a time and drains an output slot the same way; each engine reads its
// input one byte per clock and writes one result byte per clock. All reads are synchronous
// (data one cycle after the address). Ports of different slots are independent, so the
// scheduler can move one engine's data while the others compute.
// The paper only names this pool; the slot organisation is this design's choice.
module gdn_global_mem #(
  parameter int unsigned N_ENG = 3,
  parameter int unsigned MAX_C = 192,
  localparam int unsigned CW = $clog2(MAX_C),
  localparam int unsigned WPS = (MAX_C + 3) / 4,       // words per slot
  localparam int unsigned WW = $clog2(WPS),
  localparam int unsigned SW = (N_ENG > 1) ? $clog2(N_ENG) : 1
) (
  input  logic                 clk,
  // scheduler side
  input  logic                 wr_en,
  input  logic [SW-1:0]        wr_slot,
  input  logic [WW-1:0]        wr_word,
  input  logic [31:0]          wr_data,
  input  logic [SW-1:0]        rd_slot,
  input  logic [WW-1:0]        rd_word,
  output logic [31:0]          rd_data,
  // engine side
  input  logic [CW-1:0]        eng_raddr [N_ENG],
  output logic [7:0]           eng_rdata [N_ENG],
  input  logic                 eng_we    [N_ENG],
  input  logic [CW-1:0]        eng_waddr [N_ENG],
  input  logic [7:0]           eng_wdata [N_ENG]
);
  logic [7:0] in_m  [N_ENG][WPS*4];
  logic [7:0] out_m [N_ENG][WPS*4];

  for (genvar k = 0; k < N_ENG; k++) begin : g_slot
    always_ff @(posedge clk) begin
      if (wr_en && wr_slot == SW'(k))
        for (int b = 0; b < 4; b++) in_m[k][4 * int'(wr_word) + b] <= wr_data[8*b +: 8];
      eng_rdata[k] <= in_m[k][eng_raddr[k]];
    end
    always_ff @(posedge clk) begin
      if (eng_we[k]) out_m[k][eng_waddr[k]] <= eng_wdata[k];
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < 4; b++) rd_data[8*b +: 8] <= out_m[rd_slot][4 * int'(rd_word) + b];
  end
endmodule
