// gdn_local_mem: the local memory pool of one GDN engine.
//
// Holds the layer parameters (gamma, a C x C matrix stored row by row with row i for output
// channel i, and beta, one word per channel) and the engine's working vectors for the current
// pixel: the converted activations x_j and their squares x_j^2. All words are Q16.16.
// Parameters are written through pw_* (pw_sel 0 = beta, 1 = gamma); every read port is
// synchronous, data one cycle after the address, as in block RAM. x and x^2 share one write port.
// The paper stores beta, alpha and the activations here and keeps parameters in BRAM; placing
// gamma in the same pool and the port arrangement are this design's choices.
module gdn_local_mem #(
  parameter int unsigned MAX_C = 192,
  localparam int unsigned CW = $clog2(MAX_C),
  localparam int unsigned GW = $clog2(MAX_C * MAX_C)
) (
  input  logic               clk,
  input  logic               pw_en,
  input  logic               pw_sel,
  input  logic [15:0]        pw_addr,
  input  logic [31:0]        pw_data,
  input  logic [GW-1:0]      g_addr,
  output logic signed [31:0] g_data,
  input  logic [CW-1:0]      b_addr,
  output logic signed [31:0] b_data,
  input  logic               x_we,
  input  logic [CW-1:0]      x_waddr,
  input  logic signed [31:0] x_wdata,
  input  logic signed [31:0] x2_wdata,
  input  logic [CW-1:0]      x_raddr,
  output logic signed [31:0] x_rdata,
  input  logic [CW-1:0]      x2_raddr,
  output logic signed [31:0] x2_rdata
);
  logic [31:0] gamma_m [MAX_C * MAX_C];
  logic [31:0] beta_m  [MAX_C];
  logic [31:0] x_m     [MAX_C];
  logic [31:0] x2_m    [MAX_C];

  always_ff @(posedge clk) begin
    if (pw_en && pw_sel)  gamma_m[GW'(pw_addr)] <= pw_data;
    if (pw_en && !pw_sel) beta_m[CW'(pw_addr)]  <= pw_data;
    g_data <= gamma_m[g_addr];
  end

  always_ff @(posedge clk) begin
    b_data <= beta_m[b_addr];
  end

  always_ff @(posedge clk) begin
    if (x_we) begin
      x_m[x_waddr]  <= x_wdata;
      x2_m[x_waddr] <= x2_wdata;
    end
    x_rdata  <= x_m[x_raddr];
    x2_rdata <= x2_m[x2_raddr];
  end
endmodule
