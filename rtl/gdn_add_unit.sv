// gdn_add_unit (AU): the normalisation sum beta_i + sum_j gamma_ij * x_j^2.
//
// A term arrives with in_valid. On `first` the accumulator is loaded with beta + term; later
// terms are added. With `last` the finished sum is clipped to the positive 32-bit range and
// presented on `sum` with sum_valid one cycle later. A sum of one term has first and last
// together. The accumulator is ACC_W bits wide so that up to 2^(ACC_W-32) full-scale terms
// cannot overflow before the final clip. Built from plain adders and flip-flops, as the paper
// places this unit in LUT/FF logic; the widths and the first/last framing are this design's.
module gdn_add_unit #(
  parameter int unsigned ACC_W = 40
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic               last,
  input  logic signed [31:0] beta,
  input  logic signed [31:0] term,
  output logic               sum_valid,
  output logic signed [31:0] sum
);
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] nxt;

  always_comb begin
    if (first) nxt = ACC_W'(beta) + ACC_W'(term);
    else       nxt = acc + ACC_W'(term);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      sum_valid <= 1'b0;
      sum       <= '0;
    end else begin
      sum_valid <= in_valid && last;
      if (in_valid) begin
        acc <= nxt;
        if (last) begin
          if (nxt > ACC_W'(32'sh7FFF_FFFF)) sum <= 32'sh7FFF_FFFF;
          else if (nxt < 0)                 sum <= '0;
          else                              sum <= nxt[31:0];
        end
      end
    end
  end
endmodule
