// gdn_engine: one GDN / inverse-GDN compute unit (one of the three in the core).
//
// For one pixel with C channels it computes, for every output channel i,
//   GDN : y_i = x_i / sqrt(beta_i + sum_j gamma_ij * x_j^2)
//   iGDN: y_i = x_i * sqrt(beta_i + sum_j gamma_ij * x_j^2)
// in 32-bit fixed point (Q16.16), with int8 activations on both sides.
//
// Work is done in two phases after `start`:
//  LOAD  C cycles: the int8 inputs are read from the global pool slot (act_raddr/act_rdata,
//        one-cycle latency), converted to Q16.16 using in_fp fraction bits, squared by the
//        square unit, and x_j, x_j^2 are stored in the local pool.
//  ACC   C*C cycles: one term gamma_ij * x_j^2 per clock from the multiply unit into the add
//        unit, which starts each row from beta_i. Each finished sum passes the square-root
//        table and then the division unit (GDN) or a second multiply unit (iGDN), and the
//        result is rounded to int8 with out_fp fraction bits and written to the global pool
//        slot (res_we/res_waddr/res_wdata). Rows overlap: the tail of row i runs while row i+1
//        is summed.
// `done` pulses once, LAT_TAIL cycles after the last term is issued: it rises at the
// (C + C*C + LOAD_GAP + LAT_TAIL)-th clock edge after the edge that samples `start`, that is
// C*C + C + 12 clocks per pixel. Parameters (beta, gamma)
// are written beforehand through pw_* and kept across pixels. sat_count counts outputs clipped
// to the int8 range since reset.
// The unit chain (square, multiply, add, square root, divide) and the int8 -> 32-bit -> int8
// precision scheme follow the paper; the schedule, one term per clock, the latencies and the
// power-of-two scales are this design's choices.
module gdn_engine
  import gdn_pkg::*;
#(
  parameter int unsigned MAX_C     = 192,
  parameter int unsigned SEG_BITS  = 6,
  parameter int unsigned SEED_BITS = 5,
  localparam int unsigned CW = $clog2(MAX_C),
  localparam int unsigned GW = $clog2(MAX_C * MAX_C)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  gdn_mode_e     mode,
  input  logic [CW-1:0] channels,
  input  logic [3:0]    in_fp,
  input  logic [3:0]    out_fp,
  output logic          busy,
  output logic          done,
  input  logic          pw_en,
  input  logic          pw_sel,
  input  logic [15:0]   pw_addr,
  input  logic [31:0]   pw_data,
  output logic [CW-1:0] act_raddr,
  input  act_t          act_rdata,
  output logic          res_we,
  output logic [CW-1:0] res_waddr,
  output act_t          res_wdata,
  output logic [31:0]   sat_count
);
  localparam int unsigned LOAD_GAP = 2;   // SU latency + write
  localparam int unsigned LAT_TAIL = 10;  // mem, MU, AU, SQRT(2), DU(4), quant

  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_GAP, S_ACC, S_DRAIN } state_e;
  state_e state;

  logic [CW-1:0]  cnt_j, cnt_i;
  logic [GW-1:0]  g_addr;
  logic [3:0]     drain;
  gdn_mode_e      mode_r;
  logic [CW-1:0]  c_r;
  logic [3:0]     in_fp_r, out_fp_r;

  // ---------------- control ----------------
  logic ld_issue, acc_issue, acc_first, acc_last;
  assign ld_issue  = (state == S_LOAD);
  assign acc_issue = (state == S_ACC);
  assign acc_first = acc_issue && (cnt_j == '0);
  assign acc_last  = acc_issue && (cnt_j == c_r - 1'b1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      cnt_i <= '0; cnt_j <= '0; g_addr <= '0; drain <= '0;
      mode_r <= MODE_GDN; c_r <= '0; in_fp_r <= '0; out_fp_r <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode_r <= mode; c_r <= channels; in_fp_r <= in_fp; out_fp_r <= out_fp;
          cnt_j <= '0; cnt_i <= '0; g_addr <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (cnt_j == c_r - 1'b1) begin
            cnt_j <= '0;
            drain <= 4'(LOAD_GAP - 1);
            state <= S_GAP;
          end else cnt_j <= cnt_j + 1'b1;
        end
        S_ACC: begin
          g_addr <= g_addr + 1'b1;
          if (acc_last) begin
            cnt_j <= '0;
            if (cnt_i == c_r - 1'b1) begin
              drain <= 4'(LAT_TAIL - 1);
              state <= S_DRAIN;
            end else cnt_i <= cnt_i + 1'b1;
          end else cnt_j <= cnt_j + 1'b1;
        end
        S_GAP: begin
          if (drain == '0) state <= S_ACC;
          else             drain <= drain - 1'b1;
        end
        S_DRAIN: begin
          if (drain == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else drain <= drain - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  // ---------------- LOAD path: convert, square, store ----------------
  assign act_raddr = cnt_j;
  logic               ld_v1;
  logic [CW-1:0]      ld_j1, ld_j2;
  logic signed [31:0] x_fx1, x_fx2;
  logic               su_v;
  logic signed [31:0] su_x2;

  always_ff @(posedge clk) begin
    if (!rst_n) ld_v1 <= 1'b0;
    else        ld_v1 <= ld_issue;
    ld_j1 <= cnt_j;
    ld_j2 <= ld_j1;
    x_fx2 <= x_fx1;
  end
  assign x_fx1 = act_to_fx(act_rdata, in_fp_r);

  gdn_square_unit u_su (
    .clk, .rst_n, .in_valid(ld_v1), .x(x_fx1), .out_valid(su_v), .x2(su_x2)
  );

  // ---------------- local memory pool ----------------
  logic signed [31:0] g_data, b_data, x_rdata, x2_rdata;
  gdn_local_mem #(.MAX_C(MAX_C)) u_mem (
    .clk, .pw_en, .pw_sel, .pw_addr, .pw_data,
    .g_addr, .g_data,
    .b_addr(cnt_i), .b_data,
    .x_we(su_v), .x_waddr(ld_j2), .x_wdata(x_fx2), .x2_wdata(su_x2),
    .x_raddr(cnt_i), .x_rdata,
    .x2_raddr(cnt_j), .x2_rdata
  );

  // ---------------- ACC path: MU -> AU ----------------
  logic               a_v1, a_first1, a_last1, a_first2, a_last2;
  logic [CW-1:0]      tag1, tag2, tag3;
  logic signed [31:0] xi1, xi2, xi3, beta2;
  always_ff @(posedge clk) begin
    if (!rst_n) a_v1 <= 1'b0;
    else        a_v1 <= acc_issue;
    a_first1 <= acc_first; a_last1 <= acc_last;
    a_first2 <= a_first1;  a_last2 <= a_last1;
    tag1 <= cnt_i; tag2 <= tag1; tag3 <= tag2;
    xi2 <= xi1; xi3 <= xi2;
    beta2 <= b_data;
  end
  assign xi1 = x_rdata;

  logic               mu_v;
  logic signed [31:0] mu_p;
  gdn_multiply_unit u_mu (
    .clk, .rst_n, .in_valid(a_v1), .a(g_data), .b(x2_rdata), .out_valid(mu_v), .p(mu_p)
  );

  logic               au_v;
  logic signed [31:0] au_sum;
  gdn_add_unit u_au (
    .clk, .rst_n, .in_valid(mu_v), .first(a_first2), .last(a_last2), .beta(beta2), .term(mu_p),
    .sum_valid(au_v), .sum(au_sum)
  );

  // ---------------- square root ----------------
  logic               sq_v;
  logic signed [31:0] sq_s;
  gdn_sqrt_pwl #(.SEG_BITS(SEG_BITS)) u_sqrt (
    .clk, .rst_n, .in_valid(au_v), .n(au_sum), .out_valid(sq_v), .s(sq_s)
  );
  logic [CW-1:0]      tag4, tag5;
  logic signed [31:0] xi4, xi5;
  always_ff @(posedge clk) begin
    tag4 <= tag3; tag5 <= tag4;
    xi4  <= xi3;  xi5  <= xi4;
  end

  // ---------------- divide (GDN) / multiply (iGDN) ----------------
  logic               du_v;
  logic signed [31:0] du_y;
  gdn_divide_unit #(.SEED_BITS(SEED_BITS)) u_du (
    .clk, .rst_n, .in_valid(sq_v && mode_r == MODE_GDN), .x(xi5), .s(sq_s),
    .out_valid(du_v), .y(du_y)
  );

  logic               mu2_v;
  logic signed [31:0] mu2_p;
  gdn_multiply_unit u_mu_igdn (
    .clk, .rst_n, .in_valid(sq_v && mode_r == MODE_IGDN), .a(xi5), .b(sq_s),
    .out_valid(mu2_v), .p(mu2_p)
  );

  // align the one-cycle iGDN product with the four-cycle division
  logic [2:0]         mu2_vd;
  logic signed [31:0] mu2_pd [3];
  logic [CW-1:0]      tagd [4];
  always_ff @(posedge clk) begin
    if (!rst_n) mu2_vd <= '0;
    else        mu2_vd <= {mu2_vd[1:0], mu2_v};
    mu2_pd[0] <= mu2_p; mu2_pd[1] <= mu2_pd[0]; mu2_pd[2] <= mu2_pd[1];
    tagd[0] <= tag5; tagd[1] <= tagd[0]; tagd[2] <= tagd[1]; tagd[3] <= tagd[2];
  end

  // ---------------- requantise and write back ----------------
  logic               y_v;
  logic signed [31:0] y_fx;
  act_t               y_q;
  logic               y_sat;
  assign y_v  = du_v || mu2_vd[2];
  assign y_fx = du_v ? du_y : mu2_pd[2];
  always_comb y_q = fx_to_act(y_fx, out_fp_r, y_sat);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_we    <= 1'b0;
      sat_count <= '0;
    end else begin
      res_we <= y_v;
      if (y_v && y_sat) sat_count <= sat_count + 1'b1;
    end
    res_waddr <= tagd[3];
    res_wdata <= y_q;
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(du_v && mu2_vd[2]));
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule
