// layernorm_unit: layer normalization of FP16 rows with LANES lanes.
//
// Pass one streams a row of n elements (n <= ROW_MAX, a multiple of LANES)
// into a row store while accumulating sum(x) and sum(x*x). The statistics
// are then formed in three single-cycle steps: mean = sum/n and
// E[x^2] = sumsq/n (both as products with 1/n), var = E[x^2] - mean^2, and
// rstd = (var + eps)^(-1/2). Pass two reads the row back and emits
// y = (x - mean) * rstd * gamma + beta, with gamma and beta per column from
// two parameter memories written through the prm_* port.
//
// Interface: in_valid/in_ready/in_last/in_data; out_valid/out_last/out_data
// without back-pressure; prm_we/prm_addr (beat index)/prm_gamma/prm_beta.
// Timing: n/LANES cycles in, 4 cycles of statistics, n/LANES output beats
// after 1 cycle of read latency. in_ready is low from the last input beat to
// the last output beat.
//
// From the paper: averages of x and x*x, subtraction, x^(-0.5), the two
// multiplications and the final addition, and the row store. Own choices:
// the eps input (not described), FP16 accumulation, 1/n as a reciprocal.
module layernorm_unit
  import bat_pkg::*;
#(
  parameter int unsigned LANES   = 8,
  parameter int unsigned ROW_MAX = 384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic                     in_last,
  input  fp16_t [LANES-1:0]        in_data,
  input  fp16_t                    eps,
  input  logic                     prm_we,
  input  logic [$clog2(ROW_MAX/LANES > 1 ? ROW_MAX/LANES : 2)-1:0] prm_addr,
  input  fp16_t [LANES-1:0]        prm_gamma,
  input  fp16_t [LANES-1:0]        prm_beta,
  output logic                     out_valid,
  output logic                     out_last,
  output fp16_t [LANES-1:0]        out_data
);
  localparam int DEPTH = ROW_MAX / LANES;
  localparam int AW = $clog2(DEPTH > 1 ? DEPTH : 2);
  typedef enum logic [2:0] {S_IN, S_N, S_MEAN, S_VAR, S_RSTD, S_OUT} state_e;

  state_e state_q;
  fp16_t [LANES-1:0] store [DEPTH];
  fp16_t [LANES-1:0] gmem [DEPTH];
  fp16_t [LANES-1:0] bmem [DEPTH];
  fp16_t [LANES-1:0] x_q, g_q, b_q;
  fp16_t sum_q, sq_q, inv_n_q, mean_q, ex2_q, var_q, rstd_q, bs, bq;
  logic [AW-1:0] wr_cnt, rd_cnt, n_beats;
  logic rd_v, rd_l;

  assign in_ready = (state_q == S_IN);

  always_comb begin
    fp16_t ps [LANES];
    fp16_t pq [LANES];
    for (int i = 0; i < LANES; i++) begin
      ps[i] = in_data[i];
      pq[i] = fp16_mul(in_data[i], in_data[i]);
    end
    for (int w = 1; w < LANES; w = w * 2)
      for (int i = 0; i + w < LANES; i += 2 * w) begin
        ps[i] = fp16_add(ps[i], ps[i+w]);
        pq[i] = fp16_add(pq[i], pq[i+w]);
      end
    bs = ps[0];
    bq = pq[0];
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) store[wr_cnt] <= in_data;
    if (prm_we) begin
      gmem[prm_addr] <= prm_gamma;
      bmem[prm_addr] <= prm_beta;
    end
    x_q <= store[rd_cnt];
    g_q <= gmem[rd_cnt];
    b_q <= bmem[rd_cnt];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IN; sum_q <= '0; sq_q <= '0; inv_n_q <= '0; mean_q <= '0;
      ex2_q <= '0; var_q <= '0; rstd_q <= '0;
      wr_cnt <= '0; rd_cnt <= '0; n_beats <= '0; rd_v <= 1'b0; rd_l <= 1'b0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0;
    end else begin
      rd_v <= 1'b0; rd_l <= 1'b0;
      case (state_q)
        S_IN: if (in_valid) begin
          sum_q  <= (wr_cnt == 0) ? bs : fp16_add(sum_q, bs);
          sq_q   <= (wr_cnt == 0) ? bq : fp16_add(sq_q, bq);
          wr_cnt <= wr_cnt + 1'b1;
          if (in_last) begin
            n_beats <= wr_cnt;
            state_q <= S_N;
          end
        end
        S_N: begin
          inv_n_q <= fp16_recip(fp16_from_int(32'((32'(n_beats) + 1) * LANES)));
          state_q <= S_MEAN;
        end
        S_MEAN: begin
          mean_q  <= fp16_mul(sum_q, inv_n_q);
          ex2_q   <= fp16_mul(sq_q, inv_n_q);
          state_q <= S_VAR;
        end
        S_VAR: begin
          var_q   <= fp16_sub(ex2_q, fp16_mul(mean_q, mean_q));
          state_q <= S_RSTD;
        end
        S_RSTD: begin
          rstd_q  <= fp16_rsqrt(fp16_add(var_q[15] ? fp16_t'(0) : var_q, eps));
          rd_cnt  <= '0;
          state_q <= S_OUT;
        end
        S_OUT: begin
          rd_v <= 1'b1;
          rd_l <= (rd_cnt == n_beats);
          if (rd_cnt == n_beats) begin
            state_q <= S_IN;
            wr_cnt  <= '0;
          end else rd_cnt <= rd_cnt + 1'b1;
        end
        default: state_q <= S_IN;
      endcase
      out_valid <= rd_v;
      out_last  <= rd_l;
      for (int i = 0; i < LANES; i++)
        out_data[i] <= fp16_add(fp16_mul(fp16_mul(fp16_sub(x_q[i], mean_q), rstd_q), g_q[i]), b_q[i]);
    end
  end
endmodule
