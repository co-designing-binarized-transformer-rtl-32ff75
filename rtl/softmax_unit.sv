// softmax_unit: row softmax in FP16 with LANES parallel lanes.
//
// A row of n values (n <= ROW_MAX, a multiple of LANES) streams in. Pass one
// computes exp() of every element in each lane, keeps the exponentials in a
// row store and accumulates their sum (lanes added pairwise, then into a
// running FP16 sum). When the last beat has arrived the reciprocal of the
// sum is formed once; pass two reads the stored exponentials back and
// normalizes them by multiplying with that reciprocal. While pass two runs
// `in_ready` is low, so the next row waits in the upstream buffer.
//
// Interface: in_valid/in_ready/in_last/in_data; out_valid/out_last/out_data
// (no back-pressure on the output). Timing: n/LANES cycles in, 1 cycle for
// the reciprocal, then n/LANES output beats one per cycle with 1 cycle of
// read latency.
//
// From the paper: exp, accumulation and normalization stages, parallelism 4.
// Own choices: exp() by a base-2 split with a quadratic for 2^f, the
// normalization as multiply by one reciprocal instead of n divisions, no
// subtraction of the row maximum (not described), FP16 accumulation.
module softmax_unit
  import bat_pkg::*;
#(
  parameter int unsigned LANES   = 4,
  parameter int unsigned ROW_MAX = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic               in_last,
  input  fp16_t [LANES-1:0]  in_data,
  output logic               out_valid,
  output logic               out_last,
  output fp16_t [LANES-1:0]  out_data
);
  localparam int DEPTH = ROW_MAX / LANES;
  localparam int AW = $clog2(DEPTH) > 0 ? $clog2(DEPTH) : 1;
  typedef enum logic [1:0] {S_ACC, S_RECIP, S_OUT} state_e;

  state_e state_q;
  fp16_t [LANES-1:0] store [DEPTH];
  fp16_t [LANES-1:0] ex, rd_q;
  fp16_t sum_q, recip_q, beat_sum;
  logic [AW-1:0] wr_cnt, rd_cnt, n_beats;
  logic rd_v, rd_l;

  assign in_ready = (state_q == S_ACC);

  always_comb begin
    fp16_t part [LANES];
    for (int i = 0; i < LANES; i++) begin
      ex[i] = fp16_exp(in_data[i]);
      part[i] = ex[i];
    end
    // pairwise reduction of the lanes
    for (int w = 1; w < LANES; w = w * 2)
      for (int i = 0; i + w < LANES; i += 2 * w)
        part[i] = fp16_add(part[i], part[i+w]);
    beat_sum = part[0];
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) store[wr_cnt] <= ex;
    rd_q <= store[rd_cnt];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_ACC; sum_q <= '0; recip_q <= '0;
      wr_cnt <= '0; rd_cnt <= '0; n_beats <= '0; rd_v <= 1'b0; rd_l <= 1'b0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0;
    end else begin
      rd_v <= 1'b0; rd_l <= 1'b0;
      case (state_q)
        S_ACC: if (in_valid) begin
          sum_q  <= (wr_cnt == 0) ? beat_sum : fp16_add(sum_q, beat_sum);
          wr_cnt <= wr_cnt + 1'b1;
          if (in_last) begin
            n_beats <= wr_cnt;
            state_q <= S_RECIP;
          end
        end
        S_RECIP: begin
          recip_q <= fp16_recip(sum_q);
          rd_cnt  <= '0;
          state_q <= S_OUT;
        end
        S_OUT: begin
          rd_v <= 1'b1;
          rd_l <= (rd_cnt == n_beats);
          if (rd_cnt == n_beats) begin
            state_q <= S_ACC;
            wr_cnt  <= '0;
          end else rd_cnt <= rd_cnt + 1'b1;
        end
        default: state_q <= S_ACC;
      endcase
      out_valid <= rd_v;
      out_last  <= rd_l;
      for (int i = 0; i < LANES; i++) out_data[i] <= fp16_mul(rd_q[i], recip_q);
    end
  end
endmodule
