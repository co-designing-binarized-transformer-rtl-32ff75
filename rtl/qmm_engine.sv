// qmm_engine: quantized matrix multiplication engine, P_DPU dot product units
// with a control FSM and an address generator.
//
// Computes out[r][g*P_DPU + d] = sum_k X_d[r][k] * Y_d[g][k] for r < m_rows,
// g < n_groups, k < kch*P_PE. Operands come from two on-chip buffers with one
// cycle read latency. Each buffer word holds P_DPU lanes of P_PE elements:
//   * pattern PAT_ACT_WEIGHT (activation x weight): lane 0 of the X word is
//     the activation chunk, multicast to every DPU; the Y word carries one
//     binarized weight bit per element (bit d*P_PE+e), i.e. weight column
//     g*P_DPU+d is the tile of DPU d;
//   * pattern PAT_ACT_ACT (activation x activation, one attention head per
//     DPU): lane d of both words is unicast to DPU d, Y elements are NX-bit
//     signed activations, and a result is one score per head.
// The FSM walks rows, then column groups, then K chunks; the address
// generator forms x_base + r*kch + kc and y_base + g*kch + kc. One chunk is
// issued per cycle for weights and every NX cycles for activations, the
// bit-serial rate of the PEs.
//
// Interface: pulse `start` with the command fields while `busy` is low.
// Results leave as out_valid beats of P_DPU ACC_W-bit integers in row-major
// order with out_row_last on the last group of a row; `done` pulses after the
// final beat. A new output row is issued only while `row_go` is high
// (`row_start` marks its first issue); this is how the row pipeline behind
// the engine holds it back. Cycles with row_go high: m_rows*n_groups*kch*Ny
// issue cycles plus a few of pipeline (read 1, PE Ny, accumulator 1,
// result 1).
//
// From the paper: P_DPU DPUs, FSM + address generator, multicast/unicast
// patterns. Own choices: the buffer word layout, the loop order, the row
// grant and the command fields. Mapping num_head onto P_DPU (batching or row splitting) is done by
// how the operands are laid out in the buffers.
module qmm_engine
  import bat_pkg::*;
#(
  parameter int unsigned NX     = 4,
  parameter int unsigned P_PE   = 64,
  parameter int unsigned P_DPU  = 16,
  parameter int unsigned ACC_W  = 24,
  parameter int unsigned AW     = 10,
  parameter int unsigned DIM_W  = 12
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // command
  input  logic                              start,
  input  qmm_pattern_e                      pattern,
  input  logic                              x_signed,
  input  logic [DIM_W-1:0]                  m_rows,
  input  logic [DIM_W-1:0]                  n_groups,
  input  logic [DIM_W-1:0]                  kch,
  input  logic [AW-1:0]                     x_base,
  input  logic [AW-1:0]                     y_base,
  output logic                              busy,
  output logic                              done,
  // operand buffers
  output logic                              x_rd,
  output logic [AW-1:0]                     x_addr,
  input  logic [P_DPU-1:0][P_PE*NX-1:0]     x_rdata,
  output logic                              y_rd,
  output logic [AW-1:0]                     y_addr,
  input  logic [P_DPU-1:0][P_PE*NX-1:0]     y_rdata,
  // results
  input  logic                              row_go,
  output logic                              row_start,
  output logic                              out_valid,
  output logic                              out_row_last,
  output logic [P_DPU-1:0][ACC_W-1:0]       out_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state_q;

  qmm_pattern_e pat_q;
  logic xs_q;
  logic [DIM_W-1:0] m_q, ng_q, kch_q, r_q, g_q, k_q;
  logic [AW-1:0] xb_q, yb_q;
  logic [$clog2(NX+1)-1:0] wait_q;
  logic issue, last_issue;
  logic iss_d, first_d, last_d, rowlast_d;
  logic [P_DPU-1:0] dpu_valid;
  logic [P_DPU-1:0][ACC_W-1:0] dpu_res;
  logic [P_DPU-1:0][P_PE-1:0][NX-1:0] xv, yv;
  // row-last flags of chunks in flight, in issue order
  logic [7:0] rl_fifo;
  logic [3:0] rl_cnt;
  logic [DIM_W-1:0] outs_left;

  assign busy  = (state_q != S_IDLE);
  // a new output row starts only when the consumer grants it (row_go)
  assign issue = (state_q == S_RUN) && (wait_q == 0) && (row_go || g_q != 0 || k_q != 0);
  assign row_start = issue && (g_q == 0) && (k_q == 0);
  assign last_issue = issue && (k_q == kch_q - 1) && (g_q == ng_q - 1) && (r_q == m_q - 1);

  // address generator
  always_comb begin
    x_rd   = issue;
    y_rd   = issue;
    x_addr = xb_q + AW'(r_q * kch_q) + AW'(k_q);
    y_addr = yb_q + AW'(g_q * kch_q) + AW'(k_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; pat_q <= PAT_ACT_WEIGHT; xs_q <= 1'b0;
      m_q <= '0; ng_q <= '0; kch_q <= '0; r_q <= '0; g_q <= '0; k_q <= '0;
      xb_q <= '0; yb_q <= '0; wait_q <= '0;
      iss_d <= 1'b0; first_d <= 1'b0; last_d <= 1'b0; rowlast_d <= 1'b0;
      done <= 1'b0; outs_left <= '0;
    end else begin
      done  <= 1'b0;
      iss_d <= issue;
      first_d <= (k_q == 0);
      last_d  <= (k_q == kch_q - 1);
      rowlast_d <= (g_q == ng_q - 1);
      case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_RUN; pat_q <= pattern; xs_q <= x_signed;
          m_q <= m_rows; ng_q <= n_groups; kch_q <= kch;
          xb_q <= x_base; yb_q <= y_base;
          r_q <= '0; g_q <= '0; k_q <= '0; wait_q <= '0;
          outs_left <= m_rows * n_groups;
        end
        S_RUN: begin
          if (issue) begin
            wait_q <= (pat_q == PAT_ACT_ACT) ? $bits(wait_q)'(NX - 1) : '0;
            if (k_q == kch_q - 1) begin
              k_q <= '0;
              if (g_q == ng_q - 1) begin
                g_q <= '0;
                r_q <= r_q + 1'b1;
              end else g_q <= g_q + 1'b1;
            end else k_q <= k_q + 1'b1;
            if (last_issue) state_q <= S_DRAIN;
          end else if (wait_q != 0) wait_q <= wait_q - 1'b1;
        end
        S_DRAIN: if (outs_left == 0) begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
      if (out_valid) outs_left <= outs_left - 1'b1;
    end
  end

  // operand distribution: multicast (pattern a) or unicast (pattern b)
  always_comb begin
    for (int d = 0; d < P_DPU; d++) begin
      for (int e = 0; e < P_PE; e++) begin
        if (pat_q == PAT_ACT_WEIGHT) begin
          xv[d][e] = x_rdata[0][e*NX +: NX];
          yv[d][e] = NX'(y_rdata[(d*P_PE + e) / (P_PE*NX)][(d*P_PE + e) % (P_PE*NX)]);
        end else begin
          xv[d][e] = x_rdata[d][e*NX +: NX];
          yv[d][e] = y_rdata[d][e*NX +: NX];
        end
      end
    end
  end

  for (genvar d = 0; d < P_DPU; d++) begin : g_dpu
    dpu #(.NX(NX), .P_PE(P_PE), .ACC_W(ACC_W)) u_dpu (
      .clk, .rst_n, .start(iss_d), .first(first_d), .last(last_d),
      .x_vec(xv[d]), .y_vec(yv[d]), .x_signed(xs_q),
      .ymode(pat_q == PAT_ACT_ACT ? Y_SIGNED_ACT : Y_BINARY_WEIGHT),
      .busy(), .out_valid(dpu_valid[d]), .result(dpu_res[d])
    );
  end

  // The row-last flag of each finished dot product travels in a small FIFO.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rl_fifo <= '0; rl_cnt <= '0;
    end else begin
      case ({iss_d && last_d, dpu_valid[0]})
        2'b10: begin rl_fifo[rl_cnt[2:0]] <= rowlast_d; rl_cnt <= rl_cnt + 1'b1; end
        2'b01: begin rl_fifo <= rl_fifo >> 1; rl_cnt <= rl_cnt - 1'b1; end
        2'b11: begin
          rl_fifo <= rl_fifo >> 1;
          rl_fifo[rl_cnt[2:0] - 3'd1] <= rowlast_d;
        end
        default: ;
      endcase
    end
  end

  assign out_valid    = dpu_valid[0];
  assign out_data     = dpu_res;
  assign out_row_last = rl_fifo[0];

  a_dpus_in_step: assert property (@(posedge clk) disable iff (!rst_n) dpu_valid == {P_DPU{dpu_valid[0]}})
    else $error("qmm_engine: DPUs out of step");
endmodule
