// vector_unit: FP16 "add & mul" vector unit, LANES lanes.
//
// Handles the low-density element-wise work of a module: dequantization of
// QMM results (integer to FP16, times the combined scale alpha_x*alpha_y)
// and residual addition. Per lane: out = (mul_en ? a * scale : a) +
// (add_en ? res : 0), where a is the ACC_W-bit integer input converted to
// FP16 when in_is_int is set, or the FP16 input otherwise.
// Two pipeline stages (convert + multiply, add): latency 2 cycles, one beat
// per cycle. `res` is sampled together with the input beat.
//
// From the paper: the add and multiply functions, their use for
// dequantization and residual addition. Own choices: the two-stage pipeline
// and the operation enables.
module vector_unit
  import bat_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned ACC_W = 24
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_last,
  input  logic                          in_is_int,
  input  logic [LANES-1:0][ACC_W-1:0]   in_int,
  input  fp16_t [LANES-1:0]             in_fp,
  input  fp16_t [LANES-1:0]             res,
  input  fp16_t                         scale,
  input  logic                          mul_en,
  input  logic                          add_en,
  output logic                          out_valid,
  output logic                          out_last,
  output fp16_t [LANES-1:0]             out_data
);
  fp16_t [LANES-1:0] m_q, r_q;
  logic v_q, l_q, add_q;
  fp16_t [LANES-1:0] a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; l_q <= 1'b0; add_q <= 1'b0; r_q <= '0;
      out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      v_q <= in_valid; l_q <= in_last; add_q <= add_en;
      r_q <= res;
      out_valid <= v_q; out_last <= l_q;
    end
  end

  // one FP16 multiply and one FP16 add per lane
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    assign a[i] = in_is_int ? fp16_from_int(32'(signed'(in_int[i]))) : in_fp[i];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        m_q[i] <= '0; out_data[i] <= '0;
      end else begin
        m_q[i] <= mul_en ? fp16_mul(a[i], scale) : a[i];
        out_data[i] <= add_q ? fp16_add(m_q[i], r_q[i]) : m_q[i];
      end
    end
  end
endmodule
