// quant_unit: fully pipelined elastic quantization unit, LANES lanes.
//
// Maps FP16 activations to NB-bit integers, X_int = clip(round((X + beta) *
// (1/alpha)), Qn, Qp). beta and the reciprocal 1/alpha are learned constants
// fixed before deployment, so inference needs no division. Each lane is an
// FP16 bias adder, an FP16 coefficient multiplier and an FP16-to-16-bit
// integer converter, each followed by a register, and then the clip unit:
//   * signed: if bits [15:NB-1] of the integer are all equal the value fits
//     and its low NB bits pass; otherwise the sign bit picks 2^(NB-1)-1 or
//     -2^(NB-1);
//   * unsigned: a set sign bit gives 0; else if bits [15:NB] are all zero the
//     low NB bits pass, otherwise 2^NB - 1.
// Interface: in_valid/in_last/in_data, configuration beta, inv_alpha and
// is_signed held stable while a tensor streams. Latency 3 cycles; one beat
// of LANES values per cycle.
//
// From the paper: the stage order, the 16-bit integer path and the clip
// logic. Own choices: per-tensor (not per-lane) beta and 1/alpha, and the
// round-to-nearest-even of the converter.
module quant_unit
  import bat_pkg::*;
#(
  parameter int unsigned LANES = 128,
  parameter int unsigned NB    = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  fp16_t [LANES-1:0]         in_data,
  input  fp16_t                     beta,
  input  fp16_t                     inv_alpha,
  input  logic                      is_signed,
  output logic                      out_valid,
  output logic                      out_last,
  output logic [LANES-1:0][NB-1:0]  out_data
);
  fp16_t [LANES-1:0] s1, s2;
  logic signed [LANES-1:0][15:0] s3;
  logic [2:0] v, l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; l <= '0;
    end else begin
      v <= {v[1:0], in_valid};
      l <= {l[1:0], in_last};
    end
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s1[i] <= '0; s2[i] <= '0; s3[i] <= '0;
      end else begin
        s1[i] <= fp16_add(in_data[i], beta);       // FP bias add
        s2[i] <= fp16_mul(s1[i], inv_alpha);       // FP coefficient multiply
        s3[i] <= fp16_to_int16(s2[i]);             // FP to INT
      end
    end

    // clip unit: equivalence check of the bits above the target width
    always_comb begin
      if (is_signed) begin
        if (s3[i][15:NB-1] == {(17-NB){s3[i][15]}}) out_data[i] = s3[i][NB-1:0];
        else out_data[i] = s3[i][15] ? {1'b1, {(NB-1){1'b0}}} : {1'b0, {(NB-1){1'b1}}};
      end else begin
        if (s3[i][15]) out_data[i] = '0;
        else if (s3[i][15:NB] == '0) out_data[i] = s3[i][NB-1:0];
        else out_data[i] = '1;
      end
    end
  end
  assign out_valid = v[2];
  assign out_last  = l[2];
endmodule
