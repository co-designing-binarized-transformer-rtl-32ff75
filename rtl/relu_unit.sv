// relu_unit: ReLU activation for FP16 vectors, LANES lanes.
//
// One multiplexer per lane selects 0 or x, steered by the extracted sign bit
// of x, so ReLU costs no arithmetic. A register follows the multiplexers:
// latency 1 cycle, one beat per cycle; `en` low passes the data unchanged.
// From the paper: mux with sign extraction. Own choice: the output register
// and the bypass enable.
module relu_unit
  import bat_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               in_valid,
  input  logic               in_last,
  input  fp16_t [LANES-1:0]  in_data,
  output logic               out_valid,
  output logic               out_last,
  output fp16_t [LANES-1:0]  out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_last;
      for (int i = 0; i < LANES; i++)
        out_data[i] <= (en && in_data[i][15]) ? fp16_t'(0) : in_data[i];
    end
  end
endmodule
