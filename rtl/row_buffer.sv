// row_buffer: two-row ping-pong FP buffer between units of different
// parallelism (the "floating-point ping-pong buffer" of a module).
//
// A writer with WL lanes fills one bank with a row; the beat flagged in_last
// closes the row and hands the bank to the reader, which drains it with RL
// lanes per beat while the writer fills the other bank. This is what lets a
// unit start on row i+1 while the next unit still works on row i (the
// row-by-row intra-layer pipeline). Row length must be a multiple of WL and
// RL and at most ROW_MAX.
//
// Interface: valid/ready on both sides. in_ready is low only when both
// banks hold unread rows. Output data is read combinationally from the
// bank registers.
module row_buffer #(
  parameter int unsigned EW      = 16,
  parameter int unsigned WL      = 16,
  parameter int unsigned RL      = 32,
  parameter int unsigned ROW_MAX = 384
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic                    in_last,
  input  logic [WL-1:0][EW-1:0]   in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic                    out_last,
  output logic [RL-1:0][EW-1:0]   out_data
);
  localparam int CW = $clog2(ROW_MAX + 1);
  logic [EW-1:0] mem [2][ROW_MAX];
  logic [1:0] full;
  logic [CW-1:0] len [2];
  logic wb, rb;
  logic [CW-1:0] wcnt, rcnt;

  assign in_ready  = !full[wb];
  assign out_valid = full[rb];
  assign out_last  = (rcnt + CW'(RL) >= len[rb]);
  always_comb
    for (int i = 0; i < RL; i++) out_data[i] = mem[rb][(int'(rcnt) + i) % ROW_MAX];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int i = 0; i < WL; i++) mem[wb][(int'(wcnt) + i) % ROW_MAX] <= in_data[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wb <= 1'b0; rb <= 1'b0; wcnt <= '0; rcnt <= '0;
      len[0] <= '0; len[1] <= '0;
    end else begin
      if (in_valid && in_ready) begin
        if (in_last) begin
          full[wb] <= 1'b1;
          len[wb]  <= wcnt + CW'(WL);
          wcnt     <= '0;
          wb       <= ~wb;
        end else wcnt <= wcnt + CW'(WL);
      end
      if (out_valid && out_ready) begin
        if (out_last) begin
          full[rb] <= 1'b0;
          rcnt     <= '0;
          rb       <= ~rb;
        end else rcnt <= rcnt + CW'(RL);
      end
    end
  end
endmodule
