// pingpong_buffer: two-bank on-chip buffer with independent write and read
// word widths, used for every ping-pong buffer of the accelerator
// (activation, weight & activation, residual, quantized and FP output).
//
// Storage is organized in SUB_W-bit sub-words. The write port writes
// WR_RATIO consecutive sub-words, the read port reads RD_RATIO consecutive
// sub-words; addresses count words of the port's own width. One bank is
// filled by its producer while the consumer reads the other, so a transfer
// overlaps computation. Each bank has a full flag: the producer sets it with
// `commit`, the consumer clears it with `release`. Writing a full bank or
// reading an empty one violates the handshake and is flagged by assertions.
//
// Timing: writes take effect at the clock edge; read data is registered and
// appears one cycle after rd_en.
//
// From the paper: ping-pong organization of all on-chip buffers. Own
// choices: the sub-word organization and the full-flag handshake.
module pingpong_buffer #(
  parameter int unsigned SUB_W    = 256,
  parameter int unsigned WR_RATIO = 1,
  parameter int unsigned RD_RATIO = 16,
  parameter int unsigned DEPTH    = 2048,  // sub-words per bank
  parameter int unsigned WAW      = $clog2(DEPTH / WR_RATIO),
  parameter int unsigned RAW      = $clog2(DEPTH / RD_RATIO)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic                          wr_bank,
  input  logic [WAW-1:0]                wr_addr,
  input  logic [WR_RATIO*SUB_W-1:0]     wr_data,
  input  logic                          rd_en,
  input  logic                          rd_bank,
  input  logic [RAW-1:0]                rd_addr,
  output logic [RD_RATIO*SUB_W-1:0]     rd_data,
  input  logic                          commit,
  input  logic                          commit_bank,
  input  logic                          release_en,
  input  logic                          release_bank,
  output logic [1:0]                    full
);
  logic [SUB_W-1:0] mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int j = 0; j < WR_RATIO; j++)
        mem[wr_bank][int'(wr_addr) * WR_RATIO + j] <= wr_data[j*SUB_W +: SUB_W];
    if (rd_en)
      for (int j = 0; j < RD_RATIO; j++)
        rd_data[j*SUB_W +: SUB_W] <= mem[rd_bank][int'(rd_addr) * RD_RATIO + j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) full <= '0;
    else begin
      if (release_en) full[release_bank] <= 1'b0;
      if (commit) full[commit_bank] <= 1'b1;
    end
  end

  a_write_free_bank: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full[wr_bank])
    else $error("pingpong_buffer: write into a committed bank");
  a_read_full_bank: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> full[rd_bank])
    else $error("pingpong_buffer: read from a bank that was not committed");
endmodule
