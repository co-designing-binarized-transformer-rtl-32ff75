// bat_top: binarized Transformer accelerator, MHA module + FFN module + DMA.
//
// The accelerator is streaming-like at the top and processor-like inside:
// the multi-head attention (MHA) and feed-forward (FFN) halves of an encoder
// layer run on two separate modules that work concurrently, so while the
// FFN module processes layer l of one sample the MHA module can process the
// next sample (inter-layer pipeline, batch 2 keeps both busy). Inside each
// module, commands run one quantized matrix multiplication followed by the
// row pipeline (dequantize, softmax/ReLU/layer norm, quantize).
//
// All intermediate tensors, including the quantized activations that feed
// the next QMM, go back to external memory; one DMA engine moves data
// between external memory and the ping-pong buffers of both modules. A
// load descriptor with `last` set commits the bank it filled; a store
// descriptor with `last` set releases the output buffer it emptied.
//
// Ports: DMA descriptors (dma_desc_valid/ready/desc, dma_done), one command
// port per module (valid/cmd/busy/done), bank status, and the external
// memory port (request/grant, write data, in-order read data with rvalid).
// The external memory itself is outside this design.
//
// Buffer depths (in words of each buffer's own width) hold one complete
// row tile for the largest layer: the Y buffers hold a full weight matrix
// that feeds a layer-normalized row (384 x 384 for MHA = 24 groups x 6
// chunks, 1536 x 384 for FFN = 24 groups x 24 chunks); X, residual and
// output buffers hold a block of rows, and longer sequences are split into
// row blocks by the host. These depths are this design's choice.
//
// Sequencing of descriptors and commands (which layer, which bank) is left
// to the host that drives these ports.
module bat_top
  import bat_pkg::*;
#(
  parameter int unsigned NX        = 4,
  parameter int unsigned P_PE      = 64,
  parameter int unsigned P_DPU     = 16,
  parameter int unsigned ACC_W     = 24,
  parameter int unsigned P_VU_MHA  = 32,
  parameter int unsigned P_VU_FFN  = 96,
  parameter int unsigned P_LN      = 8,
  parameter int unsigned P_SM      = 4,
  parameter int unsigned P_QUAN    = 128,
  parameter int unsigned D_HID     = 384,
  parameter int unsigned D_INTER   = 1536,
  parameter int unsigned EXT_W     = 256,
  parameter int unsigned X_DEPTH   = 128,
  parameter int unsigned Y_DEPTH_MHA = 144,
  parameter int unsigned Y_DEPTH_FFN = 576,
  parameter int unsigned RES_DEPTH = 128,
  parameter int unsigned OUT_DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // DMA descriptors
  input  logic               dma_desc_valid,
  output logic               dma_desc_ready,
  input  dma_desc_t          dma_desc,
  output logic               dma_done,
  // module commands
  input  logic               mha_cmd_valid,
  input  module_cmd_t        mha_cmd,
  output logic               mha_busy,
  output logic               mha_done,
  input  logic               ffn_cmd_valid,
  input  module_cmd_t        ffn_cmd,
  output logic               ffn_busy,
  output logic               ffn_done,
  // bank status: [module][x, y, res, out][bank]
  output logic [1:0][3:0][1:0] bank_full,
  // external memory
  output logic               mem_req,
  input  logic               mem_gnt,
  output logic               mem_we,
  output logic [31:0]        mem_addr,
  output logic [EXT_W-1:0]   mem_wdata,
  input  logic               mem_rvalid,
  input  logic [EXT_W-1:0]   mem_rdata
);
  dma_desc_t sel;
  logic wr_en, rd_en, dma_done_i;
  logic [15:0] wr_addr, rd_addr;
  logic [EXT_W-1:0] wr_data, rd_data, mha_rd, ffn_rd;
  logic rd_sel_q;

  dma_engine #(.EXT_W(EXT_W), .BAW(16)) u_dma (
    .clk, .rst_n, .desc_valid(dma_desc_valid), .desc_ready(dma_desc_ready), .desc(dma_desc),
    .done(dma_done_i), .mem_req, .mem_gnt, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .buf_sel(sel), .buf_wr_en(wr_en), .buf_wr_addr(wr_addr), .buf_wr_data(wr_data),
    .buf_rd_en(rd_en), .buf_rd_addr(rd_addr), .buf_rd_data(rd_data)
  );
  assign dma_done = dma_done_i;

  always_ff @(posedge clk) if (rd_en) rd_sel_q <= sel.module_sel;
  assign rd_data = rd_sel_q ? ffn_rd : mha_rd;

  logic commit, release_o;
  assign commit    = dma_done_i && sel.last && !sel.store;
  assign release_o = dma_done_i && sel.last && sel.store;

  mha_module #(
    .NX(NX), .P_PE(P_PE), .P_DPU(P_DPU), .ACC_W(ACC_W), .P_VU(P_VU_MHA), .P_LN(P_LN), .P_SM(P_SM),
    .P_QUAN(P_QUAN), .ROW_MAX(D_HID), .LN_MAX(D_HID), .EXT_W(EXT_W),
    .X_DEPTH(X_DEPTH), .Y_DEPTH(Y_DEPTH_MHA), .RES_DEPTH(RES_DEPTH), .OUT_DEPTH(OUT_DEPTH)
  ) u_mha (
    .clk, .rst_n, .cmd_valid(mha_cmd_valid), .cmd(mha_cmd), .busy(mha_busy), .done(mha_done),
    .buf_wr_en(wr_en && !sel.module_sel), .buf_wr_target(sel.target), .buf_wr_bank(sel.bank),
    .buf_wr_addr(wr_addr), .buf_wr_data(wr_data),
    .buf_rd_en(rd_en && !sel.module_sel), .buf_rd_target(sel.target), .buf_rd_bank(sel.bank),
    .buf_rd_addr(rd_addr), .buf_rd_data(mha_rd),
    .buf_commit(commit && !sel.module_sel), .buf_commit_target(sel.target), .buf_commit_bank(sel.bank),
    .buf_release(release_o && !sel.module_sel), .buf_release_target(sel.target), .buf_release_bank(sel.bank),
    .x_full(bank_full[0][0]), .y_full(bank_full[0][1]), .res_full(bank_full[0][2]), .out_full(bank_full[0][3])
  );

  ffn_module #(
    .NX(NX), .P_PE(P_PE), .P_DPU(P_DPU), .ACC_W(ACC_W), .P_VU(P_VU_FFN), .P_LN(P_LN),
    .P_QUAN(P_QUAN), .ROW_MAX(D_INTER), .LN_MAX(D_HID), .EXT_W(EXT_W),
    .X_DEPTH(X_DEPTH), .Y_DEPTH(Y_DEPTH_FFN), .RES_DEPTH(RES_DEPTH), .OUT_DEPTH(OUT_DEPTH)
  ) u_ffn (
    .clk, .rst_n, .cmd_valid(ffn_cmd_valid), .cmd(ffn_cmd), .busy(ffn_busy), .done(ffn_done),
    .buf_wr_en(wr_en && sel.module_sel), .buf_wr_target(sel.target), .buf_wr_bank(sel.bank),
    .buf_wr_addr(wr_addr), .buf_wr_data(wr_data),
    .buf_rd_en(rd_en && sel.module_sel), .buf_rd_target(sel.target), .buf_rd_bank(sel.bank),
    .buf_rd_addr(rd_addr), .buf_rd_data(ffn_rd),
    .buf_commit(commit && sel.module_sel), .buf_commit_target(sel.target), .buf_commit_bank(sel.bank),
    .buf_release(release_o && sel.module_sel), .buf_release_target(sel.target), .buf_release_bank(sel.bank),
    .x_full(bank_full[1][0]), .y_full(bank_full[1][1]), .res_full(bank_full[1][2]), .out_full(bank_full[1][3])
  );
endmodule
