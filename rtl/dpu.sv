// dpu: dot product unit, P_PE bit-serial PEs followed by a compressor tree loop.
//
// Each issue hands the unit P_PE activation elements x and P_PE y operands
// (binarized weights or activations). All PEs multiply in parallel, so one
// issue covers P_PE terms of a dot product. The PE products are sign-extended
// to ACC_W bits and reduced by a tree of 4:2 compressors (P_PE/4 in the first
// level, P_PE/8 in the next, down to one) to a sum/carry pair. A final 4:2
// compressor adds that pair to the accumulated sum/carry pair held in two
// registers (the "loop"), so the accumulation stays in carry-save form. When
// the issue flagged `last` arrives, a carry-propagate adder resolves the pair
// into the registered result.
//
// Interface: `start` with x_vec/y_vec and the flags `first` (clear the
// accumulator) and `last` (emit the result). With a binary weight a new
// issue is accepted every cycle; with an activation operand every NX cycles.
// Timing: the PE products appear Ny cycles after start, the accumulator
// registers load at the next edge, and `out_valid` with `result` follows one
// cycle later: Ny + 2 cycles after the issue flagged `last`.
//
// From the paper: P_PE-way unfolding, 4:2 compressor tree, loop compressor
// with two registers, adder and output register. Own choices: ACC_W and the
// first/last flags; P_PE must be a power of two, at least 4.
module dpu
  import bat_pkg::*;
#(
  parameter int unsigned NX    = 4,
  parameter int unsigned P_PE  = 64,
  parameter int unsigned ACC_W = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     first,
  input  logic                     last,
  input  logic [P_PE-1:0][NX-1:0]  x_vec,
  input  logic [P_PE-1:0][NX-1:0]  y_vec,
  input  logic                     x_signed,
  input  ymode_e                   ymode,
  output logic                     busy,
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  result
);
  localparam int LEV = $clog2(P_PE) - 1;  // levels until two words remain

  logic [P_PE-1:0] pe_valid, pe_busy;
  logic signed [2*NX-1:0] prod [P_PE];
  logic [ACC_W-1:0] lvl0 [P_PE];
  logic [ACC_W-1:0] acc_s, acc_c, loop_s, loop_c, loop_in_s, loop_in_c;
  logic first_q, last_q, emit_q;

  for (genvar i = 0; i < P_PE; i++) begin : g_pe
    pe #(.NX(NX)) u_pe (
      .clk, .rst_n, .start,
      .x(x_vec[i]), .y(y_vec[i]), .x_signed, .ymode,
      .busy(pe_busy[i]), .out_valid(pe_valid[i]), .product(prod[i])
    );
    assign lvl0[i] = ACC_W'(prod[i]);
  end
  assign busy = pe_busy[0];

  // compressor tree: level l has P_PE >> l words, reduced by (P_PE >> l)/4 compressors
  for (genvar l = 0; l < LEV; l++) begin : g_lvl
    logic [ACC_W-1:0] cur [P_PE >> l];
    logic [ACC_W-1:0] nxt [P_PE >> (l + 1)];
    if (l == 0) begin : g_first
      assign cur = lvl0;
    end else begin : g_next
      assign cur = g_lvl[l-1].nxt;
    end
    for (genvar j = 0; j < (P_PE >> (l + 2)); j++) begin : g_c
      compressor42 #(.W(ACC_W)) u_c (
        .a(cur[4*j]), .b(cur[4*j+1]), .c(cur[4*j+2]), .d(cur[4*j+3]),
        .sum(nxt[2*j]), .carry(nxt[2*j+1])
      );
    end
  end

  assign loop_in_s = first_q ? '0 : acc_s;
  assign loop_in_c = first_q ? '0 : acc_c;
  compressor42 #(.W(ACC_W)) u_loop (
    .a(g_lvl[LEV-1].nxt[0]), .b(g_lvl[LEV-1].nxt[1]), .c(loop_in_s), .d(loop_in_c),
    .sum(loop_s), .carry(loop_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_q <= 1'b0; last_q <= 1'b0; emit_q <= 1'b0;
      acc_s <= '0; acc_c <= '0; out_valid <= 1'b0; result <= '0;
    end else begin
      if (start) begin
        first_q <= first;
        last_q  <= last;
      end
      emit_q <= 1'b0;
      if (pe_valid[0]) begin
        acc_s  <= loop_s;
        acc_c  <= loop_c;
        emit_q <= last_q;
      end
      out_valid <= emit_q;
      if (emit_q) result <= acc_s + acc_c;
    end
  end
endmodule
