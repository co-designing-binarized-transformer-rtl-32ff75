// pe: bit-serial processing element with sign bit elimination (SBE).
//
// Multiplies an NX-bit activation x (signed or unsigned) by an operand y that
// is fed one bit per cycle, least significant bit first. Each y bit is decoded
// to +1 / 0 / -1 by a 2-bit look-up (bit decoder); the partial product x*y_i is
// formed in NX+1 bits, its most significant bit is inverted (SBE) so no sign
// extension is needed, and a right-shifting sequential adder accumulates it.
// The constant left over from the eliminated sign bits is a single '1' at bit
// NX, injected as the "initial product" in the first cycle. For y_i = -1 the
// partial product is the bit-inverted x plus one; the one enters as carry-in.
//
// y is either a binarized weight (1 bit, 1 = +1, 0 = -1: one cycle) or an
// NX-bit two's complement activation (NX cycles, MSB decodes to -1).
//
// Interface: pulse `start` with x, y and the data configuration; x and y are
// captured. `out_valid` rises with the registered product Ny cycles after
// start (1 cycle for a binary weight, NX cycles for an activation). A new
// start is accepted in the cycle out_valid rises, so a binary weight product
// can be started every cycle. The product is NX+Ny bits, sign-extended to
// 2*NX bits on `product`.
//
// From the paper: the SBE datapath, bit decoder codes, initial product,
// carry-in on -1 and the right-shifting adder. Own choices: x is captured in
// a register at start, y sits in a shift register inside the PE.
module pe
  import bat_pkg::*;
#(
  parameter int unsigned NX = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NX-1:0]        x,
  input  logic [NX-1:0]        y,
  input  logic                 x_signed,
  input  ymode_e               ymode,
  output logic                 busy,
  output logic                 out_valid,
  output logic signed [2*NX-1:0] product
);
  localparam int CW = $clog2(NX + 1);

  logic [NX-1:0] x_q, y_q, low_q;
  logic [NX:0]   acc_q;
  logic [CW-1:0] cnt_q;
  logic          x_signed_q;
  ymode_e        ymode_q;

  logic [NX-1:0] cur_x;
  logic          cur_ybit, cur_xs;
  ymode_e        cur_ym;
  logic [CW-1:0] cur_idx, ny;
  ybit_e         dec;
  logic [NX:0]   xe, word, acc_in;
  logic [NX+1:0] psum;
  logic          last;
  logic [3*NX+1:0] full;

  always_comb begin
    cur_x    = start ? x : x_q;
    cur_ybit = start ? y[0] : y_q[0];
    cur_xs   = start ? x_signed : x_signed_q;
    cur_ym   = start ? ymode : ymode_q;
    cur_idx  = start ? '0 : cnt_q;
    ny       = (cur_ym == Y_BINARY_WEIGHT) ? CW'(1) : CW'(NX);
    // bit decoder (2-bit output LUT)
    if (cur_ym == Y_BINARY_WEIGHT) dec = cur_ybit ? BIT_POS : BIT_NEG;
    else if (cur_idx == CW'(NX - 1)) dec = cur_ybit ? BIT_NEG : BIT_ZERO;
    else dec = cur_ybit ? BIT_POS : BIT_ZERO;
    xe = {cur_xs & cur_x[NX-1], cur_x};
    unique case (dec)
      BIT_POS: word = xe;
      BIT_NEG: word = ~xe;
      default: word = '0;
    endcase
    word[NX] = ~word[NX];                               // sign bit elimination
    acc_in   = start ? (NX+1)'(1) << NX : acc_q;        // initial product
    psum     = (NX+2)'(word) + (NX+2)'(acc_in) + (NX+2)'(dec == BIT_NEG);
    last     = (cur_idx == ny - CW'(1));
    full     = ((3*NX+2)'(psum) << (ny - CW'(1))) | ((3*NX+2)'(low_q) >> (CW'(NX) - (ny - CW'(1))));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; y_q <= '0; low_q <= '0; acc_q <= '0; cnt_q <= '0;
      x_signed_q <= 1'b0; ymode_q <= Y_BINARY_WEIGHT;
      busy <= 1'b0; out_valid <= 1'b0; product <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start || busy) begin
        if (start) begin
          x_q <= x; x_signed_q <= x_signed; ymode_q <= ymode;
          y_q <= y >> 1;
        end else begin
          y_q <= y_q >> 1;
        end
        acc_q <= psum[NX+1:1];                 // right shift of the partial sum
        low_q <= {psum[0], low_q[NX-1:1]};
        cnt_q <= cur_idx + CW'(1);
        busy  <= !last;
        if (last) begin
          out_valid <= 1'b1;
          for (int i = 0; i < 2*NX; i++)
            product[i] <= (i < int'(NX) + int'(ny)) ? full[i] : full[int'(NX) + int'(ny) - 1];
        end
      end
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("pe: start while a multiplication is in progress");
endmodule
