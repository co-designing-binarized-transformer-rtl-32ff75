// compressor42: word-wide 4:2 compressor.
//
// Reduces four W-bit operands to a sum word and a carry word with
// a + b + c + d == sum + carry (mod 2^W). Each bit position is the cell of the
// compressor tree figure: two XORs of the input pairs, a multiplexer selected
// by the first XOR that produces the lateral carry cout[n] (x3 when x1^x2,
// otherwise x1), an XOR with the lateral carry-in cin[n] = cout[n-1] for the
// sum bit, and a multiplexer giving the carry bit (cin when the four inputs
// have odd parity, otherwise x4). The lateral chain is one cell long, so the
// delay does not grow with W. Purely combinational.
//
// From the paper: the cell structure (XOR gates, multiplexers, cout/cin
// chaining). Own choice: the carry word is returned already shifted by one
// place and the top cout is dropped (two's complement, modulo 2^W).
module compressor42 #(
  parameter int unsigned W = 24
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] x12, x34, t, cout, cin, cb;
  always_comb begin
    x12  = a ^ b;
    x34  = c ^ d;
    t    = x12 ^ x34;
    for (int n = 0; n < W; n++) cout[n] = x12[n] ? c[n] : a[n];
    cin  = {cout[W-2:0], 1'b0};
    sum  = t ^ cin;
    for (int n = 0; n < W; n++) cb[n] = t[n] ? cin[n] : d[n];
    carry = {cb[W-2:0], 1'b0};
  end
endmodule
