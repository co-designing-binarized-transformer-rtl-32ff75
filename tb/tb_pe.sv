// tb_pe: exhaustive check of the bit-serial SBE processing element (NX = 4).
// Every x (signed and unsigned) against every binarized weight and every
// signed 4-bit activation y; products are compared with integer
// multiplication, and the latency is checked: 1 cycle for a binary weight,
// NX cycles for an activation operand. Also runs back-to-back binary
// products, one per cycle.
module tb_pe;
  import bat_pkg::*;
  localparam int NX = 4;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [NX-1:0] x = 0, y = 0;
  logic x_signed = 0;
  ymode_e ymode = Y_BINARY_WEIGHT;
  logic busy, out_valid;
  logic signed [2*NX-1:0] product;
  int checks = 0, failures = 0;

  pe #(.NX(NX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xval(logic [NX-1:0] v, logic s);
    return s ? int'(signed'(v)) : int'(v);
  endfunction

  task automatic run_one(logic [NX-1:0] xi, logic [NX-1:0] yi, logic s, ymode_e m);
    int exp_p, yv, cyc;
    yv = (m == Y_BINARY_WEIGHT) ? (yi[0] ? 1 : -1) : int'(signed'(yi));
    exp_p = xval(xi, s) * yv;
    @(negedge clk);
    x = xi; y = yi; x_signed = s; ymode = m; start = 1;
    @(negedge clk);
    start = 0; x = '0; y = '0;
    cyc = 1;
    while (!out_valid) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (int'(product) != exp_p) begin
      failures++;
      $display("FAIL x=%0d y=%0d s=%0d m=%0d got %0d exp %0d", xi, yi, s, m, product, exp_p);
    end
    checks++;
    if (cyc != ((m == Y_BINARY_WEIGHT) ? 1 : NX)) begin
      failures++;
      $display("FAIL latency %0d", cyc);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int xi = 0; xi < 16; xi++) begin
        for (int yi = 0; yi < 2; yi++) run_one(NX'(xi), NX'(yi), s[0], Y_BINARY_WEIGHT);
        for (int yi = 0; yi < 16; yi++) run_one(NX'(xi), NX'(yi), s[0], Y_SIGNED_ACT);
      end
    // back-to-back binary weights: one product per cycle
    begin
      int xs[8];
      int ys[8];
      for (int i = 0; i < 8; i++) begin
        xs[i] = $urandom_range(0, 15);
        ys[i] = $urandom_range(0, 1);
      end
      fork
        begin
          for (int i = 0; i < 8; i++) begin
            @(negedge clk);
            x = NX'(xs[i]); y = NX'(ys[i]); x_signed = 1; ymode = Y_BINARY_WEIGHT; start = 1;
          end
          @(negedge clk) start = 0;
        end
        begin
          @(negedge clk);
          for (int i = 0; i < 8; i++) begin
            @(negedge clk);
            checks++;
            if (!out_valid || int'(product) != int'(signed'(NX'(xs[i]))) * (ys[i] ? 1 : -1)) begin
              failures++;
              $display("FAIL back-to-back %0d", i);
            end
          end
        end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
