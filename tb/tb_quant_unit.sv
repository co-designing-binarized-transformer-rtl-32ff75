// tb_quant_unit: elastic quantization of random FP16 tensors (LANES = 8,
// NB = 4), signed and unsigned. The reference rounds (x + beta) and the
// product with 1/alpha to FP16 with real arithmetic, rounds to the nearest
// integer (ties to even) and clips to [-8, 7] or [0, 15]. Checks every
// output value and the 3-cycle latency.
module tb_quant_unit;
  import bat_pkg::*;
  import fp16_ref_pkg::*;
  localparam int LANES = 8, NB = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, is_signed = 0;
  fp16_t [LANES-1:0] in_data = '0;
  fp16_t beta = '0, inv_alpha = '0;
  logic out_valid, out_last;
  logic [LANES-1:0][NB-1:0] out_data;
  int checks = 0, failures = 0;
  quant_unit #(.LANES(LANES), .NB(NB)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic int ref_q(fp16_t x, fp16_t b, fp16_t ia, logic s);
    real s1, s2, fl, fr;
    int q;
    s1 = fp16_to_real(real_to_fp16(fp16_to_real(x) + fp16_to_real(b)));
    s2 = fp16_to_real(real_to_fp16(s1 * fp16_to_real(ia)));
    fl = $floor(s2);
    fr = s2 - fl;
    q = int'(fl);
    if (fr > 0.5 || (fr == 0.5 && (q % 2 != 0))) q++;
    if (s) return (q > 7) ? 7 : (q < -8) ? -8 : q;
    return (q > 15) ? 15 : (q < 0) ? 0 : q;
  endfunction
  initial begin
    fp16_t [LANES-1:0] xs;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < LANES; i++) xs[i] = rand_fp16(-4, 5);
      beta = rand_fp16(-3, 1);
      inv_alpha = {1'b0, rand_fp16(-1, 3)};
      if (t % 37 == 0) inv_alpha = 16'h7800;   // 32768: forces the 16-bit saturation
      is_signed = t[0];
      @(negedge clk);
      in_data = xs; in_valid = 1; in_last = 1;
      @(negedge clk);
      in_valid = 0; in_last = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 3 || !out_last) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int i = 0; i < LANES; i++) begin
        int e, g;
        e = ref_q(xs[i], beta, inv_alpha, is_signed);
        g = is_signed ? int'(signed'(out_data[i])) : int'(out_data[i]);
        checks++;
        if (e != g) begin
          failures++;
          if (failures < 10) $display("FAIL x=%h b=%h ia=%h s=%0d got %0d exp %0d", xs[i], beta, inv_alpha, is_signed, g, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
