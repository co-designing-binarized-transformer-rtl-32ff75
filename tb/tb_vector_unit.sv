// tb_vector_unit: dequantization (integer to FP16 times scale), residual
// addition and their combination on random data (LANES = 4). Each FP16
// step of the reference is rounded with real arithmetic. Checks every lane
// and the 2-cycle latency.
module tb_vector_unit;
  import bat_pkg::*;
  import fp16_ref_pkg::*;
  localparam int LANES = 4, ACC_W = 24;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, in_is_int = 0, mul_en = 0, add_en = 0;
  logic [LANES-1:0][ACC_W-1:0] in_int = '0;
  fp16_t [LANES-1:0] in_fp = '0, res = '0;
  fp16_t scale = '0;
  logic out_valid, out_last;
  fp16_t [LANES-1:0] out_data;
  int checks = 0, failures = 0;
  vector_unit #(.LANES(LANES), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real a, m, r;
    int cyc, iv;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      in_is_int = (t % 3 != 2); mul_en = (t % 4 != 3); add_en = (t % 2 == 1);
      scale = rand_fp16(-8, 0);
      for (int i = 0; i < LANES; i++) begin
        in_int[i] = ACC_W'($urandom_range(0, 4000)) - ACC_W'(2000);
        in_fp[i] = rand_fp16(-4, 4);
        res[i] = rand_fp16(-4, 4);
      end
      in_valid = 1; in_last = 1;
      @(negedge clk);
      in_valid = 0; in_last = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int i = 0; i < LANES; i++) begin
        iv = int'(signed'(in_int[i]));
        a = in_is_int ? fp16_to_real(real_to_fp16(real'(iv))) : fp16_to_real(in_fp[i]);
        m = mul_en ? fp16_to_real(real_to_fp16(a * fp16_to_real(scale))) : a;
        r = add_en ? fp16_to_real(real_to_fp16(m + fp16_to_real(res[i]))) : m;
        checks++;
        if (real_to_fp16(r) != out_data[i] && !(r == 0.0 && out_data[i][14:0] == 0)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d got %h exp %h", t, i, out_data[i], real_to_fp16(r));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
