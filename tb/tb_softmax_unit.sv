// tb_softmax_unit: rows of random FP16 scores (LANES = 4, rows of 32 and 16
// elements) against a softmax computed with real arithmetic here. Each
// output must lie within 3 % + 0.002 of the exact value (FP16 accumulation
// and the exp approximation). Also checks in_ready during normalization,
// the number of output beats, the last flag, and the cycle count from the
// last input beat to the last output beat (n/LANES + 3).
module tb_softmax_unit;
  import bat_pkg::*;
  import fp16_ref_pkg::*;
  localparam int LANES = 4, ROW_MAX = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0;
  fp16_t [LANES-1:0] in_data = '0;
  logic in_ready, out_valid, out_last;
  fp16_t [LANES-1:0] out_data;
  int checks = 0, failures = 0;
  softmax_unit #(.LANES(LANES), .ROW_MAX(ROW_MAX)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    fp16_t row [ROW_MAX];
    real ex [ROW_MAX];
    real s, r, g;
    int n, beat, cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      n = (t % 2) ? 16 : 32;
      s = 0.0;
      for (int i = 0; i < n; i++) begin
        row[i] = real_to_fp16((real'($urandom_range(0, 8000)) - 4000.0) / 1000.0);
        ex[i] = $exp(fp16_to_real(row[i]));
        s += ex[i];
      end
      for (int b = 0; b < n / LANES; b++) begin
        @(negedge clk);
        for (int l = 0; l < LANES; l++) in_data[l] = row[b*LANES + l];
        in_valid = 1; in_last = (b == n / LANES - 1);
        checks++;
        if (!in_ready) begin failures++; $display("FAIL not ready while idle"); end
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      checks++;
      if (in_ready) begin failures++; $display("FAIL ready during normalization"); end
      beat = 0; cyc = 1;
      while (beat < n / LANES) begin
        if (out_valid) begin
          for (int l = 0; l < LANES; l++) begin
            r = ex[beat*LANES + l] / s;
            g = fp16_to_real(out_data[l]);
            checks++;
            if (rabs(g - r) > 0.03 * r + 0.002) begin
              failures++;
              if (failures < 10) $display("FAIL row %0d el %0d got %f exp %f", t, beat*LANES+l, g, r);
            end
          end
          beat++;
          if (beat == n / LANES) begin
            checks++;
            if (!out_last || cyc != n / LANES + 3) begin
              failures++;
              $display("FAIL last=%0d cycles=%0d", out_last, cyc);
            end
          end
        end
        @(negedge clk);
        cyc++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
