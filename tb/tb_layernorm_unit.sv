// tb_layernorm_unit: layer normalization of random rows (LANES = 4, rows of
// 32 and 16 elements) with random gamma and beta, against the exact result
// computed with real arithmetic. Tolerance 0.06 + 4 % of |gamma * z| (FP16
// accumulation). Also checks the last flag and that the last output beat
// comes n/LANES + 6 cycles after the last input beat.
module tb_layernorm_unit;
  import bat_pkg::*;
  import fp16_ref_pkg::*;
  localparam int LANES = 4, ROW_MAX = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, prm_we = 0;
  fp16_t [LANES-1:0] in_data = '0, prm_gamma = '0, prm_beta = '0;
  fp16_t eps = 16'h1400;  // about 0.001
  logic [$clog2(ROW_MAX/LANES)-1:0] prm_addr = '0;
  logic in_ready, out_valid, out_last;
  fp16_t [LANES-1:0] out_data;
  int checks = 0, failures = 0;
  layernorm_unit #(.LANES(LANES), .ROW_MAX(ROW_MAX)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    fp16_t row [ROW_MAX];
    real gam [ROW_MAX];
    real bet [ROW_MAX];
    real mean, var_, r, g, z;
    int n, beat, cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < ROW_MAX / LANES; b++) begin
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        prm_gamma[l] = real_to_fp16(0.5 + real'($urandom_range(0, 1000)) / 1000.0);
        prm_beta[l]  = real_to_fp16((real'($urandom_range(0, 1000)) - 500.0) / 1000.0);
        gam[b*LANES + l] = fp16_to_real(prm_gamma[l]);
        bet[b*LANES + l] = fp16_to_real(prm_beta[l]);
      end
      prm_addr = b[$bits(prm_addr)-1:0]; prm_we = 1;
    end
    @(negedge clk) prm_we = 0;
    for (int t = 0; t < 30; t++) begin
      n = (t % 2) ? 16 : 32;
      mean = 0.0; var_ = 0.0;
      for (int i = 0; i < n; i++) begin
        row[i] = real_to_fp16((real'($urandom_range(0, 4000)) - 2000.0) / 1000.0 + 0.5);
        mean += fp16_to_real(row[i]);
      end
      mean = mean / n;
      for (int i = 0; i < n; i++) var_ += (fp16_to_real(row[i]) - mean) ** 2;
      var_ = var_ / n;
      for (int b = 0; b < n / LANES; b++) begin
        @(negedge clk);
        for (int l = 0; l < LANES; l++) in_data[l] = row[b*LANES + l];
        in_valid = 1; in_last = (b == n / LANES - 1);
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      beat = 0; cyc = 1;
      while (beat < n / LANES) begin
        if (out_valid) begin
          for (int l = 0; l < LANES; l++) begin
            z = (fp16_to_real(row[beat*LANES + l]) - mean) / $sqrt(var_ + fp16_to_real(eps));
            r = z * gam[beat*LANES + l] + bet[beat*LANES + l];
            g = fp16_to_real(out_data[l]);
            checks++;
            if (rabs(g - r) > 0.06 + 0.04 * rabs(z * gam[beat*LANES + l])) begin
              failures++;
              if (failures < 10) $display("FAIL row %0d el %0d got %f exp %f", t, beat*LANES+l, g, r);
            end
          end
          beat++;
          if (beat == n / LANES) begin
            checks++;
            if (!out_last || cyc != n / LANES + 6) begin
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
