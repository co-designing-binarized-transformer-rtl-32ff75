// tb_relu_unit: ReLU on random FP16 vectors (LANES = 8), enabled and
// bypassed; checks every lane and the 1-cycle latency.
module tb_relu_unit;
  import bat_pkg::*;
  import fp16_ref_pkg::*;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, in_last = 0;
  fp16_t [LANES-1:0] in_data = '0;
  logic out_valid, out_last;
  fp16_t [LANES-1:0] out_data;
  int checks = 0, failures = 0;
  relu_unit #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    fp16_t [LANES-1:0] xs;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < LANES; i++) xs[i] = rand_fp16(-6, 6);
      @(negedge clk);
      in_data = xs; en = (t % 5 != 0); in_valid = 1; in_last = t[0];
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_last != t[0]) begin failures++; $display("FAIL valid"); end
      for (int i = 0; i < LANES; i++) begin
        real r;
        r = fp16_to_real(xs[i]);
        checks++;
        if (fp16_to_real(out_data[i]) != ((en && r < 0.0) ? 0.0 : r)) begin
          failures++;
          $display("FAIL %h -> %h", xs[i], out_data[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
