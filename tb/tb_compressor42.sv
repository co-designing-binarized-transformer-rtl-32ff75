// tb_compressor42: random and corner operands for the word-wide 4:2
// compressor; checks a + b + c + d == sum + carry modulo 2^W.
module tb_compressor42;
  localparam int W = 24;
  logic [W-1:0] a, b, c, d, sum, carry;
  int checks = 0, failures = 0;
  logic clk = 0;
  compressor42 #(.W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 5000; i++) begin
      a = W'($urandom); b = W'($urandom); c = W'($urandom); d = W'($urandom);
      if (i < 16) begin
        a = i[0] ? '1 : '0; b = i[1] ? '1 : '0; c = i[2] ? '1 : '0; d = i[3] ? '1 : '0;
      end
      #1;
      checks++;
      if (W'(a + b + c + d) != W'(sum + carry)) begin
        failures++;
        if (failures < 10) $display("FAIL %h %h %h %h -> %h %h", a, b, c, d, sum, carry);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
