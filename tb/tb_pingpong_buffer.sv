// tb_pingpong_buffer: narrow writes (1 sub-word) and wide reads (4
// sub-words) on both banks, plus the bank handshake: commit sets a bank's
// full flag, release clears it, and the other bank stays writable while one
// is being read. Checks read data, the one-cycle read latency and the flags.
module tb_pingpong_buffer;
  localparam int SUB_W = 16, WR = 1, RD = 4, DEPTH = 32;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [$clog2(DEPTH/WR)-1:0] wr_addr = '0;
  logic [$clog2(DEPTH/RD)-1:0] rd_addr = '0;
  logic [WR*SUB_W-1:0] wr_data = '0;
  logic [RD*SUB_W-1:0] rd_data;
  logic commit = 0, commit_bank = 0, release_en = 0, release_bank = 0;
  logic [1:0] full;
  logic [SUB_W-1:0] model [2][DEPTH];
  int checks = 0, failures = 0;
  pingpong_buffer #(.SUB_W(SUB_W), .WR_RATIO(WR), .RD_RATIO(RD), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic fill(logic b);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = b; wr_addr = a[$bits(wr_addr)-1:0]; wr_data = SUB_W'($urandom);
      model[b][a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0; commit = 1; commit_bank = b;
    @(negedge clk);
    commit = 0;
    checks++;
    if (!full[b]) begin failures++; $display("FAIL commit bank %0d", b); end
  endtask
  task automatic drain(logic b);
    for (int a = 0; a < DEPTH / RD; a++) begin
      @(negedge clk);
      rd_en = 1; rd_bank = b; rd_addr = a[$bits(rd_addr)-1:0];
      @(negedge clk);
      rd_en = 0;
      for (int j = 0; j < RD; j++) begin
        checks++;
        if (rd_data[j*SUB_W +: SUB_W] != model[b][a*RD + j]) begin
          failures++;
          $display("FAIL bank %0d word %0d sub %0d", b, a, j);
        end
      end
    end
    @(negedge clk);
    release_en = 1; release_bank = b;
    @(negedge clk);
    release_en = 0;
    checks++;
    if (full[b]) begin failures++; $display("FAIL release bank %0d", b); end
  endtask
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    checks++;
    if (full != 0) begin failures++; $display("FAIL reset flags"); end
    for (int t = 0; t < 6; t++) begin
      fill(t[0]);
      drain(t[0]);
    end
    fill(0);
    fill(1);
    checks++;
    if (full != 2'b11) begin failures++; $display("FAIL both full"); end
    drain(0);
    drain(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
