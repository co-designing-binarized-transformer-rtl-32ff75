// tb_dpu: dot products through one DPU (P_PE = 16, NX = 4).
// Random vectors of several chunks are accumulated and compared with an
// integer dot product computed here, for all four operand combinations of
// the binarized Transformer (signed/unsigned activation against binarized
// weight or signed activation). Checks the latency from the last issue to
// out_valid: Ny + 2 cycles (PE product register, accumulator registers, result register).
module tb_dpu;
  import bat_pkg::*;
  localparam int NX = 4, P_PE = 16, ACC_W = 24;
  logic clk = 0, rst_n = 0;
  logic start = 0, first = 0, last = 0;
  logic [P_PE-1:0][NX-1:0] x_vec = '0, y_vec = '0;
  logic x_signed = 0;
  ymode_e ymode = Y_BINARY_WEIGHT;
  logic busy, out_valid;
  logic signed [ACC_W-1:0] result;
  int checks = 0, failures = 0;

  dpu #(.NX(NX), .P_PE(P_PE), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int chunks, logic s, ymode_e m);
    int expv, cyc, ny;
    expv = 0;
    ny = (m == Y_BINARY_WEIGHT) ? 1 : NX;
    for (int c = 0; c < chunks; c++) begin
      @(negedge clk);
      for (int e = 0; e < P_PE; e++) begin
        x_vec[e] = NX'($urandom);
        y_vec[e] = NX'($urandom);
        expv += (s ? int'(signed'(x_vec[e])) : int'(x_vec[e])) *
                ((m == Y_BINARY_WEIGHT) ? (y_vec[e][0] ? 1 : -1) : int'(signed'(y_vec[e])));
      end
      x_signed = s; ymode = m; first = (c == 0); last = (c == chunks - 1); start = 1;
      @(negedge clk);
      start = 0;
      if (c != chunks - 1) repeat (ny - 1) @(negedge clk);
    end
    cyc = 1;
    while (!out_valid) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (int'(result) != expv) begin
      failures++;
      $display("FAIL chunks=%0d s=%0d m=%0d got %0d exp %0d", chunks, s, m, result, expv);
    end
    checks++;
    if (cyc != ny + 2) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cyc, ny + 2);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      run(1 + t % 6, 1'b1, Y_BINARY_WEIGHT);
      run(1 + t % 5, 1'b0, Y_BINARY_WEIGHT);
      run(1 + t % 4, 1'b1, Y_SIGNED_ACT);
      run(1 + t % 3, 1'b0, Y_SIGNED_ACT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
