// tb_qmm_engine: matrix products through the QMM engine at P_DPU = 4,
// P_PE = 8, NX = 4, with both data access patterns.
// The operand buffers are modelled here as arrays with one cycle of read
// latency, filled with random data. Expected results are integer matrix
// products computed from the same arrays. Checks every result word, the
// row-last flags, the number of beats, and that the run takes
// m_rows*n_groups*kch*Ny issue cycles plus at most 8 cycles of pipeline.
// The row grant (row_go) is held high for the timed runs; the last runs
// withhold it at random, which must delay rows without changing results,
// and count that exactly m_rows rows were started.
module tb_qmm_engine;
  import bat_pkg::*;
  localparam int NX = 4, P_PE = 8, P_DPU = 4, ACC_W = 24, AW = 8, DIM_W = 8;
  localparam int DEPTH = 1 << AW;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  qmm_pattern_e pattern = PAT_ACT_WEIGHT;
  logic x_signed = 0;
  logic [DIM_W-1:0] m_rows = 0, n_groups = 0, kch = 0;
  logic [AW-1:0] x_base = 0, y_base = 0;
  logic busy, done, x_rd, y_rd, out_valid, out_row_last, row_go, row_start;
  bit stall_mode = 0;
  int n_row_start = 0;
  logic go_rand;
  always_ff @(posedge clk) begin
    go_rand <= ($urandom_range(0, 3) == 0);
    if (row_start) n_row_start++;
  end
  assign row_go = !stall_mode || go_rand;
  logic [AW-1:0] x_addr, y_addr;
  logic [P_DPU-1:0][P_PE*NX-1:0] x_rdata, y_rdata;
  logic [P_DPU-1:0][ACC_W-1:0] out_data;
  logic [P_DPU-1:0][P_PE*NX-1:0] xmem [DEPTH];
  logic [P_DPU-1:0][P_PE*NX-1:0] ymem [DEPTH];
  int checks = 0, failures = 0;

  qmm_engine #(.NX(NX), .P_PE(P_PE), .P_DPU(P_DPU), .ACC_W(ACC_W), .AW(AW), .DIM_W(DIM_W)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (x_rd) x_rdata <= xmem[x_addr];
    if (y_rd) y_rdata <= ymem[y_addr];
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int elem_x(int addr, int lane, int e, logic s);
    logic [NX-1:0] v = xmem[addr][lane][e*NX +: NX];
    return s ? int'(signed'(v)) : int'(v);
  endfunction

  task automatic run(qmm_pattern_e pat, logic s, int m, int ng, int kc, int xb, int yb);
    int expv, beat, r, g, cyc, ny;
    logic [P_DPU*P_PE*NX-1:0] yflat;
    ny = (pat == PAT_ACT_ACT) ? NX : 1;
    n_row_start = 0;
    @(negedge clk);
    pattern = pat; x_signed = s; m_rows = DIM_W'(m); n_groups = DIM_W'(ng); kch = DIM_W'(kc);
    x_base = AW'(xb); y_base = AW'(yb); start = 1;
    @(negedge clk);
    start = 0;
    beat = 0; cyc = 1;
    while (!done) begin
      if (out_valid) begin
        r = beat / ng; g = beat % ng;
        for (int d = 0; d < P_DPU; d++) begin
          expv = 0;
          for (int k = 0; k < kc; k++) begin
            yflat = ymem[yb + g*kc + k];
            for (int e = 0; e < P_PE; e++) begin
              if (pat == PAT_ACT_WEIGHT)
                expv += elem_x(xb + r*kc + k, 0, e, s) * (yflat[d*P_PE + e] ? 1 : -1);
              else
                expv += elem_x(xb + r*kc + k, d, e, s) * int'(signed'(ymem[yb + g*kc + k][d][e*NX +: NX]));
            end
          end
          checks++;
          if (int'(signed'(out_data[d])) != expv) begin
            failures++;
            if (failures < 10) $display("FAIL pat=%0d r=%0d g=%0d d=%0d got %0d exp %0d", pat, r, g, d, signed'(out_data[d]), expv);
          end
        end
        checks++;
        if (out_row_last != (g == ng - 1)) begin
          failures++;
          $display("FAIL row_last beat %0d", beat);
        end
        beat++;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (beat != m * ng) begin
      failures++;
      $display("FAIL beats %0d exp %0d", beat, m * ng);
    end
    checks++;
    if (n_row_start != m) begin
      failures++;
      $display("FAIL row starts %0d exp %0d", n_row_start, m);
    end
    checks++;
    if (cyc < m*ng*kc*ny || (!stall_mode && cyc > m*ng*kc*ny + 8)) begin
      failures++;
      $display("FAIL cycles %0d for %0d issue cycles", cyc, m*ng*kc*ny);
    end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++)
      for (int d = 0; d < P_DPU; d++) begin
        xmem[i][d] = {$urandom, $urandom};
        ymem[i][d] = {$urandom, $urandom};
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(PAT_ACT_WEIGHT, 1'b1, 3, 2, 3, 0, 40);
    run(PAT_ACT_WEIGHT, 1'b0, 2, 3, 1, 17, 3);
    run(PAT_ACT_WEIGHT, 1'b1, 1, 1, 5, 100, 200);
    run(PAT_ACT_ACT, 1'b1, 3, 2, 2, 5, 60);
    run(PAT_ACT_ACT, 1'b0, 2, 2, 3, 9, 70);
    stall_mode = 1;
    run(PAT_ACT_WEIGHT, 1'b1, 4, 2, 2, 0, 40);
    run(PAT_ACT_ACT, 1'b1, 3, 2, 1, 5, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
