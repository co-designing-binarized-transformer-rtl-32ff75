// tb_dma_engine: loads and stores through the DMA engine against an
// external memory model (random grant, read data 2 cycles after the grant,
// in order) and an on-chip buffer model (1 cycle read latency). Checks every
// word moved in both directions, the descriptor fields on buf_sel, the done
// pulse, and that a load of n words with the memory always granting takes at
// most n + 4 cycles.
module tb_dma_engine;
  import bat_pkg::*;
  localparam int EXT_W = 32;
  logic clk = 0, rst_n = 0;
  logic desc_valid = 0, desc_ready, done;
  dma_desc_t desc = '0, buf_sel;
  logic mem_req, mem_gnt, mem_we, mem_rvalid;
  logic [31:0] mem_addr;
  logic [EXT_W-1:0] mem_wdata, mem_rdata, buf_wr_data, buf_rd_data;
  logic buf_wr_en, buf_rd_en;
  logic [15:0] buf_wr_addr, buf_rd_addr;
  logic [EXT_W-1:0] ext [256];
  logic [EXT_W-1:0] onchip [256];
  logic [1:0] rv_pipe;
  logic [EXT_W-1:0] rd_pipe [2];
  int checks = 0, failures = 0;
  bit always_grant = 0;

  dma_engine #(.EXT_W(EXT_W), .BAW(16)) dut (.*);
  always #5 clk = ~clk;

  assign mem_gnt = mem_req && (always_grant || ($urandom_range(0, 2) != 0));
  always_ff @(posedge clk) begin
    rv_pipe <= {rv_pipe[0], mem_req && mem_gnt && !mem_we};
    rd_pipe[1] <= rd_pipe[0];
    if (mem_req && mem_gnt && !mem_we) rd_pipe[0] <= ext[mem_addr[7:0]];
    if (mem_req && mem_gnt && mem_we) ext[mem_addr[7:0]] <= mem_wdata;
    if (buf_wr_en) onchip[buf_wr_addr[7:0]] <= buf_wr_data;
    if (buf_rd_en) buf_rd_data <= onchip[buf_rd_addr[7:0]];
  end
  assign mem_rvalid = rv_pipe[1];
  assign mem_rdata  = rd_pipe[1];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic st, int ea, int ba, int n);
    int cyc;
    @(negedge clk);
    desc = '0;
    desc.store = st; desc.module_sel = 1; desc.target = TGT_RES; desc.bank = 1;
    desc.ext_addr = 32'(ea); desc.buf_addr = 16'(ba); desc.len = 16'(n); desc.last = 1;
    desc_valid = 1;
    @(negedge clk);
    desc_valid = 0;
    cyc = 1;
    while (!done) begin
      checks++;
      if (buf_sel != desc) begin failures++; $display("FAIL buf_sel"); end
      @(negedge clk);
      cyc++;
    end
    if (always_grant && !st) begin
      checks++;
      if (cyc > n + 4) begin failures++; $display("FAIL load of %0d took %0d cycles", n, cyc); end
    end
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin ext[i] = $urandom; onchip[i] = $urandom; end
    rv_pipe = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int ea, ba, n;
      always_grant = (t % 3 == 0);
      ea = $urandom_range(0, 100); ba = $urandom_range(0, 100); n = $urandom_range(1, 40);
      run(t[0], ea, ba, n);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (ext[ea + i] != onchip[ba + i]) begin
          failures++;
          $display("FAIL %s word %0d", t[0] ? "store" : "load", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
