// dma_engine: descriptor-driven DMA between external memory and the
// on-chip buffers of the MHA and FFN modules.
//
// A load descriptor reads `len` consecutive EXT_W-bit words from external
// memory and writes them, in order, to consecutive sub-word addresses of the
// selected buffer. Reads are pipelined: a new request is issued whenever the
// memory grants, and returning data (mem_rvalid, in request order) is
// written as it arrives. A store descriptor reads the selected output
// buffer one sub-word at a time (one cycle read latency) and writes it to
// external memory, one word per grant.
//
// Interface: desc_valid/desc_ready accept one descriptor while idle; `done`
// pulses when it has finished. External memory: mem_req/mem_gnt handshake,
// mem_we, mem_addr, mem_wdata; read data returns on mem_rvalid/mem_rdata.
// On-chip: buf_wr_* for loads, buf_rd_* / buf_rd_data for stores, with the
// descriptor's module/target/bank on buf_sel.
//
// From the paper: a DMA engine between external memory and the buffers.
// Own choices: everything else (descriptor format, protocol, word width).
module dma_engine
  import bat_pkg::*;
#(
  parameter int unsigned EXT_W = 256,
  parameter int unsigned BAW   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               desc_valid,
  output logic               desc_ready,
  input  dma_desc_t          desc,
  output logic               done,
  // external memory
  output logic               mem_req,
  input  logic               mem_gnt,
  output logic               mem_we,
  output logic [31:0]        mem_addr,
  output logic [EXT_W-1:0]   mem_wdata,
  input  logic               mem_rvalid,
  input  logic [EXT_W-1:0]   mem_rdata,
  // on-chip buffers
  output dma_desc_t          buf_sel,
  output logic               buf_wr_en,
  output logic [BAW-1:0]     buf_wr_addr,
  output logic [EXT_W-1:0]   buf_wr_data,
  output logic               buf_rd_en,
  output logic [BAW-1:0]     buf_rd_addr,
  input  logic [EXT_W-1:0]   buf_rd_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_WAIT, S_ST_WR} state_e;
  state_e state_q;
  dma_desc_t d_q;
  logic [15:0] issued, returned;
  logic [EXT_W-1:0] data_q;

  assign desc_ready = (state_q == S_IDLE);
  assign buf_sel    = d_q;

  always_comb begin
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = '0; mem_wdata = data_q;
    buf_rd_en = 1'b0; buf_rd_addr = '0;
    buf_wr_en = 1'b0; buf_wr_addr = '0; buf_wr_data = mem_rdata;
    case (state_q)
      S_LOAD: begin
        mem_req  = (issued != d_q.len);
        mem_addr = d_q.ext_addr + 32'(issued);
        buf_wr_en   = mem_rvalid;
        buf_wr_addr = BAW'(d_q.buf_addr + returned);
      end
      S_ST_RD: begin
        buf_rd_en   = 1'b1;
        buf_rd_addr = BAW'(d_q.buf_addr + issued);
      end
      S_ST_WR: begin
        mem_req  = 1'b1;
        mem_we   = 1'b1;
        mem_addr = d_q.ext_addr + 32'(issued);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; d_q <= '0; issued <= '0; returned <= '0; data_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (desc_valid) begin
          d_q <= desc; issued <= '0; returned <= '0;
          if (desc.len == 0) done <= 1'b1;
          else state_q <= desc.store ? S_ST_RD : S_LOAD;
        end
        S_LOAD: begin
          if (mem_req && mem_gnt) issued <= issued + 1'b1;
          if (mem_rvalid) begin
            returned <= returned + 1'b1;
            if (returned + 1'b1 == d_q.len) begin
              state_q <= S_IDLE;
              done    <= 1'b1;
            end
          end
        end
        S_ST_RD:   state_q <= S_ST_WAIT;
        S_ST_WAIT: begin
          data_q  <= buf_rd_data;
          state_q <= S_ST_WR;
        end
        S_ST_WR: if (mem_gnt) begin
          issued <= issued + 1'b1;
          if (issued + 1'b1 == d_q.len) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else state_q <= S_ST_RD;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_no_stray_rdata: assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> state_q == S_LOAD)
    else $error("dma_engine: read data outside a load");
endmodule
