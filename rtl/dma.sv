// dma -- block mover between main memory and the engine scratchpad.
//
// Executes one command at a time: copy `nwords` 32-bit words between the
// main-memory byte address mm_addr (incrementing by 4) and word sp_addr of a
// scratchpad region (incrementing by 1). Direction to_sp loads the I_D or
// theta-in region; the other direction stores the theta-out region.
// The engine controller issues the commands on behalf of the FIMD and
// Dampening units.
//
// Main-memory port: a request (valid, we, addr, wdata) is taken when
// mm_ready is high; a read returns mm_rdata with mm_rvalid some cycles later,
// in order. This design keeps one request outstanding, so a word costs at
// least two cycles on a load and two on a store (scratchpad read, then
// write request). The paper places the DMA on an AXI port; this simplified
// single-beat protocol, and one outstanding request, are this design's
// choice. `done` pulses for one cycle when the last word has been written.
module dma
  import ficabu_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  dma_cmd_t    cmd,
  output logic        busy,
  output logic        done,
  // main memory
  output mm_req_t     mm_req,
  input  logic        mm_ready,
  input  logic        mm_rvalid,
  input  logic [31:0] mm_rdata,
  // scratchpad
  output logic        sp_we,
  output sp_region_e  sp_wregion,
  output logic [15:0] sp_waddr,
  output logic [31:0] sp_wdata,
  output logic        sp_re,
  output logic [15:0] sp_raddr,
  input  logic [31:0] sp_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_SP_RD, S_WR_REQ} state_e;
  state_e    state;
  dma_cmd_t  c;
  logic [15:0] left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; left <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cmd;
          left  <= cmd.nwords;
          state <= cmd.to_sp ? S_RD_REQ : S_SP_RD;
        end
        S_RD_REQ:  if (mm_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (mm_rvalid) begin
          c.mm_addr <= c.mm_addr + 4;
          c.sp_addr <= c.sp_addr + 1'b1;
          left      <= left - 1'b1;
          if (left == 16'd1) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_RD_REQ;
        end
        S_SP_RD:   state <= S_WR_REQ;
        S_WR_REQ:  if (mm_ready) begin
          c.mm_addr <= c.mm_addr + 4;
          c.sp_addr <= c.sp_addr + 1'b1;
          left      <= left - 1'b1;
          if (left == 16'd1) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_SP_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    mm_req       = '0;
    mm_req.valid = (state == S_RD_REQ) || (state == S_WR_REQ);
    mm_req.we    = (state == S_WR_REQ);
    mm_req.addr  = c.mm_addr;
    mm_req.wdata = sp_rdata;
  end

  assign busy       = (state != S_IDLE);
  assign sp_we      = (state == S_RD_WAIT) && mm_rvalid;
  assign sp_wregion = c.region;
  assign sp_waddr   = c.sp_addr;
  assign sp_wdata   = mm_rdata;
  assign sp_re      = (state == S_SP_RD);
  assign sp_raddr   = c.sp_addr;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_nonzero:    assert property (@(posedge clk) disable iff (!rst_n) (start && !busy) |-> cmd.nwords != 0);
endmodule
