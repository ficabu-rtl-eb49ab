// onchip_sram -- 64 KB general-purpose on-chip SRAM on an APB port.
//
// Word-organised memory (SIZE_BYTES/4 words of 32 bits) for code and data of
// the host core. APB3 completer: a write stores the bytes selected by PSTRB
// in the access phase; a read is served by a one-wait-state access (PREADY
// low in the first access cycle, data and PREADY high in the second), which
// keeps the array a plain synchronous RAM. Addresses wrap at SIZE_BYTES.
// The 64 KB size and the APB attachment follow the paper; the wait state,
// the strobes and the address wrap are this design's choice.
module onchip_sram
  import ficabu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 65536
) (
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp
);
  localparam int unsigned WORDS = SIZE_BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [31:0] rdata;
  logic        rd_ready;

  wire          access = apb_req.psel && apb_req.penable;
  wire [AW-1:0] widx   = apb_req.paddr[2 +: AW];

  always_ff @(posedge clk) begin
    if (access && apb_req.pwrite) begin
      for (int b = 0; b < 4; b++)
        if (apb_req.pstrb[b]) mem[widx][b*8 +: 8] <= apb_req.pwdata[b*8 +: 8];
    end
    if (access && !apb_req.pwrite) rdata <= mem[widx];
  end

  // one wait state on reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_ready <= 1'b0;
    else        rd_ready <= access && !apb_req.pwrite && !rd_ready;
  end

  always_comb begin
    apb_rsp         = '0;
    apb_rsp.pready  = apb_req.pwrite ? 1'b1 : rd_ready;
    apb_rsp.prdata  = rdata;
  end
endmodule
