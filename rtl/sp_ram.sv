// sp_ram -- simple dual-port synchronous RAM, one read port and one
// byte-enabled write port, used for every region of the engine scratchpad.
//
// A read issued with re in cycle t returns rdata in cycle t+1. Writes take
// effect at the clock edge; a read of the address being written in the same
// cycle returns the old word (the scratchpad never does this, because the
// patch pipeline keeps readers and writers in different patch slots).
// The size and port arrangement are this design's choice; the paper only
// names a scratchpad memory.
module sp_ram #(
  parameter int unsigned WIDTH = 32,           // multiple of 8
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               re,
  input  logic [AW-1:0]      raddr,
  output logic [WIDTH-1:0]   rdata,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [WIDTH/8-1:0] wbe,
  input  logic [WIDTH-1:0]   wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < WIDTH/8; b++)
        if (wbe[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    end
    if (re) rdata <= mem[raddr];
  end
endmodule
