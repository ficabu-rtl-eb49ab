// double_buffer -- ping-pong store buffer (Buffer A / Buffer B) between a
// compute pipeline and a scratchpad write port.
//
// The last stage of the FIMD and Dampening pipelines hands one result per
// cycle (address, byte enables, data) to this block. Results go into the
// buffer being filled; when it holds DEPTH results, or the result is marked
// last, it is closed and filling moves to the other buffer, while the closed
// one is written to memory one word per cycle through the output multiplexer.
// Memory writes so never compete with the pipeline's reads, which is what the
// paper's "double buffer for R/W decoupling" is for.
//
// Timing: a result accepted in cycle t is written to memory no earlier than
// cycle t+1; at full input rate no later than about t+DEPTH (with gaps it
// waits until its buffer is closed). The drain is as fast as the fill, so a
// buffer is always empty again before it is refilled; an assertion checks it.
// idle is high when both buffers are empty and nothing is half filled.
// Two buffers and a multiplexer follow the paper's figure; the depth, the
// swap rule and the flush on `last` are this design's choice.
module double_buffer #(
  parameter int unsigned AW    = 10,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the Store stage
  input  logic               in_valid,
  input  logic               in_last,
  input  logic [AW-1:0]      in_addr,
  input  logic [WIDTH/8-1:0] in_be,
  input  logic [WIDTH-1:0]   in_data,
  // to the scratchpad write port
  output logic               mem_we,
  output logic [AW-1:0]      mem_addr,
  output logic [WIDTH/8-1:0] mem_be,
  output logic [WIDTH-1:0]   mem_data,
  output logic               idle
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  typedef struct packed {
    logic [AW-1:0]      addr;
    logic [WIDTH/8-1:0] be;
    logic [WIDTH-1:0]   data;
  } entry_t;

  entry_t          bufs  [2][DEPTH];
  logic            full  [2];
  logic [CW-1:0]   count [2];
  logic            fill_sel, drain_sel;
  logic [CW-1:0]   fill_cnt, drain_idx;

  wire close_fill = in_valid && (in_last || fill_cnt == CW'(DEPTH - 1));
  wire drain_now  = full[drain_sel];
  wire drain_end  = drain_now && (drain_idx == count[drain_sel] - 1'b1);

  always_ff @(posedge clk) begin
    if (in_valid) bufs[fill_sel][fill_cnt[$clog2(DEPTH)-1:0]] <= '{addr: in_addr, be: in_be, data: in_data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full      <= '{default: 1'b0};
      count     <= '{default: '0};
      fill_sel  <= 1'b0;
      drain_sel <= 1'b0;
      fill_cnt  <= '0;
      drain_idx <= '0;
    end else begin
      // drain first: a buffer that finishes draining may be closed again in
      // the same cycle, and the fill side's update must win
      if (drain_now) begin
        if (drain_end) begin
          full[drain_sel] <= 1'b0;
          drain_sel       <= ~drain_sel;
          drain_idx       <= '0;
        end else begin
          drain_idx <= drain_idx + 1'b1;
        end
      end
      if (in_valid) begin
        if (close_fill) begin
          full[fill_sel]  <= 1'b1;
          count[fill_sel] <= fill_cnt + 1'b1;
          fill_sel        <= ~fill_sel;
          fill_cnt        <= '0;
        end else begin
          fill_cnt <= fill_cnt + 1'b1;
        end
      end
    end
  end

  // output multiplexer: Buffer A or Buffer B
  always_comb begin
    entry_t e;
    e        = bufs[drain_sel][drain_idx[$clog2(DEPTH)-1:0]];
    mem_we   = drain_now;
    mem_addr = e.addr;
    mem_be   = e.be;
    mem_data = e.data;
  end

  assign idle = !full[0] && !full[1] && (fill_cnt == '0);

  // a buffer must be empty again before the pipeline starts refilling it
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && fill_cnt == '0) |-> (!full[fill_sel] || (drain_end && drain_sel == fill_sel)));

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0) else $error("DEPTH must be a power of two >= 2");
  end
endmodule
