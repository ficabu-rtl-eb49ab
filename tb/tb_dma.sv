// tb_dma -- self-checking test of the DMA.
// A main-memory model accepts requests with random ready and returns read
// data after a random 1..4 cycle latency. The test runs loads into the I_D
// and theta-in regions and a store from the theta-out region (modelled here
// as one-cycle-latency RAMs), checks every word moved, the region selection,
// that exactly nwords requests reach memory, and that done pulses once.
module tb_dma;
  import ficabu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, mm_ready, mm_rvalid, sp_we, sp_re;
  dma_cmd_t cmd;
  mm_req_t mm_req;
  logic [31:0] mm_rdata, sp_wdata, sp_rdata;
  sp_region_e sp_wregion;
  logic [15:0] sp_waddr, sp_raddr;
  int checks = 0, failures = 0, n_req = 0, n_done = 0;
  logic [31:0] mem [1024];
  logic [31:0] sp_id [64], sp_tin [64], sp_tout [64];
  int rd_delay = -1;
  logic [31:0] rd_addr;

  dma dut (.*);
  always #5 clk = ~clk;

  // main memory model
  always_ff @(posedge clk) begin
    mm_rvalid <= 1'b0;
    if (rd_delay > 0) rd_delay <= rd_delay - 1;
    else if (rd_delay == 0) begin mm_rvalid <= 1'b1; mm_rdata <= mem[rd_addr[11:2]]; rd_delay <= -1; end
    if (mm_req.valid && mm_ready) begin
      n_req++;
      if (mm_req.we) mem[mm_req.addr[11:2]] <= mm_req.wdata;
      else begin rd_addr <= mm_req.addr; rd_delay <= $urandom_range(0, 3); end
    end
    mm_ready <= ($urandom_range(0, 2) != 0);
    if (done) n_done++;
  end
  // scratchpad model
  always_ff @(posedge clk) begin
    if (sp_we) case (sp_wregion)
      REG_ID:  sp_id[sp_waddr[5:0]]  <= sp_wdata;
      REG_TIN: sp_tin[sp_waddr[5:0]] <= sp_wdata;
      default: begin end
    endcase
    if (sp_re) sp_rdata <= sp_tout[sp_raddr[5:0]];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic to_sp, sp_region_e r, int mm_word, int sp_a, int n);
    int req0, done0;
    req0 = n_req; done0 = n_done;
    @(negedge clk);
    cmd = '{to_sp: to_sp, region: r, mm_addr: 32'(mm_word*4), sp_addr: 16'(sp_a), nwords: 16'(n)};
    start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks += 2;
    if (n_req - req0 != n) begin failures++; $display("FAIL %0d requests for %0d words", n_req - req0, n); end
    if (n_done - done0 != 1) begin failures++; $display("FAIL done pulsed %0d times", n_done - done0); end
  endtask

  initial begin
    start = 0; cmd = '0; mm_ready = 0;
    for (int i = 0; i < 1024; i++) mem[i] = $urandom();
    for (int i = 0; i < 64; i++) begin sp_id[i] = 0; sp_tin[i] = 0; sp_tout[i] = $urandom(); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, REG_ID, 100, 5, 20);
    for (int i = 0; i < 20; i++) begin checks++; if (sp_id[5+i] != mem[100+i]) begin failures++; $display("FAIL id %0d", i); end end
    for (int i = 0; i < 64; i++) begin checks++; if (sp_tin[i] != 0) begin failures++; $display("FAIL stray write tin %0d", i); end end
    run(1, REG_TIN, 300, 0, 16);
    for (int i = 0; i < 16; i++) begin checks++; if (sp_tin[i] != mem[300+i]) begin failures++; $display("FAIL tin %0d", i); end end
    run(0, REG_TOUT, 500, 8, 24);
    for (int i = 0; i < 24; i++) begin checks++; if (mem[500+i] != sp_tout[8+i]) begin failures++; $display("FAIL store %0d", i); end end
    run(1, REG_ID, 7, 63, 1);
    checks++; if (sp_id[63] != mem[7]) begin failures++; $display("FAIL single word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
