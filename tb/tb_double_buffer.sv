// tb_double_buffer -- self-checking test of the Buffer A / Buffer B store
// buffer. Pushes bursts of results at full rate and with random gaps, some
// ending with `last` part-way through a buffer, and checks that the memory
// side writes exactly the same (address, enables, data) sequence in order,
// that at full input rate no result waits more than DEPTH+3 cycles (DEPTH plus
// sampling offsets), and that idle returns.
module tb_double_buffer;
  localparam int AW = 10, W = 32, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_last, mem_we, idle;
  logic [AW-1:0] in_addr, mem_addr;
  logic [W/8-1:0] in_be, mem_be;
  logic [W-1:0] in_data, mem_data;
  int checks = 0, failures = 0;
  int unsigned q_addr[$], q_data[$], q_be[$], q_time[$];
  int cyc = 0, wr_count = 0, swaps = 0;
  bit gapless = 1;

  double_buffer #(.AW(AW), .WIDTH(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory side checker
  always @(posedge clk) if (rst_n && mem_we) begin
    checks++;
    wr_count++;
    if (q_addr.size() == 0) begin
      failures++; $display("FAIL unexpected write");
    end else begin
      int unsigned a, d, b, t;
      a = q_addr.pop_front(); d = q_data.pop_front(); b = q_be.pop_front(); t = q_time.pop_front();
      if (mem_addr != AW'(a) || mem_data != W'(d) || mem_be != 4'(b)) begin
        failures++; $display("FAIL write %h/%h/%h exp %h/%h/%h", mem_addr, mem_data, mem_be, a, d, b);
      end
      if (gapless && cyc - int'(t) > DEPTH + 3) begin
        failures++; $display("FAIL result waited %0d cycles", cyc - int'(t));
      end
    end
  end
  always @(posedge clk) if (rst_n && dut.fill_sel != $past(dut.fill_sel)) swaps++;

  task automatic push(int n, bit gaps);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1; in_last = (i == n - 1);
      in_addr = AW'($urandom()); in_data = $urandom(); in_be = 4'($urandom_range(1, 15));
      q_addr.push_back(in_addr); q_data.push_back(in_data); q_be.push_back(in_be); q_time.push_back(cyc);
      if (gaps && $urandom_range(0, 3) == 0) begin
        @(negedge clk); in_valid = 0;
      end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  initial begin
    in_valid = 0; in_last = 0; in_addr = 0; in_data = 0; in_be = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    push(37, 0);
    repeat (DEPTH + 3) @(posedge clk);
    checks++; if (!idle || q_addr.size() != 0) begin failures++; $display("FAIL not idle after burst"); end
    push(5, 0);
    gapless = 0;
    push(64, 1);
    repeat (DEPTH + 3) @(posedge clk);
    checks++; if (!idle || q_addr.size() != 0) begin failures++; $display("FAIL not idle at end"); end
    checks++; if (wr_count != 37 + 5 + 64) begin failures++; $display("FAIL %0d writes", wr_count); end
    checks++; if (swaps < 10) begin failures++; $display("FAIL only %0d buffer swaps", swaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
