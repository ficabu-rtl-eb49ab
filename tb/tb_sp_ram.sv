// tb_sp_ram -- self-checking test of the scratchpad RAM block.
// Writes random words with random byte enables, keeps a shadow copy and
// checks every read one cycle after it is issued.
module tb_sp_ram;
  localparam int W = 32, D = 64, AW = 6;
  logic clk = 0, re, we;
  logic [AW-1:0] raddr, waddr;
  logic [W-1:0] rdata, wdata;
  logic [W/8-1:0] wbe;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  sp_ram #(.WIDTH(W), .DEPTH(D)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wbe, .wdata);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0; wbe = 0;
    // initialise
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wbe = '1; wdata = $urandom(); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      logic [AW-1:0] a;
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = AW'($urandom()); wbe = 4'($urandom()); wdata = $urandom();
      re = 1; a = AW'($urandom()); raddr = a;
      if (we && waddr == a) we = 0;   // the design never reads and writes one address at once
      @(posedge clk); #1;
      checks++;
      if (rdata !== shadow[a]) begin
        failures++; $display("FAIL addr %0d got %h exp %h", a, rdata, shadow[a]);
      end
      if (we) for (int b = 0; b < 4; b++) if (wbe[b]) shadow[waddr][b*8 +: 8] = wdata[b*8 +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
