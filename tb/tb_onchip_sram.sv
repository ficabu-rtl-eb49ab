// tb_onchip_sram -- self-checking test of the 64 KB APB SRAM at full size.
// Writes random words over the whole address range, rewrites some with
// partial byte strobes, and reads everything back against a shadow copy;
// checks the single read wait state and that writes complete at once.
module tb_onchip_sram;
  import ficabu_pkg::*;
  localparam int BYTES = 65536, WORDS = BYTES / 4;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  int checks = 0, failures = 0;
  logic [31:0] shadow [WORDS];

  onchip_sram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb_xfer(logic wr, logic [31:0] a, logic [31:0] d, logic [3:0] s, output logic [31:0] r, output int waits);
    @(negedge clk); apb_req = '{psel: 1, penable: 0, pwrite: wr, paddr: a, pwdata: d, pstrb: s};
    @(negedge clk); apb_req.penable = 1;
    waits = 0;
    while (!apb_rsp.pready) begin @(negedge clk); waits++; end
    r = apb_rsp.prdata;
    @(posedge clk); #1 apb_req = '0;
  endtask

  initial begin
    logic [31:0] r; int w;
    apb_req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < WORDS; i += 7) begin
      shadow[i] = $urandom();
      apb_xfer(1, 32'(i*4), shadow[i], 4'hF, r, w);
      checks++; if (w != 0) begin failures++; $display("FAIL write waited %0d", w); end
    end
    for (int i = 0; i < WORDS; i += 91) begin
      logic [31:0] d; logic [3:0] s;
      d = $urandom(); s = 4'($urandom());
      apb_xfer(1, 32'(i*4), d, s, r, w);
      for (int b = 0; b < 4; b++) if (s[b]) shadow[i][b*8 +: 8] = d[b*8 +: 8];
    end
    for (int i = 0; i < WORDS; i += 7) begin
      apb_xfer(0, 32'(i*4), 0, 0, r, w);
      checks += 2;
      if (r !== shadow[i]) begin failures++; $display("FAIL word %0d = %h expected %h", i, r, shadow[i]); end
      if (w != 1) begin failures++; $display("FAIL read took %0d wait states", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
