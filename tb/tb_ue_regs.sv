// tb_ue_regs -- self-checking test of the engine's APB register file.
// Writes and reads back every configuration register and random layer-table
// entries, checks the one-cycle start and A_forget pulses, the status bit
// packing, the width masking and that unmapped addresses read 0.
module tb_ue_regs;
  import ficabu_pkg::*;
  localparam int ML = 8;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic start, aforget_valid;
  logic [7:0] nlayers;
  logic [ML-1:0] cpmask;
  hp_t alpha, lambda;
  logic [15:0] tau, aforget;
  layer_cfg_t ltab [ML];
  logic st_busy, st_done, st_cp_wait, st_stopped;
  logic [7:0] st_layer, st_ldone;
  int checks = 0, failures = 0, n_start = 0, n_af = 0;
  logic [31:0] shadow [ML][4];

  ue_regs #(.MAX_LAYERS(ML)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin n_start += start; n_af += aforget_valid; end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk); apb_req = '{psel: 1, penable: 0, pwrite: 1, paddr: 32'(a), pwdata: d, pstrb: 4'hF};
    @(negedge clk); apb_req.penable = 1;
    while (!apb_rsp.pready) @(negedge clk);
    @(posedge clk); #1 apb_req = '0;
  endtask
  task automatic apb_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); apb_req = '{psel: 1, penable: 0, pwrite: 0, paddr: 32'(a), pwdata: 0, pstrb: 0};
    @(negedge clk); apb_req.penable = 1;
    while (!apb_rsp.pready) @(negedge clk);
    d = apb_rsp.prdata;
    @(posedge clk); #1 apb_req = '0;
  endtask
  task automatic expect_rd(logic [11:0] a, logic [31:0] e);
    logic [31:0] d;
    apb_read(a, d);
    checks++;
    if (d !== e) begin failures++; $display("FAIL read %h = %h expected %h", a, d, e); end
  endtask

  initial begin
    apb_req = '0;
    {st_busy, st_done, st_cp_wait, st_stopped} = 4'b1010; st_layer = 8'd5; st_ldone = 8'd3;
    repeat (3) @(posedge clk); rst_n = 1;
    apb_write(R_NLAYERS, 32'd7);       expect_rd(R_NLAYERS, 32'd7);
    apb_write(R_CPMASK, 32'hFFFF_FF49); expect_rd(R_CPMASK, 32'h49);
    apb_write(R_ALPHA, 32'hAB00_0A00); expect_rd(R_ALPHA, 32'h0000_0A00);
    apb_write(R_LAMBDA, 32'd26);       expect_rd(R_LAMBDA, 32'd26);
    apb_write(R_TAU, 32'd5);           expect_rd(R_TAU, 32'd5);
    expect_rd(R_STATUS, 32'h0000_0505);
    expect_rd(R_LDONE, 32'd3);
    expect_rd(12'h0FC, 32'd0);
    for (int l = 0; l < ML; l++) for (int f = 0; f < 4; f++) begin
      shadow[l][f] = $urandom();
      apb_write(R_LTAB + 12'(16*l + 4*f), shadow[l][f]);
    end
    for (int l = 0; l < ML; l++) for (int f = 0; f < 4; f++)
      expect_rd(R_LTAB + 12'(16*l + 4*f), (f == 3) ? {16'd0, shadow[l][f][15:0]} : shadow[l][f]);
    for (int l = 0; l < ML; l++) begin
      checks++;
      if (ltab[l].nparams != shadow[l][0] || ltab[l].theta_addr != shadow[l][1] ||
          ltab[l].id_addr != shadow[l][2] || ltab[l].scale != shadow[l][3][15:0]) begin
        failures++; $display("FAIL ltab[%0d] output", l);
      end
    end
    checks += 4;
    if (nlayers != 7 || alpha != 24'h000A00 || lambda != 26 || tau != 5) begin failures++; $display("FAIL outputs"); end
    if (n_start != 0) begin failures++; $display("FAIL spurious start"); end
    apb_write(R_CTRL, 32'd1);
    apb_write(R_AFORGET, 32'd4);
    repeat (2) @(negedge clk);
    if (n_start != 1) begin failures++; $display("FAIL start pulsed %0d times", n_start); end
    if (n_af != 1 || aforget != 16'd4) begin failures++; $display("FAIL aforget pulse %0d value %0d", n_af, aforget); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
