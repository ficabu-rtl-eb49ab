// ue_regs -- APB register file of the unlearning engine.
//
// The host core programs one unlearning request here and follows it:
//   0x000 CTRL     W  bit0: start the run
//   0x004 STATUS   R  bit0 busy, bit1 done, bit2 checkpoint waiting,
//                     bit3 stopped early, [15:8] current layer index (l-1)
//   0x008 NLAYERS  RW number of layers L
//   0x00C CPMASK   RW checkpoint set C, bit l-1 marks layer l
//   0x010 ALPHA    RW base alpha, Q16.8
//   0x014 LAMBDA   RW base lambda, Q16.8
//   0x018 TAU      RW target forget accuracy tau (same unit as AFORGET)
//   0x01C AFORGET  W  forget accuracy measured at the pending checkpoint;
//                     writing it releases the checkpoint
//   0x020 LDONE    R  number of layers edited by the last run
//   0x100+16(l-1)     layer table of layer l: +0 parameter count,
//                     +4 theta address, +8 I_D address, +C S(l) in Q8.8
// APB3 completer with no wait states and no error response. Unmapped reads
// return 0. Layers are numbered from the back end (l = 1 next to the
// classifier). The register map is this design's own; the paper shows an APB
// port on the engine and lists the inputs of the procedure.
module ue_regs
  import ficabu_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  apb_req_t    apb_req,
  output apb_rsp_t    apb_rsp,
  // configuration
  output logic        start,
  output logic [7:0]  nlayers,
  output logic [MAX_LAYERS-1:0] cpmask,
  output hp_t         alpha,
  output hp_t         lambda,
  output logic [15:0] tau,
  output logic        aforget_valid,
  output logic [15:0] aforget,
  output layer_cfg_t  ltab [MAX_LAYERS],
  // status
  input  logic        st_busy,
  input  logic        st_done,
  input  logic        st_cp_wait,
  input  logic        st_stopped,
  input  logic [7:0]  st_layer,
  input  logic [7:0]  st_ldone
);
  wire        wr   = apb_req.psel && apb_req.penable && apb_req.pwrite;
  wire [11:0] a    = apb_req.paddr[11:0];
  wire [31:0] wd   = apb_req.pwdata;
  wire        in_t = (a >= R_LTAB) && (a < R_LTAB + 12'(16 * MAX_LAYERS));
  wire [11:0] toff = a - R_LTAB;
  wire [$clog2(MAX_LAYERS)-1:0] tl = toff[4 +: $clog2(MAX_LAYERS)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; nlayers <= 8'd1; cpmask <= '0; alpha <= '0; lambda <= '0;
      tau <= '0; aforget_valid <= 1'b0; aforget <= '0;
      for (int i = 0; i < MAX_LAYERS; i++) ltab[i] <= '0;
    end else begin
      start         <= wr && a == R_CTRL && wd[0];
      aforget_valid <= wr && a == R_AFORGET;
      if (wr) begin
        unique case (a)
          R_NLAYERS: nlayers <= wd[7:0];
          R_CPMASK:  cpmask  <= wd[MAX_LAYERS-1:0];
          R_ALPHA:   alpha   <= wd[HP_W-1:0];
          R_LAMBDA:  lambda  <= wd[HP_W-1:0];
          R_TAU:     tau     <= wd[15:0];
          R_AFORGET: aforget <= wd[15:0];
          default: if (in_t) begin
            unique case (toff[3:2])
              2'd0: ltab[tl].nparams    <= wd;
              2'd1: ltab[tl].theta_addr <= wd;
              2'd2: ltab[tl].id_addr    <= wd;
              default: ltab[tl].scale   <= wd[SCALE_W-1:0];
            endcase
          end
        endcase
      end
    end
  end

  always_comb begin
    apb_rsp         = '0;
    apb_rsp.pready  = 1'b1;
    unique case (a)
      R_STATUS:  apb_rsp.prdata = {16'd0, st_layer, 4'd0, st_stopped, st_cp_wait, st_done, st_busy};
      R_NLAYERS: apb_rsp.prdata = 32'(nlayers);
      R_CPMASK:  apb_rsp.prdata = 32'(cpmask);
      R_ALPHA:   apb_rsp.prdata = 32'(alpha);
      R_LAMBDA:  apb_rsp.prdata = 32'(lambda);
      R_TAU:     apb_rsp.prdata = 32'(tau);
      R_AFORGET: apb_rsp.prdata = 32'(aforget);
      R_LDONE:   apb_rsp.prdata = 32'(st_ldone);
      default: if (in_t) begin
        unique case (toff[3:2])
          2'd0: apb_rsp.prdata = ltab[tl].nparams;
          2'd1: apb_rsp.prdata = ltab[tl].theta_addr;
          2'd2: apb_rsp.prdata = ltab[tl].id_addr;
          default: apb_rsp.prdata = 32'(ltab[tl].scale);
        endcase
      end
    endcase
  end
endmodule
