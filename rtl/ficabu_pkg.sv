// ficabu_pkg -- shared types and constants of the FiCABU unlearning engine.
//
// The engine edits an INT8 network in place with Selective Synaptic Dampening
// (SSD) made depth aware. Everything that more than one module must agree on
// lives here: the number formats, the APB and main-memory bus structs, the
// scratchpad region sizes and the register map.
//
// Number formats. Parameters theta are INT8, as in the INT8 prototype the
// design targets. Gradients are INT8 as well and importances (sums of squared
// gradients) are 32-bit unsigned; both widths are this design's choice.
// alpha and lambda are unsigned Q16.8, the depth factor S(l) unsigned Q8.8 and
// the dampening factor beta unsigned Q1.8 (256 means 1.0); the fixed-point
// choices are this design's, sized so that the hyperparameters used with the
// method (alpha 10..50, lambda 0.1..1, S(l) up to 10) all fit.
package ficabu_pkg;

  localparam int unsigned THETA_W    = 8;   // INT8 parameters
  localparam int unsigned GRAD_W     = 8;   // INT8 gradients from the GEMM engine
  localparam int unsigned IMP_W      = 32;  // importance I_Df, I_D
  localparam int unsigned HP_W       = 24;  // alpha, lambda: Q16.8
  localparam int unsigned HP_FRAC    = 8;
  localparam int unsigned SCALE_W    = 16;  // S(l): Q8.8
  localparam int unsigned SCALE_FRAC = 8;
  localparam int unsigned BETA_W     = 9;   // beta: Q1.8, 0..256
  localparam int unsigned BETA_FRAC  = 8;
  localparam int unsigned BETA_ONE   = 1 << BETA_FRAC;

  localparam int unsigned ADDR_W     = 32;  // main-memory byte address
  localparam int unsigned DATA_W     = 32;

  typedef logic signed [THETA_W-1:0] theta_t;
  typedef logic signed [GRAD_W-1:0]  grad_t;
  typedef logic        [IMP_W-1:0]   imp_t;
  typedef logic        [HP_W-1:0]    hp_t;
  typedef logic        [SCALE_W-1:0] scale_t;
  typedef logic        [BETA_W-1:0]  beta_t;

  // ---------------- APB3 (completer side view) ----------------
  typedef struct packed {
    logic              psel;
    logic              penable;
    logic              pwrite;
    logic [ADDR_W-1:0] paddr;
    logic [DATA_W-1:0] pwdata;
    logic [3:0]        pstrb;
  } apb_req_t;

  typedef struct packed {
    logic              pready;
    logic [DATA_W-1:0] prdata;
    logic              pslverr;
  } apb_rsp_t;

  // ---------------- simplified main-memory port of the DMA ----------------
  // A request is taken when valid & ready; a read returns exactly one
  // rvalid beat later, in order.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;   // byte address, word aligned
    logic [DATA_W-1:0] wdata;
  } mm_req_t;

  // ---------------- scratchpad regions seen by the DMA ----------------
  typedef enum logic [1:0] {
    REG_ID   = 2'd0,   // I_D, one 32-bit word per parameter (DMA writes)
    REG_TIN  = 2'd1,   // theta before dampening, 4 x INT8 per word (DMA writes)
    REG_TOUT = 2'd2    // theta after dampening, 4 x INT8 per word (DMA reads)
  } sp_region_e;

  typedef struct packed {
    logic              to_sp;      // 1: main memory -> scratchpad, 0: scratchpad -> main memory
    sp_region_e        region;
    logic [ADDR_W-1:0] mm_addr;    // byte address in main memory
    logic [15:0]       sp_addr;    // word address inside the region
    logic [15:0]       nwords;     // number of 32-bit words, >= 1
  } dma_cmd_t;

  // ---------------- register map of the engine (APB, byte offsets) ----------------
  localparam logic [11:0] R_CTRL      = 12'h000; // W: bit0 start
  localparam logic [11:0] R_STATUS    = 12'h004; // R: bit0 busy, bit1 done, bit2 cp_wait, bit3 stopped_early, [15:8] layer
  localparam logic [11:0] R_NLAYERS   = 12'h008; // number of layers L (1..MAX_LAYERS)
  localparam logic [11:0] R_CPMASK    = 12'h00C; // checkpoint set C, bit (l-1) for layer l
  localparam logic [11:0] R_ALPHA     = 12'h010; // base alpha, Q16.8
  localparam logic [11:0] R_LAMBDA    = 12'h014; // base lambda, Q16.8
  localparam logic [11:0] R_TAU       = 12'h018; // target forget accuracy tau
  localparam logic [11:0] R_AFORGET   = 12'h01C; // W: forget accuracy of the pending checkpoint
  localparam logic [11:0] R_LDONE     = 12'h020; // R: layers edited in the last run
  localparam logic [11:0] R_LTAB      = 12'h100; // layer table: 16 bytes per layer, layer l at (l-1)*16
  // layer table entry: +0 parameter count, +4 theta base address,
  //                    +8 I_D base address, +C S(l) in Q8.8

  typedef struct packed {
    logic [31:0]       nparams;
    logic [ADDR_W-1:0] theta_addr;
    logic [ADDR_W-1:0] id_addr;
    scale_t            scale;
  } layer_cfg_t;

endpackage
