// dampening -- selection and dampening unit (balanced SSD update).
//
// For every parameter k of one patch it applies the SSD rule
//     selected = I_Df[k] > alpha * I_D[k]
//     theta[k] <- selected ? round(beta * theta[k]) : theta[k]
//     beta     = min(lambda * I_D[k] / I_Df[k], 1)
// with alpha and lambda already multiplied by the layer's depth factor S(l)
// (Balanced Dampening). The product is rounded to nearest and cannot leave
// the INT8 range because beta <= 1.
//
// Five pipeline stages, as in the paper: Load (read I_Df, I_D and the
// theta word), Compare (alpha*I_D against I_Df, which drives the output
// multiplexer), beta Calc (beta_gen), Multiply (theta*beta and the select
// multiplexer), Store (Buffer A/B double buffer to the theta-out region).
// Theta is packed four INT8 per 32-bit word, parameter k in byte k%4 of word
// base + k/4; the store writes single bytes with byte enables. The packing,
// the rounding, the separate output region and the selection counter are this
// design's choice.
//
// Interface and timing: pulse `start` while `busy` is low; one parameter per
// cycle, so a patch takes count + about DEPTH+6 cycles; `done` pulses once
// after the last theta byte is in the scratchpad. sel_count holds the number
// of parameters selected in the last patch. Read ports have one cycle latency.
module dampening
  import ficabu_pkg::*;
#(
  parameter int unsigned PATCH     = 256,
  parameter int unsigned FAW       = 9,   // I_Df region word address width
  parameter int unsigned IAW       = 10,  // I_D region word address width
  parameter int unsigned TIAW      = 8,   // theta-in region word address width
  parameter int unsigned TOAW      = 7,   // theta-out region word address width
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     count,
  input  hp_t             alpha,        // S(l)*alpha, Q16.8
  input  hp_t             lambda,       // S(l)*lambda, Q16.8
  input  logic [FAW-1:0]  idf_base,
  input  logic [IAW-1:0]  id_base,
  input  logic [TIAW-1:0] tin_base,
  input  logic [TOAW-1:0] tout_base,
  output logic            busy,
  output logic            done,
  output logic [15:0]     sel_count,
  // read ports
  output logic            f_re,
  output logic [FAW-1:0]  f_raddr,
  input  imp_t            f_rdata,
  output logic            i_re,
  output logic [IAW-1:0]  i_raddr,
  input  imp_t            i_rdata,
  output logic            t_re,
  output logic [TIAW-1:0] t_raddr,
  input  logic [31:0]     t_rdata,
  // theta-out write port
  output logic            t_we,
  output logic [TOAW-1:0] t_waddr,
  output logic [3:0]      t_wbe,
  output logic [31:0]     t_wdata
);
  localparam int unsigned PW = HP_W + IMP_W;

  logic            issuing, draining, buf_idle;
  logic [15:0]     k_cnt, cnt_q;
  logic [FAW-1:0]  fbase_q;
  logic [IAW-1:0]  ibase_q;
  logic [TIAW-1:0] tibase_q;
  logic [TOAW-1:0] tobase_q;
  hp_t             alpha_q, lambda_q;

  wire last_k = (k_cnt == cnt_q - 1'b1);

  // ---------------- Load ----------------
  assign f_re    = issuing;
  assign i_re    = issuing;
  assign t_re    = issuing;
  assign f_raddr = fbase_q + FAW'(k_cnt);
  assign i_raddr = ibase_q + IAW'(k_cnt);
  assign t_raddr = tibase_q + TIAW'(k_cnt >> 2);

  // pipeline registers
  logic        s1_v, s1_last;  logic [15:0] s1_k;
  logic        s2_v, s2_last, s2_sel;  logic [15:0] s2_k;  imp_t s2_idf, s2_id;  theta_t s2_theta;
  logic        s3_v, s3_last, s3_sel;  logic [15:0] s3_k;  beta_t s3_beta;  theta_t s3_theta;
  logic        s4_v, s4_last;  logic [15:0] s4_k;  theta_t s4_theta;

  // ---------------- Compare ----------------
  theta_t s1_theta;
  logic   s1_sel;
  always_comb begin
    logic [PW-1:0] a_id;
    s1_theta = theta_t'(t_rdata[8*s1_k[1:0] +: 8]);
    a_id     = PW'(alpha_q) * PW'(i_rdata);
    s1_sel   = (PW'(f_rdata) << HP_FRAC) > a_id;
  end

  // ---------------- beta Calc ----------------
  beta_t s2_beta;
  beta_gen u_beta (.lambda(lambda_q), .i_d(s2_id), .i_df(s2_idf), .beta(s2_beta));

  // ---------------- Multiply ----------------
  theta_t s3_out;
  always_comb begin
    logic signed [THETA_W+BETA_W:0] p;
    p      = $signed(s3_theta) * $signed({1'b0, s3_beta});
    p      = p + (THETA_W+BETA_W+1)'(1 << (BETA_FRAC - 1));
    s3_out = s3_sel ? theta_t'(p >>> BETA_FRAC) : s3_theta;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; draining <= 1'b0; done <= 1'b0; k_cnt <= '0; cnt_q <= '0;
      fbase_q <= '0; ibase_q <= '0; tibase_q <= '0; tobase_q <= '0;
      alpha_q <= '0; lambda_q <= '0; sel_count <= '0;
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0; s4_v <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issuing <= 1'b1; k_cnt <= '0; cnt_q <= count;
        fbase_q <= idf_base; ibase_q <= id_base; tibase_q <= tin_base; tobase_q <= tout_base;
        alpha_q <= alpha; lambda_q <= lambda; sel_count <= '0;
      end else if (issuing) begin
        k_cnt <= k_cnt + 1'b1;
        if (last_k) begin
          issuing  <= 1'b0;
          draining <= 1'b1;
        end
      end
      s1_v <= issuing;
      s2_v <= s1_v;
      s3_v <= s2_v;
      s4_v <= s3_v;
      if (s1_v && s1_sel) sel_count <= sel_count + 1'b1;
      if (draining && !issuing && !s1_v && !s2_v && !s3_v && !s4_v && buf_idle) begin
        draining <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    s1_k <= k_cnt;            s1_last <= last_k;
    s2_k <= s1_k;             s2_last <= s1_last;
    s2_sel <= s1_sel;         s2_idf <= f_rdata;  s2_id <= i_rdata;  s2_theta <= s1_theta;
    s3_k <= s2_k;             s3_last <= s2_last;
    s3_sel <= s2_sel;         s3_beta <= s2_beta; s3_theta <= s2_theta;
    s4_k <= s3_k;             s4_last <= s3_last; s4_theta <= s3_out;
  end

  assign busy = issuing || draining;

  // ---------------- Store ----------------
  double_buffer #(.AW(TOAW), .WIDTH(32), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid (s4_v),
    .in_last  (s4_last),
    .in_addr  (tobase_q + TOAW'(s4_k >> 2)),
    .in_be    (4'b0001 << s4_k[1:0]),
    .in_data  ({4{s4_theta}}),
    .mem_we   (t_we),
    .mem_addr (t_waddr),
    .mem_be   (t_wbe),
    .mem_data (t_wdata),
    .idle     (buf_idle)
  );

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
