// fimd -- Fisher Information Matrix Diagonal unit.
//
// Computes the diagonal-Fisher importance of one patch of parameters on the
// forget batch: for every parameter k of the patch
//     I_Df[k] = I0[k] + sum_{n=0}^{N_BATCH-1} grad[n][k]^2
// where grad[n][k] is the INT8 gradient of parameter k for forget sample n,
// written by the GEMM engine into the gradient region, and I0[k] is the
// I_Df already stored in the scratchpad when `accumulate` is set, or 0.
//
// Four pipeline stages, as in the paper: Load (read grad[n][k], and I0[k]
// with the first sample), Square, Accumulate (running sum over the batch),
// Store (hand the finished I_Df[k] to the Buffer A/B double buffer, which
// writes it to the I_Df region while the pipeline keeps reading). The
// squarer, the adder fed by the stored I_Df and the double buffer follow the
// paper's figure; the sample-major gradient layout grad_base + n*PATCH + k,
// the accumulate flag and the widths are this design's choice.
//
// Interface and timing: pulse `start` while `busy` is low with the patch
// length `count` (1..PATCH) and the region base addresses. One gradient is
// read per cycle, so a patch takes count*N_BATCH cycles plus about
// DEPTH+5 cycles of pipeline and buffer drain; `done` pulses once, after the
// last I_Df word is in the scratchpad. Read ports have one cycle latency.
module fimd
  import ficabu_pkg::*;
#(
  parameter int unsigned N_BATCH = 64,   // forget batch size N
  parameter int unsigned PATCH   = 256,  // parameters per patch
  parameter int unsigned GAW     = 15,   // gradient region word address width
  parameter int unsigned FAW     = 9,    // I_Df region word address width
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     count,
  input  logic [GAW-1:0]  grad_base,
  input  logic [FAW-1:0]  idf_base,
  input  logic            accumulate,
  output logic            busy,
  output logic            done,
  // gradient region read port
  output logic            g_re,
  output logic [GAW-1:0]  g_raddr,
  input  grad_t           g_rdata,
  // I_Df region read port (stored importance)
  output logic            f_re,
  output logic [FAW-1:0]  f_raddr,
  input  imp_t            f_rdata,
  // I_Df region write port
  output logic            f_we,
  output logic [FAW-1:0]  f_waddr,
  output logic [3:0]      f_wbe,
  output imp_t            f_wdata
);
  localparam int unsigned NW = $clog2(N_BATCH + 1);

  // ---------------- Load ----------------
  logic            issuing;
  logic [15:0]     k_cnt, cnt_q;
  logic [NW-1:0]   n_cnt;
  logic [GAW-1:0]  gbase_q;
  logic [FAW-1:0]  fbase_q;
  logic            acc_q;

  wire last_n = (n_cnt == NW'(N_BATCH - 1));
  wire last_k = (k_cnt == cnt_q - 1'b1);

  // ---------------- pipeline registers ----------------
  logic            s1_v, s1_first, s1_lastn, s1_lastk;
  logic [15:0]     s1_k;
  logic            s2_v, s2_first, s2_lastn, s2_lastk;
  logic [15:0]     s2_k;
  logic [2*GRAD_W-1:0] s2_sq;
  imp_t            s2_init, acc;
  logic            s3_v, s3_lastk;
  logic [15:0]     s3_k;
  imp_t            s3_sum;
  logic            buf_idle, draining;

  assign g_re    = issuing;
  assign g_raddr = gbase_q + GAW'(n_cnt) * GAW'(PATCH) + GAW'(k_cnt);
  assign f_re    = issuing && (n_cnt == '0) && acc_q;
  assign f_raddr = fbase_q + FAW'(k_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; k_cnt <= '0; n_cnt <= '0; cnt_q <= '0;
      gbase_q <= '0; fbase_q <= '0; acc_q <= 1'b0; draining <= 1'b0;
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issuing <= 1'b1; k_cnt <= '0; n_cnt <= '0; cnt_q <= count;
        gbase_q <= grad_base; fbase_q <= idf_base; acc_q <= accumulate;
      end else if (issuing) begin
        if (last_n) begin
          n_cnt <= '0;
          k_cnt <= k_cnt + 1'b1;
          if (last_k) begin
            issuing  <= 1'b0;
            draining <= 1'b1;
          end
        end else begin
          n_cnt <= n_cnt + 1'b1;
        end
      end
      // Load -> Square
      s1_v <= issuing;
      // Square -> Accumulate
      s2_v <= s1_v;
      // Accumulate -> Store
      s3_v <= s2_v && s2_lastn;
      // done once the last result has left the double buffer
      if (draining && !issuing && !s1_v && !s2_v && !s3_v && buf_idle) begin
        draining <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    s1_first <= (n_cnt == '0);
    s1_lastn <= last_n;
    s1_lastk <= last_k;
    s1_k     <= k_cnt;
    // Square: the gradient read in Load is valid now
    s2_sq    <= (2*GRAD_W)'($signed(g_rdata) * $signed(g_rdata));
    s2_init  <= (s1_first && acc_q) ? f_rdata : '0;
    s2_first <= s1_first;
    s2_lastn <= s1_lastn;
    s2_lastk <= s1_lastk;
    s2_k     <= s1_k;
    // Accumulate over the batch
    if (s2_v) begin
      acc    <= (s2_first ? s2_init : acc) + IMP_W'(s2_sq);
    end
    s3_sum   <= (s2_first ? s2_init : acc) + IMP_W'(s2_sq);
    s3_k     <= s2_k;
    s3_lastk <= s2_lastk;
  end

  assign busy = issuing || draining;

  // ---------------- Store: double buffer ----------------
  double_buffer #(.AW(FAW), .WIDTH(IMP_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid (s3_v),
    .in_last  (s3_lastk),
    .in_addr  (fbase_q + FAW'(s3_k)),
    .in_be    (4'hF),
    .in_data  (s3_sum),
    .mem_we   (f_we),
    .mem_addr (f_waddr),
    .mem_be   (f_wbe),
    .mem_data (f_wdata),
    .idle     (buf_idle)
  );

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
