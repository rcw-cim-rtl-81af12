// nl_fusion_ctrl: nonlinear operator fusion controller for group softmax and group RMSNorm.
//
// A group is one 512-bit beat of 32 signed Q8.8 values (the group size and formats are this
// design's choices; the paper uses FP16 here, see the design notes).
//
// Softmax (Eq. 1 of the design, NL_SOFTMAX): the controller finds the group maximum, sends
// the scores and the maximum to the CIM macro in softmax mode, which subtracts the maximum
// and evaluates the 64-segment LUT exponentials in parallel: the partial-accumulation
// outputs are the 32 exponentials, the full-accumulation output is their sum. The
// controller then forms one reciprocal of the sum (a 48/32-bit sequential divide) and
// multiplies every exponential by it. Output: 32 probabilities, unsigned Q0.16 (saturated
// to 0xFFFF). Subtracting the group maximum keeps every LUT argument <= 0, so the
// exponentials cannot overflow.
//
// Group RMSNorm (Eq. 2, NL_RMS / NL_RMS_NEW): the sum of squares of the group is formed in
// one cycle, the mean plus EPS (Q16.16) goes through a sequential integer square root (rms
// in Q8.8) and one reciprocal; the gamma scaling and the normalisation are then applied in
// one multiply per element, y = x * gamma * (1/rms), saturated to signed Q8.8. gamma is a
// second beat of 32 signed Q8.8 values given with the command. Each such group also adds
// its sum of squares to running statistics of the whole vector (NL_RMS_NEW restarts them).
//
// Global synchronisation (NL_RMS_SYNC): the paper folds the synchronisation to the global
// RMS into the gamma scaling. Here a SYNC command rescales a group with the RMS of all
// groups seen since the last NL_RMS_NEW: mean = sum / (32 * groups) + EPS, one square root
// and one reciprocal, computed on the first SYNC after the statistics changed and kept for
// the following ones, then y = x * gamma * (1/rms_global) in the same single multiply. How
// the statistics are gathered and when the rescale is applied is this design's choice.
//
// Interface: in_valid/in_ready handshake for a command; out_valid pulses for one cycle
// with the result. Latency: softmax about 4 + 48 + 3 cycles, group RMSNorm about
// 16 + 48 + 3, SYNC 3 cycles with cached statistics and about 48 + 16 + 48 + 3 otherwise.
module nl_fusion_ctrl
  import rcw_pkg::*;
#(
  parameter logic [31:0] EPS = 32'd1      // epsilon in Q16.16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  nl_op_e                  in_op,
  input  logic [SM_LANES*16-1:0]  in_x,
  input  logic [SM_LANES*16-1:0]  in_gamma,
  output logic                    out_valid,
  output logic [SM_LANES*16-1:0]  out_y,
  // CIM macro in softmax mode
  output logic                    mac_valid,
  output logic [SM_LANES*16-1:0]  mac_x,
  output logic signed [15:0]      mac_grpmax,
  input  logic                    mac_res_valid,
  input  logic [15:0]             mac_exp [SM_LANES],
  input  logic [31:0]             mac_sum,
  output logic                    busy
);
  typedef enum logic [2:0] { N_IDLE, N_ISSUE, N_WAITM, N_GMEAN, N_SQRT, N_DIV, N_SCALE } nstate_e;
  nstate_e st;

  nl_op_e                 op_q;
  // running statistics of the vector for NL_RMS_SYNC
  logic [47:0]            g_sum;       // sum of squares, Q16.16
  logic [10:0]            g_cnt;       // groups
  logic                   g_valid;     // g_recip holds 1/rms of the current statistics
  logic [47:0]            g_recip;
  logic signed [15:0]     x_q [SM_LANES];
  logic signed [15:0]     g_q [SM_LANES];
  logic [15:0]            e_q [SM_LANES];
  logic [47:0]            recip;

  // group maximum and sum of squares
  logic signed [15:0] gmax;
  logic [36:0]        sumsq;
  always_comb begin
    gmax  = x_q[0];
    sumsq = '0;
    for (int i = 0; i < SM_LANES; i++) begin
      if (x_q[i] > gmax) gmax = x_q[i];
      sumsq += 37'(32'(x_q[i] * x_q[i]));
    end
  end

  // sequential helpers
  logic        dv_start, dv_busy, dv_done;
  logic [47:0] dv_num, dv_quo;
  logic [31:0] dv_den;
  seq_div #(.NW(48), .DW(32)) u_div (
    .clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
    .busy(dv_busy), .done(dv_done), .quo(dv_quo)
  );

  logic        sq_start, sq_busy, sq_done;
  logic [31:0] sq_rad;
  logic [15:0] sq_root;
  seq_isqrt #(.W(32)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .rad(sq_rad), .busy(sq_busy), .done(sq_done), .root(sq_root)
  );

  logic [36:0] mean_eps;
  logic [48:0] gmean_eps;
  assign mean_eps  = (sumsq >> 5) + 37'(EPS);
  assign gmean_eps = 49'(dv_quo) + 49'(EPS);
  logic is_rms;
  assign is_rms = (op_q != NL_SOFTMAX);

  always_comb begin
    mac_valid  = (st == N_ISSUE) && (op_q == NL_SOFTMAX);
    mac_grpmax = gmax;
    for (int i = 0; i < SM_LANES; i++) mac_x[16*i +: 16] = x_q[i];
    sq_start   = 1'b0;
    sq_rad     = (mean_eps > 37'hFFFF_FFFF) ? 32'hFFFF_FFFF : mean_eps[31:0];
    dv_start   = 1'b0;
    dv_num     = '0;
    dv_den     = '0;
    if (st == N_ISSUE && (op_q == NL_RMS || op_q == NL_RMS_NEW)) sq_start = 1'b1;
    if (st == N_ISSUE && op_q == NL_RMS_SYNC && !g_valid) begin
      dv_start = 1'b1; dv_num = g_sum; dv_den = {16'd0, g_cnt, 5'd0};      // mean over 32*groups
    end
    if (st == N_GMEAN && dv_done) begin
      sq_start = 1'b1;
      sq_rad   = (gmean_eps > 49'hFFFF_FFFF) ? 32'hFFFF_FFFF : gmean_eps[31:0];
    end
    if (st == N_WAITM && mac_res_valid) begin
      dv_start = 1'b1; dv_num = 48'h1_0000_0000; dv_den = mac_sum;            // 2^32 / sum
    end
    if (st == N_SQRT && sq_done) begin
      dv_start = 1'b1; dv_num = 48'h100_0000; dv_den = (sq_root == 0) ? 32'd1 : 32'(sq_root); // 2^24 / rms
    end
  end

  // output scaling
  logic [SM_LANES*16-1:0] y_n;
  always_comb begin
    for (int i = 0; i < SM_LANES; i++) begin
      logic [63:0]        ps;
      logic signed [31:0] xg;
      logic signed [80:0] pr, q;
      ps = (64'(e_q[i]) * 64'(recip)) >> 16;
      xg = x_q[i] * g_q[i];
      pr = 81'(xg) * 81'(signed'({1'b0, recip}));
      q  = pr >>> 24;
      if (!is_rms) y_n[16*i +: 16] = (ps > 64'hFFFF) ? 16'hFFFF : ps[15:0];
      else       y_n[16*i +: 16] = (q > 81'sd32767) ? 16'h7FFF : (q < -81'sd32768) ? 16'h8000 : q[15:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= N_IDLE; out_valid <= 1'b0; op_q <= NL_SOFTMAX; recip <= '0; out_y <= '0;
      g_sum <= '0; g_cnt <= '0; g_valid <= 1'b0; g_recip <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        N_IDLE: if (in_valid) begin
          op_q <= in_op;
          for (int i = 0; i < SM_LANES; i++) begin
            x_q[i] <= in_x[16*i +: 16];
            g_q[i] <= in_gamma[16*i +: 16];
          end
          st <= N_ISSUE;
        end
        N_ISSUE: begin
          unique case (op_q)
            NL_SOFTMAX: st <= N_WAITM;
            NL_RMS, NL_RMS_NEW: begin
              g_sum   <= (op_q == NL_RMS_NEW ? 48'd0 : g_sum) + 48'(sumsq);
              g_cnt   <= (op_q == NL_RMS_NEW ? 11'd0 : g_cnt) + 11'd1;
              g_valid <= 1'b0;
              st      <= N_SQRT;
            end
            default: if (g_valid) begin recip <= g_recip; st <= N_SCALE; end
                     else st <= N_GMEAN;
          endcase
        end
        N_GMEAN: if (dv_done) st <= N_SQRT;
        N_WAITM: if (mac_res_valid) begin
          e_q <= mac_exp;
          st  <= N_DIV;
        end
        N_SQRT:  if (sq_done) st <= N_DIV;
        N_DIV:   if (dv_done) begin
          recip <= dv_quo;
          st    <= N_SCALE;
          if (op_q == NL_RMS_SYNC) begin g_recip <= dv_quo; g_valid <= 1'b1; end
        end
        N_SCALE: begin out_y <= y_n; out_valid <= 1'b1; st <= N_IDLE; end
        default: st <= N_IDLE;
      endcase
    end
  end

  assign in_ready = (st == N_IDLE);
  assign busy     = (st != N_IDLE);

endmodule
