// cim_core: one CIM core = CIM macro + its weight buffer + a word-line accumulator.
//
// The core follows the cluster's step stream (step_t, see rcw_pkg): one cycle after a
// step it loads the input line that the cluster read from the input-reuse buffer into the
// macro's line buffer and reads the RCW write data for the step's row from the weight
// buffer; two cycles after the step it issues the macro access. Macro results (three
// cycles later) are summed over the word lines of a token pass; on the pass's last row
// the token's column results are presented on out_* for the cluster's psum buffer:
//   INT8 / INT4 : out_cols[c], 32-bit signed column sums (2 or 4 columns);
//   BF16        : out_cols[0][15:0], the BF16-rounded value of the block-float sum.
// The ext_* port lets the nonlinear fusion controller use the macro in softmax mode: the
// 32 scores are loaded into the line buffer in the cycle of ext_valid and the macro is
// accessed in the next cycle; ext_res_* return 4 cycles after ext_valid. The scheduler
// and the ext port must not be used in the same cycles (asserted).
module cim_core
  import rcw_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  step_t                 step_d1,      // step delayed by one cycle
  input  logic [LINE_W-1:0]     line_data,    // input-buffer read data for step_d1
  input  logic                  wb_wr_en,
  input  logic [3:0]            wb_wr_row,
  input  logic [2:0]            wb_wr_beat,
  input  logic [BEAT_W-1:0]     wb_wr_data,
  output logic                  out_valid,
  output logic [9:0]            out_token,
  output logic                  out_add,
  output logic [31:0]           out_cols [COLS_MAX],
  input  logic                  ext_valid,
  input  logic [SM_LANES*16-1:0] ext_x,
  input  logic signed [15:0]    ext_grpmax,
  output logic                  ext_res_valid,
  output logic [15:0]           ext_exp [SM_LANES],
  output logic [31:0]           ext_sum
);
  // tag = {ext, mode, token, first, last, add}
  localparam int TAG_W = 1 + 2 + 10 + 3;

  step_t step_d2;
  logic  ext_d1;
  logic signed [15:0] grpmax_d1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_d2 <= '0;
      ext_d1  <= 1'b0;
    end else begin
      step_d2 <= step_d1;
      ext_d1  <= ext_valid;
    end
  end
  always_ff @(posedge clk) if (ext_valid) grpmax_d1 <= ext_grpmax;

  logic [ROW_W-1:0] wb_rd_data;
  weight_buffer u_wbuf (
    .clk,
    .wr_en(wb_wr_en), .wr_row(wb_wr_row), .wr_beat(wb_wr_beat), .wr_data(wb_wr_data),
    .rd_en(step_d1.rq && step_d1.rq_wr), .rd_row(step_d1.row), .rd_data(wb_rd_data)
  );

  // line buffer load: scheduler line (step_d1) or the fusion controller's scores
  logic              lb_load, lb_wide, lb_half;
  logic [LINE_W-1:0] lb_data;
  always_comb begin
    lb_load = step_d1.ld | ext_valid;
    lb_wide = ext_valid ? 1'b1 : step_d1.ld_wide;
    lb_half = ext_valid ? 1'b0 : step_d1.ld_half;
    lb_data = ext_valid ? LINE_W'(ext_x) : line_data;
  end

  logic              req_valid, req_compute, wr_en;
  cim_mode_e         mode;
  logic [3:0]        row;
  logic [TAG_W-1:0]  req_tag;
  always_comb begin
    req_valid   = step_d2.rq | ext_d1;
    req_compute = ext_d1 ? 1'b1 : step_d2.rq_compute;
    wr_en       = ext_d1 ? 1'b0 : step_d2.rq_wr;
    mode        = ext_d1 ? MODE_SOFTMAX : step_d2.mode;
    row         = ext_d1 ? 4'd0 : step_d2.row;
    req_tag     = {ext_d1, step_d2.mode, step_d2.token, step_d2.first, step_d2.last, step_d2.acc_add};
  end

  logic               res_valid;
  logic [TAG_W-1:0]   res_tag;
  logic signed [31:0] col [COLS_MAX];
  bfp_t               bf;
  cim_macro #(.TAG_W(TAG_W)) u_macro (
    .clk, .rst_n,
    .lb_load, .lb_wide, .lb_half, .lb_data,
    .req_valid, .req_compute, .mode, .row, .wr_en, .wr_data(wb_rd_data),
    .grpmax(grpmax_d1), .req_tag,
    .res_valid, .res_tag, .col, .bf, .sm_exp(ext_exp), .sm_sum(ext_sum)
  );

  logic       t_ext, t_first, t_last, t_add;
  cim_mode_e  t_mode;
  logic [9:0] t_token;
  assign {t_ext, t_mode, t_token, t_first, t_last, t_add} = res_tag;
  assign ext_res_valid = res_valid && t_ext;

  // word-line accumulator
  logic signed [31:0] acc [COLS_MAX];
  bfp_t               bacc;
  logic signed [31:0] acc_n [COLS_MAX];
  bfp_t               bacc_n;
  always_comb begin
    for (int c = 0; c < COLS_MAX; c++) acc_n[c] = t_first ? col[c] : acc[c] + col[c];
    if (t_first || bacc.mant == 0)      bacc_n = bf;
    else if (bf.mant == 0)              bacc_n = bacc;
    else if (bf.exp > bacc.exp) begin
      bacc_n.exp  = bf.exp;
      bacc_n.mant = bf.mant + ((bf.exp - bacc.exp > 10'd39) ? 40'sd0 : (bacc.mant >>> (bf.exp - bacc.exp)));
    end else begin
      bacc_n.exp  = bacc.exp;
      bacc_n.mant = bacc.mant + ((bacc.exp - bf.exp > 10'd39) ? 40'sd0 : (bf.mant >>> (bacc.exp - bf.exp)));
    end
  end

  always_ff @(posedge clk) begin
    if (res_valid && !t_ext) begin
      acc  <= acc_n;
      bacc <= bacc_n;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= res_valid && !t_ext && t_last;
  end

  always_ff @(posedge clk) begin
    if (res_valid && !t_ext && t_last) begin
      out_token <= t_token;
      out_add   <= t_add;
      if (t_mode == MODE_BF16) begin
        out_cols[0] <= {16'h0000, bfp_to_bf16(bacc_n)};
        for (int c = 1; c < COLS_MAX; c++) out_cols[c] <= '0;
      end else begin
        for (int c = 0; c < COLS_MAX; c++) out_cols[c] <= (t_mode == MODE_INT8 && c >= 2) ? 32'd0 : acc_n[c];
      end
    end
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(ext_valid && step_d1.ld))
    else $error("fusion-controller access collides with a scheduler step");

endmodule
