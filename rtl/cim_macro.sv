// cim_macro: one CIM core macro (8 banks) with its input line buffer.
//
// The input line buffer holds one word-line's worth of activations, 256 lanes of 16 bits.
// It is loaded from the 2048-bit input-buffer port: an INT8 load (lb_wide = 0) fills all
// 256 lanes with bytes; a wide load (lb_wide = 1) fills half of the lanes (lb_half) with
// 16-bit words, so a BF16 word line takes two loads and the softmax mode one load whose
// first 32 words are the scores. Lane i feeds sub-array i%32 of bank i/32; with the row
// mapping of the published macro (bank b, sub-array s, row r holds weight row
// n = 512*b + 32*r + s) line r of a token must therefore hold x[512*(i/32) + 32*r + i%32]
// in lane i. In the softmax mode bank b reads lanes 4b..4b+3.
//
// A request selects a word line (row) in all banks, optionally writes the next weights into
// that row in the same access (read-compute/write, see cim_bank) and, if req_compute is set,
// returns the result three cycles later with its tag:
//   INT8/INT4  col[c]: sum over the 256 lanes, per output column (2 or 4 columns);
//   BF16       bf: the eight bank block-float partials re-aligned to their largest exponent
//              and summed (the second level of the adaptive-quantization tree);
//   SOFTMAX    sm_exp: 32 exponentials (partial accumulation), sm_sum: their sum (full
//              accumulation).
// The line buffer may be reloaded in the same cycle as a request: the request uses the old
// contents, which gives one word line per cycle when lines are streamed.
module cim_macro
  import rcw_pkg::*;
#(
  parameter int TAG_W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // input line buffer load
  input  logic                 lb_load,
  input  logic                 lb_wide,
  input  logic                 lb_half,
  input  logic [LINE_W-1:0]    lb_data,
  // access request
  input  logic                 req_valid,
  input  logic                 req_compute,
  input  cim_mode_e            mode,
  input  logic [3:0]           row,
  input  logic                 wr_en,
  input  logic [ROW_W-1:0]     wr_data,
  input  logic signed [15:0]   grpmax,
  input  logic [TAG_W-1:0]     req_tag,
  // result
  output logic                 res_valid,
  output logic [TAG_W-1:0]     res_tag,
  output logic signed [31:0]   col [COLS_MAX],
  output bfp_t                 bf,
  output logic [15:0]          sm_exp [SM_LANES],
  output logic [31:0]          sm_sum
);

  logic [WORD_W-1:0] lb [LANES];

  always_ff @(posedge clk) begin
    if (lb_load) begin
      if (!lb_wide) begin
        for (int i = 0; i < LANES; i++) lb[i] <= {8'h00, lb_data[8*i +: 8]};
      end else begin
        for (int i = 0; i < LANES / 2; i++) lb[(LANES/2)*lb_half + i] <= lb_data[16*i +: 16];
      end
    end
  end

  logic               bres_valid [BANKS];
  logic signed [31:0] bcol  [BANKS][COLS_MAX];
  logic [9:0]         bexp  [BANKS];
  logic signed [31:0] bmant [BANKS];
  logic [15:0]        bsm   [BANKS][SM_LANES_PER_BANK];
  logic [19:0]        bsms  [BANKS];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WORD_W-1:0] bx [SUBARRAYS];
    logic [WORD_W-1:0] bw [SUBARRAYS];
    always_comb begin
      for (int s = 0; s < SUBARRAYS; s++) begin
        if (mode == MODE_SOFTMAX)
          bx[s] = (s < SM_LANES_PER_BANK) ? lb[SM_LANES_PER_BANK*b + s] : '0;
        else
          bx[s] = lb[SUBARRAYS*b + s];
        bw[s] = wr_data[WORD_W*(SUBARRAYS*b + s) +: WORD_W];
      end
    end
    cim_bank u_bank (
      .clk, .rst_n,
      .req_valid, .req_compute, .mode, .row,
      .x(bx), .grpmax, .wr_en, .wr_data(bw),
      .res_valid(bres_valid[b]), .col_sum(bcol[b]), .bf_exp(bexp[b]), .bf_mant(bmant[b]),
      .sm_exp(bsm[b]), .sm_sum(bsms[b])
    );
  end

  // tag pipeline matching the bank latency (2) plus the combine register (1)
  logic [TAG_W-1:0] tag1, tag2;
  always_ff @(posedge clk) begin
    tag1    <= req_tag;
    tag2    <= tag1;
    res_tag <= tag2;
  end

  // second-level combine
  logic signed [31:0] col_n [COLS_MAX];
  bfp_t               bf_n;
  logic [31:0]        sms_n;

  always_comb begin
    logic [9:0] emax;
    for (int c = 0; c < COLS_MAX; c++) begin
      col_n[c] = '0;
      for (int b = 0; b < BANKS; b++) col_n[c] += bcol[b][c];
    end
    emax = '0;
    for (int b = 0; b < BANKS; b++) if (bmant[b] != 0 && bexp[b] > emax) emax = bexp[b];
    bf_n.exp  = emax;
    bf_n.mant = '0;
    for (int b = 0; b < BANKS; b++) begin
      logic [9:0] d;
      d = emax - bexp[b];
      if (bmant[b] != 0 && d < 10'd32) bf_n.mant += 40'(bmant[b] >>> d);
    end
    sms_n = '0;
    for (int b = 0; b < BANKS; b++) sms_n += 32'(bsms[b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_valid <= 1'b0;
    else        res_valid <= bres_valid[0];
  end

  always_ff @(posedge clk) begin
    if (bres_valid[0]) begin
      col    <= col_n;
      bf     <= bf_n;
      sm_sum <= sms_n;
      for (int b = 0; b < BANKS; b++)
        for (int j = 0; j < SM_LANES_PER_BANK; j++)
          sm_exp[SM_LANES_PER_BANK*b + j] <= bsm[b][j];
    end
  end

endmodule
