// cim_bank: one bank of the digital SRAM compute-in-memory macro.
//
// Storage is SUBARRAYS sub-arrays of ROWS 16-bit words. In the MAC modes one word line
// (`row`) is selected in every sub-array, so a bank multiplies SUBARRAYS input lanes by
// the SUBARRAYS words of that row and sums the products in its adder tree.
//
// Read-compute/write (RCW): an access is the two phases of the published macro folded into
// one clock. Phase 1 reads the selected row into the weight latch; phase 2 multiplies the
// latched weights while the same, still-open word line is overwritten with `wr_data`
// (read-first behaviour). A row can thus be refreshed with the next weight block in the
// same cycle in which its old contents are used, and the update costs no extra cycle.
// `req_compute` = 0 gives a plain write (an exposed update, as without RCW).
//
// Modes (cim_mode_e):
//   INT8    columns 0/1 are the upper/lower bytes of each word; x[s][7:0] is the activation.
//   INT4    columns 0..3 are nibbles [15:12],[11:8],[7:4],[3:0] (this design's packing).
//   BF16    each word is one BF16 weight, x[s] a BF16 activation. The adder tree aligns the
//           32 significand products to their largest exponent and sums them as integers
//           ("adaptive quantization"); the result is the block-float pair (bf_exp, bf_mant),
//           value = bf_mant * 2^(bf_exp-268). Subnormals are treated as zero.
//   SOFTMAX 4 lanes per bank. Lane j takes x[j] (signed Q8.8), subtracts the group maximum
//           and looks up the 64-segment linear approximation exp(d) ~ b_k - a_k*|d| with
//           segment k = |d|/0.25. Coefficients (unsigned Q1.15) live in the lane's group of
//           8 sub-arrays: a_k in sub-array 8j+2*(k/16), b_k in the next one, row k%16. The
//           per-sub-array row mux makes the lookup a single access. Each exponential is
//           returned (partial accumulation) and the four are summed (full accumulation).
//           |d| >= 16 gives 0.
// The softmax number formats, the coefficient placement and the BF16 alignment rule are
// this design's choices; the paper gives the LUT idea, the 64 segments and the two
// accumulation outputs.
//
// Timing: a request in cycle t is latched at the edge ending t; results are registered at the
// next edge, so res_valid rises two cycles after req_valid. One request per cycle.
module cim_bank
  import rcw_pkg::*;
#(
  parameter int SUBARRAYS_P = SUBARRAYS,
  parameter int ROWS_P      = ROWS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid,
  input  logic                     req_compute,
  input  cim_mode_e                mode,
  input  logic [$clog2(ROWS_P)-1:0] row,
  input  logic [WORD_W-1:0]        x       [SUBARRAYS_P],
  input  logic signed [15:0]       grpmax,
  input  logic                     wr_en,
  input  logic [WORD_W-1:0]        wr_data [SUBARRAYS_P],
  output logic                     res_valid,
  output logic signed [31:0]       col_sum [COLS_MAX],
  output logic [9:0]               bf_exp,
  output logic signed [31:0]       bf_mant,
  output logic [15:0]              sm_exp  [SM_LANES_PER_BANK],
  output logic [19:0]              sm_sum
);
  localparam int RW = $clog2(ROWS_P);
  localparam int GRP = SUBARRAYS_P / SM_LANES_PER_BANK;  // sub-arrays per softmax lane

  logic [WORD_W-1:0] mem   [SUBARRAYS_P][ROWS_P];
  logic [WORD_W-1:0] latch [SUBARRAYS_P];
  logic [RW-1:0]     ra    [SUBARRAYS_P];

  // ---- phase 1: softmax segment decode and per-sub-array row select --------------------
  logic [16:0] mag  [SM_LANES_PER_BANK];
  logic [5:0]  seg  [SM_LANES_PER_BANK];
  logic        sat  [SM_LANES_PER_BANK];

  always_comb begin
    for (int j = 0; j < SM_LANES_PER_BANK; j++) begin
      logic signed [16:0] d;
      d      = 17'(signed'(x[j])) - 17'(grpmax);
      mag[j] = d[16] ? 17'(-d) : 17'd0;
      sat[j] = (mag[j] >= 17'd4096);          // |d| >= 16.0
      seg[j] = mag[j][11:6];                  // 0.25-wide segments
    end
    for (int s = 0; s < SUBARRAYS_P; s++)
      ra[s] = (mode == MODE_SOFTMAX) ? RW'(seg[s / GRP][3:0]) : row;
  end

  logic              v0, c0;
  cim_mode_e         mode0;
  logic [WORD_W-1:0] x0   [SUBARRAYS_P];
  logic [16:0]       mag0 [SM_LANES_PER_BANK];
  logic [1:0]        q0   [SM_LANES_PER_BANK];
  logic              sat0 [SM_LANES_PER_BANK];

  always_ff @(posedge clk) begin
    if (req_valid) begin
      for (int s = 0; s < SUBARRAYS_P; s++) begin
        latch[s] <= mem[s][ra[s]];                                   // phase 1: read
        if (wr_en && mode != MODE_SOFTMAX) mem[s][row] <= wr_data[s]; // phase 2: write
      end
      x0    <= x;
      mode0 <= mode;
      c0    <= req_compute;
      for (int j = 0; j < SM_LANES_PER_BANK; j++) begin
        mag0[j] <= mag[j];
        q0[j]   <= seg[j][5:4];
        sat0[j] <= sat[j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= req_valid;
  end

  // ---- phase 2: adder trees --------------------------------------------------------------
  logic signed [31:0] col_n [COLS_MAX];
  logic [9:0]         bfe_n;
  logic signed [31:0] bfm_n;
  logic [15:0]        sme_n [SM_LANES_PER_BANK];
  logic [19:0]        sms_n;

  always_comb begin
    logic [9:0]  pe [SUBARRAYS_P];
    logic [15:0] pm [SUBARRAYS_P];
    logic        pz [SUBARRAYS_P];
    logic [9:0]  emax;
    for (int c = 0; c < COLS_MAX; c++) col_n[c] = '0;
    for (int s = 0; s < SUBARRAYS_P; s++) begin
      logic signed [16:0] xa, wv;
      xa = 17'(signed'(x0[s][7:0]));
      if (mode0 == MODE_INT4) begin
        for (int c = 0; c < 4; c++) begin
          wv = 17'(signed'(latch[s][15-4*c -: 4]));
          col_n[c] += 32'(xa * wv);
        end
      end else begin
        wv = 17'(signed'(latch[s][15:8]));
        col_n[0] += 32'(xa * wv);
        wv = 17'(signed'(latch[s][7:0]));
        col_n[1] += 32'(xa * wv);
      end
    end
    // BF16: significand products, then alignment to the largest exponent
    emax = '0;
    for (int s = 0; s < SUBARRAYS_P; s++) begin
      pz[s] = (x0[s][14:7] == 8'd0) || (latch[s][14:7] == 8'd0);
      pe[s] = 10'(x0[s][14:7]) + 10'(latch[s][14:7]);
      pm[s] = {1'b1, x0[s][6:0]} * {1'b1, latch[s][6:0]};
      if (!pz[s] && pe[s] > emax) emax = pe[s];
    end
    bfe_n = emax;
    bfm_n = '0;
    for (int s = 0; s < SUBARRAYS_P; s++) begin
      logic [9:0]  dsh;
      logic [15:0] al;
      dsh = emax - pe[s];
      al  = (pz[s] || dsh > 10'd15) ? 16'd0 : (pm[s] >> dsh);
      bfm_n += (x0[s][15] ^ latch[s][15]) ? -32'(al) : 32'(al);
    end
    // softmax LUT lanes
    sms_n = '0;
    for (int j = 0; j < SM_LANES_PER_BANK; j++) begin
      logic [15:0] a, b;
      logic [32:0] t;
      a = latch[GRP*j + 2*q0[j]];
      b = latch[GRP*j + 2*q0[j] + 1];
      t = (33'(a) * 33'(mag0[j])) >> 8;
      sme_n[j] = (sat0[j] || t >= 33'(b)) ? 16'd0 : 16'(33'(b) - t);
      sms_n += 20'(sme_n[j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_valid <= 1'b0;
    else        res_valid <= v0 && c0;
  end

  always_ff @(posedge clk) begin
    if (v0 && c0) begin
      col_sum <= col_n;
      bf_exp  <= bfe_n;
      bf_mant <= bfm_n;
      sm_exp  <= sme_n;
      sm_sum  <= sms_n;
    end
  end

endmodule
