// tb_cim_cluster: end-to-end test of one CIM cluster driven by a hand-written step stream.
// Loads weights through the weight buffers with an exposed write pass, stores input lines
// of several tokens in the input-reuse buffer, runs INT8 token passes (one word line per
// cycle), then a second N block that accumulates into the psum buffer while the last token
// pass rewrites the macros by read-compute/write, then an INT4 pass with the new weights,
// and one BF16 token. Every psum entry is checked against dot products computed here; the
// pass length (16 steps per token) is checked from the psum write times.
`timescale 1ns/1ps
module tb_cim_cluster;
  import rcw_pkg::*;
  localparam int M = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  step_t step = '0;
  logic in_wr_en = 0; logic [7:0] in_wr_line = 0; logic [1:0] in_wr_quarter = 0;
  logic [BEAT_W-1:0] in_wr_data = '0;
  logic wb_wr_en = 0; logic [1:0] wb_wr_core = 0; logic [3:0] wb_wr_row = 0; logic [2:0] wb_wr_beat = 0;
  logic [BEAT_W-1:0] wb_wr_data = '0;
  logic ps_rd_en = 0; logic [9:0] ps_rd_addr = 0; logic [BEAT_W-1:0] ps_rd_data;
  logic ps_wr_seen, ps_acc_seen;
  logic ext_valid = 0; logic [SM_LANES*16-1:0] ext_x = '0; logic signed [15:0] ext_grpmax = 0;
  logic ext_res_valid; logic [15:0] ext_exp [SM_LANES]; logic [31:0] ext_sum;

  cim_cluster dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] W [4][ROWS][LANES];
  logic [15:0] X [2*M][ROWS][LANES];     // token t of block nb at index nb*M+t (INT8 in [7:0])
  longint      R [M][4][4];              // reference psums
  int cyc = 0;
  int wr_times[$];
  always @(posedge clk) begin
    cyc++;
    if (ps_wr_seen && rst_n) wr_times.push_back(cyc);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real bf2r(input logic [15:0] v);
    real m;
    if (v[14:7] == 0) return 0.0;
    m = (128.0 + v[6:0]) / 128.0 * pow2(int'(v[14:7]) - 127);
    return v[15] ? -m : m;
  endfunction

  task automatic load_wbuf();
    for (int k = 0; k < 4; k++) for (int r = 0; r < ROWS; r++) for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      wb_wr_en = 1; wb_wr_core = 2'(k); wb_wr_row = 4'(r); wb_wr_beat = 3'(b);
      for (int i = 0; i < 32; i++) wb_wr_data[16*i +: 16] = W[k][r][32*b + i];
    end
    @(negedge clk); wb_wr_en = 0;
  endtask

  // write token line set (16 lines of 2048 bits, INT8) into buffer slot s
  task automatic load_tok_int8(input int idx, input int slot);
    for (int r = 0; r < ROWS; r++) for (int q = 0; q < 4; q++) begin
      @(negedge clk);
      in_wr_en = 1; in_wr_line = 8'(slot * 16 + r); in_wr_quarter = 2'(q);
      for (int i = 0; i < 64; i++) in_wr_data[8*i +: 8] = X[idx][r][64*q + i][7:0];
    end
    @(negedge clk); in_wr_en = 0;
  endtask

  task automatic write_pass();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      step = '0; step.rq = 1; step.rq_wr = 1; step.row = 4'(r);
    end
    @(negedge clk); step = '0;
  endtask

  task automatic token_pass(input int slot, input int tok, input cim_mode_e m, input bit add, input bit rcw);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      step = '0;
      step.ld = 1; step.ld_line = 8'(slot * 16 + r);
      step.rq = 1; step.rq_compute = 1; step.rq_wr = rcw; step.row = 4'(r); step.mode = m;
      step.token = 10'(tok); step.first = (r == 0); step.last = (r == ROWS - 1); step.acc_add = add;
    end
  endtask

  function automatic void ref_acc(input int idx, input int tok, input cim_mode_e m, input bit add);
    for (int k = 0; k < 4; k++) for (int c = 0; c < 4; c++) begin
      longint s;
      s = 0;
      for (int r = 0; r < ROWS; r++) for (int i = 0; i < LANES; i++) begin
        int xv;
        xv = int'(signed'(X[idx][r][i][7:0]));
        if (m == MODE_INT8) s += (c < 2) ? xv * int'(signed'(c == 0 ? W[k][r][i][15:8] : W[k][r][i][7:0])) : 0;
        else                s += xv * int'(signed'(W[k][r][i][15-4*c -: 4]));
      end
      R[tok][k][c] = add ? R[tok][k][c] + s : s;
    end
  endfunction

  task automatic check_psums(input string what);
    for (int t = 0; t < M; t++) begin
      @(negedge clk); ps_rd_en = 1; ps_rd_addr = 10'(t);
      @(negedge clk); ps_rd_en = 0;
      for (int k = 0; k < 4; k++) for (int c = 0; c < 4; c++)
        check(ps_rd_data[32*(4*k + c) +: 32] == 32'(R[t][k][c]),
              $sformatf("%s tok %0d core %0d col %0d got %0d exp %0d", what, t, k, c,
                        signed'(ps_rd_data[32*(4*k + c) +: 32]), R[t][k][c]));
    end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (W[k, r, i]) W[k][r][i] = 16'($urandom);
    foreach (X[t, r, i]) X[t][r][i] = 16'($urandom);
    load_wbuf();
    write_pass();
    for (int t = 0; t < 2 * M; t++) load_tok_int8(t, t);
    // N block 0: overwrite
    wr_times = {};
    for (int t = 0; t < M; t++) begin token_pass(t, t, MODE_INT8, 0, 0); ref_acc(t, t, MODE_INT8, 0); end
    @(negedge clk); step = '0;
    repeat (8) @(negedge clk);
    check(wr_times.size() == M, "one psum write per token");
    for (int i = 1; i < wr_times.size(); i++) check(wr_times[i] - wr_times[i-1] == ROWS, "16 cycles per token pass");
    check_psums("nb0");
    // N block 1: accumulate, last token pass rewrites the macros (RCW)
    begin
      logic [15:0] Wn [4][ROWS][LANES];
      foreach (Wn[k, r, i]) Wn[k][r][i] = 16'($urandom);
      begin
        logic [15:0] Wold [4][ROWS][LANES];
        Wold = W; W = Wn; load_wbuf(); W = Wold;
      end
      for (int t = 0; t < M; t++) begin
        token_pass(M + t, t, MODE_INT8, 1, t == M - 1);
        ref_acc(M + t, t, MODE_INT8, 1);
      end
      @(negedge clk); step = '0;
      repeat (8) @(negedge clk);
      check_psums("nb1 accumulate");
      W = Wn;
    end
    // INT4 with the weights written by RCW
    for (int t = 0; t < M; t++) begin token_pass(t, t, MODE_INT4, 0, 0); ref_acc(t, t, MODE_INT4, 0); end
    @(negedge clk); step = '0;
    repeat (8) @(negedge clk);
    check_psums("int4 after rcw");
    // BF16: one token, two line loads per row
    begin
      logic [15:0] xb [ROWS][LANES];
      foreach (W[k, r, i]) W[k][r][i] = {1'($urandom), 8'(120 + $urandom_range(0, 12)), 7'($urandom)};
      foreach (xb[r, i]) xb[r][i] = {1'($urandom), 8'(120 + $urandom_range(0, 12)), 7'($urandom)};
      load_wbuf();
      write_pass();
      for (int r = 0; r < ROWS; r++) for (int h = 0; h < 2; h++) for (int q = 0; q < 4; q++) begin
        @(negedge clk);
        in_wr_en = 1; in_wr_line = 8'(200 + 2 * r + h); in_wr_quarter = 2'(q);
        for (int i = 0; i < 32; i++) in_wr_data[16*i +: 16] = xb[r][128*h + 32*q + i];
      end
      @(negedge clk); in_wr_en = 0;
      for (int r = 0; r < ROWS; r++) for (int h = 0; h < 2; h++) begin
        @(negedge clk);
        step = '0; step.ld = 1; step.ld_wide = 1; step.ld_half = h[0]; step.ld_line = 8'(200 + 2 * r + h);
        step.rq = (h == 1); step.rq_compute = 1; step.row = 4'(r); step.mode = MODE_BF16;
        step.token = 10'd5; step.first = (r == 0); step.last = (r == ROWS - 1);
      end
      @(negedge clk); step = '0;
      repeat (8) @(negedge clk);
      @(negedge clk); ps_rd_en = 1; ps_rd_addr = 10'd5;
      @(negedge clk); ps_rd_en = 0;
      for (int k = 0; k < 4; k++) begin
        real refv, mag, got;
        refv = 0; mag = 0;
        for (int r = 0; r < ROWS; r++) for (int i = 0; i < LANES; i++) begin
          refv += bf2r(xb[r][i]) * bf2r(W[k][r][i]);
          mag  += (bf2r(xb[r][i]) * bf2r(W[k][r][i])) ** 2;
        end
        got = bf2r(ps_rd_data[32*4*k +: 16]);
        check((got - refv) < 0.03 * $sqrt(mag) && (refv - got) < 0.03 * $sqrt(mag),
              $sformatf("bf16 core %0d got %f exp %f", k, got, refv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
