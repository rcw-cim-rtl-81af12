// tb_cim_macro: self-checking test of the CIM macro (8 banks plus input line buffer).
// Streams word lines back to back (line buffer reloaded in the cycle of each request) and
// checks INT8/INT4 column sums over 256 lanes, one result per cycle, the three-cycle
// latency and tags, read-compute/write across the whole macro, the BF16 two-level
// alignment against real arithmetic, and the 32-lane softmax exponentials and their sum.
`timescale 1ns/1ps
module tb_cim_macro;
  import rcw_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lb_load = 0, lb_wide = 0, lb_half = 0;
  logic [LINE_W-1:0] lb_data = '0;
  logic req_valid = 0, req_compute = 0, wr_en = 0;
  cim_mode_e mode = MODE_INT8;
  logic [3:0] row = 0;
  logic [ROW_W-1:0] wr_data = '0;
  logic signed [15:0] grpmax = 0;
  logic [15:0] req_tag = 0;
  logic res_valid;
  logic [15:0] res_tag;
  logic signed [31:0] col [COLS_MAX];
  bfp_t bf;
  logic [15:0] sm_exp [SM_LANES];
  logic [31:0] sm_sum;

  cim_macro dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] W [ROWS][LANES];        // reference array: W[row][lane]
  logic [7:0]  X [ROWS][LANES];        // INT8 lines used in the streaming test
  int cyc = 0;
  always @(posedge clk) cyc++;

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

  task automatic write_row(input int r);
    @(negedge clk);
    for (int i = 0; i < LANES; i++) wr_data[16*i +: 16] = W[r][i];
    row = 4'(r); req_valid = 1; req_compute = 0; wr_en = 1;
    @(negedge clk);
    req_valid = 0; wr_en = 0;
  endtask

  // expected INT column sums for line r
  function automatic int exp_col(input int r, input int c, input cim_mode_e m);
    int e;
    e = 0;
    for (int i = 0; i < LANES; i++) begin
      int xv;
      xv = int'(signed'(X[r][i]));
      if (m == MODE_INT8) e += xv * int'(signed'(c == 0 ? W[r][i][15:8] : W[r][i][7:0]));
      else                e += xv * int'(signed'(W[r][i][15-4*c -: 4]));
    end
    return e;
  endfunction

  // collect results of streamed requests
  int exp_q_tag[$];
  int issue_cycle[$];
  cim_mode_e stream_mode;
  logic [15:0] oldW [ROWS][LANES];
  bit use_old = 0;
  always @(posedge clk) begin
    if (res_valid && stream_mode != MODE_SOFTMAX && stream_mode != MODE_BF16 && exp_q_tag.size() > 0) begin
      int t, r, ic;
      t = exp_q_tag.pop_front();
      ic = issue_cycle.pop_front();
      r = t % ROWS;
      check(int'(res_tag) == t, $sformatf("tag %0d vs %0d", res_tag, t));
      check(cyc - ic == 3, $sformatf("latency %0d", cyc - ic));
      for (int c = 0; c < (stream_mode == MODE_INT8 ? 2 : 4); c++) begin
        int e;
        if (use_old) begin
          logic [15:0] keep [LANES];
          keep = W[r];
          W[r] = oldW[r];
          e = exp_col(r, c, stream_mode);
          W[r] = keep;
        end else e = exp_col(r, c, stream_mode);
        check(col[c] == e, $sformatf("row %0d col %0d got %0d exp %0d", r, c, col[c], e));
      end
    end
  end

  task automatic stream(input cim_mode_e m, input bit with_write);
    stream_mode = m;
    use_old = with_write;
    for (int r = 0; r < ROWS; r++) for (int i = 0; i < LANES; i++) X[r][i] = 8'($urandom);
    if (with_write) begin
      oldW = W;
      for (int r = 0; r < ROWS; r++) for (int i = 0; i < LANES; i++) W[r][i] = 16'($urandom);
    end
    @(negedge clk);
    for (int r = 0; r <= ROWS; r++) begin
      lb_load = (r < ROWS); lb_wide = 0;
      if (r < ROWS) for (int i = 0; i < LANES; i++) lb_data[8*i +: 8] = X[r][i];
      req_valid = (r > 0); req_compute = 1; mode = m; row = 4'(r - 1);
      wr_en = with_write && (r > 0);
      if (r > 0) for (int i = 0; i < LANES; i++) wr_data[16*i +: 16] = W[r-1][i];
      req_tag = 16'(r - 1);
      if (r > 0) begin exp_q_tag.push_back(r - 1); issue_cycle.push_back(cyc + 1); end
      @(negedge clk);
    end
    lb_load = 0; req_valid = 0; wr_en = 0;
    repeat (6) @(negedge clk);
    check(exp_q_tag.size() == 0, "all streamed results returned");
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stream_mode = MODE_INT8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int i = 0; i < LANES; i++) W[r][i] = 16'($urandom);
      write_row(r);
    end
    stream(MODE_INT8, 0);
    stream(MODE_INT4, 0);
    stream(MODE_INT8, 1);     // RCW: compute old rows while writing new ones
    use_old = 0;
    stream(MODE_INT8, 0);     // the new rows are now in place
    // BF16: two wide loads then one request
    stream_mode = MODE_BF16;
    for (int t = 0; t < 6; t++) begin
      logic [15:0] xb [LANES];
      real refv, mag, got;
      for (int i = 0; i < LANES; i++) begin
        W[0][i] = {1'($urandom), 8'(118 + $urandom_range(0, 18)), 7'($urandom)};
        xb[i]   = {1'($urandom), 8'(118 + $urandom_range(0, 18)), 7'($urandom)};
      end
      write_row(0);
      for (int h = 0; h < 2; h++) begin
        @(negedge clk);
        lb_load = 1; lb_wide = 1; lb_half = h[0];
        for (int i = 0; i < LANES / 2; i++) lb_data[16*i +: 16] = xb[128*h + i];
      end
      @(negedge clk);
      lb_load = 0; req_valid = 1; req_compute = 1; mode = MODE_BF16; row = 0;
      @(negedge clk);
      req_valid = 0;
      repeat (3) @(negedge clk);
      refv = 0; mag = 0;
      for (int i = 0; i < LANES; i++) begin
        refv += bf2r(xb[i]) * bf2r(W[0][i]);
        mag  += (bf2r(xb[i]) * bf2r(W[0][i])) ** 2;
      end
      begin
        longint bm; int be;
        bm = bf.mant; be = int'(bf.exp) - BFP_BIAS;
        got = real'(bm) * pow2(be);
      end
      check((got - refv) < 0.02 * $sqrt(mag) && (refv - got) < 0.02 * $sqrt(mag), $sformatf("bf16 got %f exp %f", got, refv));
      begin
        logic [15:0] h;
        h = bfp_to_bf16(bf);
        check((bf2r(h) - got) <= 0.01 * (got < 0 ? -got : got) + 1e-30 &&
              (got - bf2r(h)) <= 0.01 * (got < 0 ? -got : got) + 1e-30, "bf16 conversion");
      end
    end
    // softmax LUT in every bank
    for (int r = 0; r < ROWS; r++) begin
      for (int i = 0; i < LANES; i++) begin
        int s, k;
        real d0, a, b;
        s  = i % SUBARRAYS;
        k  = ((s % 8) / 2) * 16 + r;
        d0 = -0.25 * k;
        a  = ($exp(d0) - $exp(d0 - 0.25)) / 0.25;
        b  = $exp(d0) + a * (-d0);
        W[r][i] = (s % 2 == 0) ? 16'($rtoi(a * 32768.0 + 0.5)) : 16'($rtoi(b * 32768.0 + 0.5));
      end
      write_row(r);
    end
    stream_mode = MODE_SOFTMAX;
    for (int t = 0; t < 10; t++) begin
      logic signed [15:0] xs [SM_LANES];
      int sum;
      grpmax = 16'(int'($urandom_range(0, 3000)) - 1500);
      for (int j = 0; j < SM_LANES; j++) xs[j] = 16'(int'(grpmax) - int'($urandom_range(0, 4500)));
      @(negedge clk);
      lb_load = 1; lb_wide = 1; lb_half = 0; lb_data = '0;
      for (int j = 0; j < SM_LANES; j++) lb_data[16*j +: 16] = xs[j];
      @(negedge clk);
      lb_load = 0; req_valid = 1; req_compute = 1; mode = MODE_SOFTMAX;
      @(negedge clk);
      req_valid = 0;
      repeat (3) @(negedge clk);
      sum = 0;
      for (int j = 0; j < SM_LANES; j++) begin
        real ev, gv;
        int di;
        di = int'(xs[j]) - int'(grpmax);
        ev = (di <= -4096) ? 0.0 : $exp(di / 256.0);
        gv = sm_exp[j] / 32768.0;
        check(gv - ev < 0.01 && ev - gv < 0.01, $sformatf("softmax lane %0d got %f exp %f", j, gv, ev));
        sum += sm_exp[j];
      end
      check(sm_sum == 32'(sum), "softmax full accumulation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
