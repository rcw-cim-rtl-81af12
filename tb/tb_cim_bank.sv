// tb_cim_bank: self-checking test of one CIM bank.
// Checks INT8 and INT4 dot products against a reference copy of the array, the
// read-compute/write rule (a compute with a write returns the old row and leaves the new
// one), BF16 dot products against real arithmetic, the softmax LUT lanes against exp(),
// the full-accumulation sum, and the two-cycle result latency.
`timescale 1ns/1ps
module tb_cim_bank;
  import rcw_pkg::*;
  localparam int S = SUBARRAYS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_compute = 0, wr_en = 0;
  cim_mode_e mode = MODE_INT8;
  logic [3:0] row = 0;
  logic [15:0] x [S];
  logic [15:0] wr_data [S];
  logic signed [15:0] grpmax = 0;
  logic res_valid;
  logic signed [31:0] col_sum [COLS_MAX];
  logic [9:0] bf_exp;
  logic signed [31:0] bf_mant;
  logic [15:0] sm_exp [SM_LANES_PER_BANK];
  logic [19:0] sm_sum;

  cim_bank dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] ref_mem [S][ROWS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one access; returns after the result register is loaded when compute=1
  task automatic access(input cim_mode_e m, input logic [3:0] r, input bit comp, input bit wr);
    int lat;
    @(negedge clk);
    mode = m; row = r; req_compute = comp; wr_en = wr; req_valid = 1;
    @(negedge clk);
    req_valid = 0; wr_en = 0;
    if (wr) for (int s = 0; s < S; s++) ref_mem[s][r] = wr_data[s];
    if (comp) begin
      lat = 1;
      while (!res_valid && lat < 10) begin @(negedge clk); lat++; end
      check(lat == 2, $sformatf("latency %0d", lat));
    end
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
    m = (128.0 + v[6:0]) / 128.0;
    m = m * pow2(int'(v[14:7]) - 127);
    return v[15] ? -m : m;
  endfunction

  function automatic logic [15:0] rnd_bf16();
    return {1'($urandom), 8'(120 + $urandom_range(0, 14)), 7'($urandom)};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < S; s++) begin x[s] = 0; wr_data[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill every row with plain writes
    for (int r = 0; r < ROWS; r++) begin
      for (int s = 0; s < S; s++) wr_data[s] = 16'($urandom);
      access(MODE_INT8, 4'(r), 0, 1);
    end
    // INT8 and INT4 dot products
    for (int t = 0; t < 24; t++) begin
      int r;
      longint e [4];
      cim_mode_e m;
      m = (t % 2 == 1) ? MODE_INT4 : MODE_INT8;
      r = $urandom_range(0, ROWS - 1);
      for (int s = 0; s < S; s++) x[s] = 16'($urandom);
      access(m, 4'(r), 1, 0);
      for (int c = 0; c < 4; c++) e[c] = 0;
      for (int s = 0; s < S; s++) begin
        int xv;
        xv = int'(signed'(x[s][7:0]));
        if (m == MODE_INT8) begin
          e[0] += xv * int'(signed'(ref_mem[s][r][15:8]));
          e[1] += xv * int'(signed'(ref_mem[s][r][7:0]));
        end else
          for (int c = 0; c < 4; c++) e[c] += xv * int'(signed'(ref_mem[s][r][15-4*c -: 4]));
      end
      for (int c = 0; c < (m == MODE_INT8 ? 2 : 4); c++)
        check(col_sum[c] == e[c], $sformatf("mode %s row %0d col %0d got %0d exp %0d", m.name(), r, c, col_sum[c], e[c]));
    end
    // read-compute/write: result uses the old row, the row then holds the new data
    begin
      logic [15:0] oldw [S];
      longint e0;
      for (int s = 0; s < S; s++) begin oldw[s] = ref_mem[s][5]; x[s] = 16'($urandom); wr_data[s] = 16'($urandom); end
      access(MODE_INT8, 4'd5, 1, 1);
      e0 = 0;
      for (int s = 0; s < S; s++) e0 += int'(signed'(x[s][7:0])) * int'(signed'(oldw[s][15:8]));
      check(col_sum[0] == e0, "RCW compute used old weights");
      access(MODE_INT8, 4'd5, 1, 0);
      e0 = 0;
      for (int s = 0; s < S; s++) e0 += int'(signed'(x[s][7:0])) * int'(signed'(ref_mem[s][5][15:8]));
      check(col_sum[0] == e0, "RCW write landed in the row");
    end
    // BF16
    for (int t = 0; t < 8; t++) begin
      real ref_v, got, mag;
      for (int s = 0; s < S; s++) wr_data[s] = rnd_bf16();
      access(MODE_BF16, 4'(t), 0, 1);
      for (int s = 0; s < S; s++) x[s] = rnd_bf16();
      access(MODE_BF16, 4'(t), 1, 0);
      ref_v = 0; mag = 0;
      for (int s = 0; s < S; s++) begin
        ref_v += bf2r(x[s]) * bf2r(ref_mem[s][t]);
        mag   += (bf2r(x[s]) * bf2r(ref_mem[s][t])) ** 2;
      end
      begin
        int bm, be;
        bm = bf_mant; be = int'(bf_exp) - BFP_BIAS;
        got = bm * pow2(be);
      end
      check((got - ref_v) < 0.02 * $sqrt(mag) + 1e-9 && (ref_v - got) < 0.02 * $sqrt(mag) + 1e-9,
            $sformatf("bf16 got %f exp %f", got, ref_v));
    end
    // softmax LUT: lane j uses sub-arrays 8j..8j+7; a in even, b in odd sub-array
    for (int r = 0; r < ROWS; r++) begin
      for (int s = 0; s < S; s++) begin
        int k;
        real d0, a, b;
        k  = ((s % 8) / 2) * 16 + r;
        d0 = -0.25 * k;                                  // segment start
        a  = ($exp(d0) - $exp(d0 - 0.25)) / 0.25;        // chord slope
        b  = $exp(d0) + a * (-d0);                       // chord value at |d| = 0
        wr_data[s] = (s % 2 == 0) ? 16'($rtoi(a * 32768.0 + 0.5)) : 16'($rtoi(b * 32768.0 + 0.5));
      end
      access(MODE_INT8, 4'(r), 0, 1);
    end
    for (int t = 0; t < 40; t++) begin
      int sum;
      grpmax = 16'($urandom_range(0, 2000));
      for (int j = 0; j < S; j++) x[j] = 16'(int'(grpmax) - $urandom_range(0, (t < 20) ? 1200 : 4600));
      x[0] = grpmax;
      access(MODE_SOFTMAX, 4'd0, 1, 0);
      sum = 0;
      for (int j = 0; j < SM_LANES_PER_BANK; j++) begin
        real dd, ev, gv;
        int  di;
        logic signed [15:0] xs;
        xs = x[j];
        di = int'(xs) - int'(grpmax);
        dd = di / 256.0;
        ev = (dd <= -16.0) ? 0.0 : $exp(dd);
        gv = sm_exp[j] / 32768.0;
        check(gv - ev < 0.01 && ev - gv < 0.01, $sformatf("softmax lane %0d d=%f got %f exp %f", j, dd, gv, ev));
        sum += sm_exp[j];
      end
      check(sm_sum == 20'(sum), "softmax full accumulation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
