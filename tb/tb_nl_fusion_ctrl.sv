// tb_nl_fusion_ctrl: the fusion controller together with a CIM macro holding the
// 64-segment exponential LUT. Random score groups (with very negative outliers) are
// normalised by group softmax and compared with softmax computed in real arithmetic;
// random groups are normalised by group RMSNorm with random gamma and compared with the
// real formula. Vectors of several groups are then rescaled with their global RMS
// (NL_RMS_SYNC) and compared with RMSNorm over the whole vector, including the reuse of the
// cached global reciprocal. Also checks that the probabilities of a group sum to about one
// and the command latencies.
`timescale 1ns/1ps
module tb_nl_fusion_ctrl;
  import rcw_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready;
  nl_op_e in_op = NL_SOFTMAX;
  logic [511:0] in_x = '0, in_gamma = '0;
  logic out_valid; logic [511:0] out_y;
  logic mac_valid; logic [511:0] mac_x; logic signed [15:0] mac_grpmax;
  logic mac_res_valid; logic [15:0] mac_exp [SM_LANES]; logic [31:0] mac_sum;
  logic busy;

  nl_fusion_ctrl dut (.*);

  // macro: LUT writes from the test, softmax requests from the controller
  logic wr_req = 0; logic [3:0] wr_row = 0; logic [ROW_W-1:0] wr_data = '0;
  logic signed [31:0] col [COLS_MAX]; bfp_t bf; logic [15:0] tag_o;
  cim_macro u_mac (
    .clk, .rst_n,
    .lb_load(mac_valid), .lb_wide(1'b1), .lb_half(1'b0), .lb_data(LINE_W'(mac_x)),
    .req_valid(mac_valid_d | wr_req), .req_compute(mac_valid_d), .mode(mac_valid_d ? MODE_SOFTMAX : MODE_INT8),
    .row(wr_row), .wr_en(wr_req), .wr_data, .grpmax(grp_d), .req_tag(16'd0),
    .res_valid(mac_res_valid), .res_tag(tag_o), .col, .bf, .sm_exp(mac_exp), .sm_sum(mac_sum)
  );
  logic mac_valid_d = 0; logic signed [15:0] grp_d = 0;
  always @(posedge clk) begin mac_valid_d <= mac_valid; if (mac_valid) grp_d <= mac_grpmax; end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input nl_op_e op, output int lat);
    @(negedge clk);
    in_valid = 1; in_op = op;
    lat = 0;
    @(negedge clk);
    in_valid = 0;
    while (!out_valid && lat < 500) begin @(negedge clk); lat++; end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // LUT: lane group of 8 sub-arrays, a_k in even, b_k in odd sub-array, row k % 16
    for (int r = 0; r < ROWS; r++) begin
      for (int i = 0; i < LANES; i++) begin
        int s, k; real d0, a, b;
        s = i % SUBARRAYS; k = ((s % 8) / 2) * 16 + r; d0 = -0.25 * k;
        a = ($exp(d0) - $exp(d0 - 0.25)) / 0.25;
        b = $exp(d0) + a * (-d0);
        wr_data[16*i +: 16] = (s % 2 == 0) ? 16'($rtoi(a * 32768.0 + 0.5)) : 16'($rtoi(b * 32768.0 + 0.5));
      end
      @(negedge clk); wr_req = 1; wr_row = 4'(r);
      @(negedge clk); wr_req = 0;
    end
    // softmax
    for (int t = 0; t < 20; t++) begin
      real xr [32]; real mx, den, psum; int lat;
      for (int i = 0; i < 32; i++) begin
        int v;
        v = int'($urandom_range(0, 2 * 1024)) - 1024;            // +-4.0
        if (t % 4 == 3 && i % 5 == 0) v = -30000;                 // far below the maximum
        in_x[16*i +: 16] = 16'(v);
        xr[i] = v / 256.0;
      end
      mx = xr[0];
      for (int i = 1; i < 32; i++) if (xr[i] > mx) mx = xr[i];
      den = 0;
      for (int i = 0; i < 32; i++) den += $exp(xr[i] - mx);
      run(NL_SOFTMAX, lat);
      check(lat > 0 && lat < 80, $sformatf("softmax latency %0d", lat));
      psum = 0;
      for (int i = 0; i < 32; i++) begin
        real p, g;
        p = $exp(xr[i] - mx) / den;
        g = out_y[16*i +: 16] / 65536.0;
        psum += g;
        check(g - p < 0.01 && p - g < 0.01, $sformatf("softmax %0d got %f exp %f", i, g, p));
      end
      check(psum > 0.97 && psum < 1.03, $sformatf("probabilities sum %f", psum));
    end
    // RMSNorm
    for (int t = 0; t < 20; t++) begin
      real xr [32], gr [32]; real ms, rms; int lat;
      ms = 0;
      for (int i = 0; i < 32; i++) begin
        int v, g;
        v = int'($urandom_range(0, 2 * 1536)) - 1536;             // +-6.0
        g = int'($urandom_range(0, 512)) - 128;                   // gamma -0.5..1.5
        in_x[16*i +: 16] = 16'(v); in_gamma[16*i +: 16] = 16'(g);
        xr[i] = v / 256.0; gr[i] = g / 256.0;
        ms += xr[i] * xr[i];
      end
      rms = $sqrt(ms / 32.0 + 1.0 / 65536.0);
      run(t == 0 ? NL_RMS_NEW : NL_RMS, lat);
      check(lat > 0 && lat < 80, $sformatf("rmsnorm latency %0d", lat));
      for (int i = 0; i < 32; i++) begin
        real y, g;
        logic signed [15:0] yy;
        y  = xr[i] / rms * gr[i];
        yy = out_y[16*i +: 16];
        g  = yy / 256.0;
        check(g - y < 0.03 + 0.01 * (y < 0 ? -y : y) && y - g < 0.03 + 0.01 * (y < 0 ? -y : y),
              $sformatf("rmsnorm %0d got %f exp %f", i, g, y));
      end
    end
    // global RMS: vectors of G groups, statistics gathered by the group commands, then
    // every group rescaled by the RMS of the whole vector
    for (int t = 0; t < 6; t++) begin
      int G; real ms, rms; int lat;
      logic [511:0] xs [8], gs [8];
      real xr [8][32], gr [8][32];
      G = 2 + t;
      ms = 0;
      for (int q = 0; q < G; q++) begin
        for (int i = 0; i < 32; i++) begin
          int v, g;
          v = int'($urandom_range(0, 2 * 512 * (q + 1))) - 512 * (q + 1);   // groups of different scale
          g = int'($urandom_range(0, 512)) - 128;
          xs[q][16*i +: 16] = 16'(v); gs[q][16*i +: 16] = 16'(g);
          xr[q][i] = v / 256.0; gr[q][i] = g / 256.0;
          ms += xr[q][i] * xr[q][i];
        end
        in_x = xs[q]; in_gamma = gs[q];
        run(q == 0 ? NL_RMS_NEW : NL_RMS, lat);
      end
      rms = $sqrt(ms / (32.0 * G) + 1.0 / 65536.0);
      for (int q = 0; q < G; q++) begin
        in_x = xs[q]; in_gamma = gs[q];
        run(NL_RMS_SYNC, lat);
        if (q == 0) check(lat > 20 && lat < 200, $sformatf("first sync latency %0d", lat));
        else        check(lat < 6, $sformatf("cached sync latency %0d", lat));
        for (int i = 0; i < 32; i++) begin
          real y, g;
          logic signed [15:0] yy;
          y  = xr[q][i] / rms * gr[q][i];
          yy = out_y[16*i +: 16];
          g  = yy / 256.0;
          check(g - y < 0.03 + 0.01 * (y < 0 ? -y : y) && y - g < 0.03 + 0.01 * (y < 0 ? -y : y),
                $sformatf("global rmsnorm v%0d g%0d %0d got %f exp %f", t, q, i, g, y));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
