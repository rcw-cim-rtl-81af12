// tb_llama_workload: the accelerator at its default size running tiles shaped like the
// linear layers of a 7B-parameter decoder (hidden size 4096, feed-forward size 11008) with
// INT4 weights and INT8 activations. A 4096-row weight block covers N = 4096, so a
// feed-forward down projection (N = 11008) takes NB = 3 blocks; each column block is 128
// INT4 output columns. The full layer is far too long to simulate (K / 128 = 32 or 86
// column blocks and 1024 tokens), so the prefill case runs 24 tokens and 2 column blocks
// of the N = 11008 shape, and the decode case one token with NB = 1 and NB = 3.
// Besides every output value (exact integer dot products computed here), it checks the
// WS-OCS traffic against the closed forms of the dataflow: input beats
// 64 * NB * (M + (KB - 1) * (M - MT)) with MT = 8 / NB resident tokens, weight beats
// NB * KB * 4096 (every weight read from DRAM once), output beats KB * 8 * M (every output
// written once), and CIM weight-row writes NB * KB * 16 (every block written into the
// macros once), of which all but the first block's are hidden by read-compute/write.
// The DRAM is a behavioural model answering each request one cycle later.
`timescale 1ns/1ps
module tb_llama_workload;
  import rcw_pkg::*;
  localparam int CL = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0; sched_op_e op = OP_GEMM; cim_mode_e mode = MODE_INT8;
  logic [10:0] m_tokens = 1; logic [3:0] nb_blocks = 1; logic [7:0] kb_blocks = 1; logic [15:0] wbase = 0;
  logic busy, done, dram_req_valid;
  dram_req_t dram_req;
  logic [BEAT_W-1:0] dram_rsp_data = '0;
  logic out_valid; logic [7:0] out_kb; logic [2:0] out_cluster; logic [9:0] out_token; logic [BEAT_W-1:0] out_data;
  logic nl_in_valid = 0, nl_in_ready;
  nl_op_e nl_in_op = NL_SOFTMAX;
  logic [511:0] nl_in_x = '0, nl_in_gamma = '0;
  logic nl_out_valid; logic [511:0] nl_out_y;
  logic [31:0] cnt_in_beats, cnt_w_beats, cnt_out_beats, cnt_rcw_rows, cnt_exposed_rows, cnt_reuse, cnt_cycles;
  logic [31:0] cnt_psum_acc, cnt_softmax, cnt_rmsnorm, cnt_rms_sync, cnt_mode_switch;

  rcw_cim_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---- data functions -----------------------------------------------------------------
  function automatic logic [31:0] hash(input int a, input int b, input int c, input int d);
    logic [31:0] h;
    h = 32'(a) * 32'h9E3779B1 ^ 32'(b) * 32'h85EBCA77 ^ 32'(c) * 32'hC2B2AE3D ^ 32'(d) * 32'h27D4EB2F;
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D; h = h ^ (h >> 13);
    return h;
  endfunction

  cim_mode_e cur_mode = MODE_INT8;

  // weight word of block blk, cluster c, core k, row r, lane i
  function automatic logic [15:0] wword(input int blk, input int c, input int k, input int r, input int i);
    logic [31:0] h;
    h = hash(blk, c * 4 + k, r, i);
    if (cur_mode == MODE_BF16) return {h[31], 8'(120 + h[20:16] % 12), h[6:0]};
    return h[15:0];
  endfunction

  // input word of token m, N block nb, line-in-token l, lane within that line
  function automatic logic [15:0] xword(input int m, input int nb, input int l, input int i);
    logic [31:0] h;
    h = hash(m + 7000, nb, l, i);
    if (cur_mode == MODE_BF16) return {h[31], 8'(120 + h[20:16] % 12), h[6:0]};
    return {8'h00, h[7:0]};
  endfunction

  always @(posedge clk) begin
    if (dram_req_valid) begin
      logic [BEAT_W-1:0] d;
      if (dram_req.kind == DRAM_WEIGHT) begin
        for (int j = 0; j < 32; j++)
          d[16*j +: 16] = wword(int'(dram_req.blk), int'(dram_req.cluster), int'(dram_req.core),
                                int'(dram_req.row), 32 * int'(dram_req.beat) + j);
      end else if (cur_mode == MODE_BF16) begin
        // 32 words per beat, 4 beats per 128-word half line
        for (int j = 0; j < 32; j++)
          d[16*j +: 16] = xword(int'(dram_req.token), int'(dram_req.nb), int'(dram_req.beat) / 4,
                                32 * (int'(dram_req.beat) % 4) + j);
      end else begin
        for (int j = 0; j < 64; j++)
          d[8*j +: 8] = xword(int'(dram_req.token), int'(dram_req.nb), int'(dram_req.beat) / 4,
                              64 * (int'(dram_req.beat) % 4) + j) [7:0];
      end
      dram_rsp_data <= d;
    end
  end

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real bf2r(input logic [15:0] v);
    real mm;
    if (v[14:7] == 0) return 0.0;
    mm = (128.0 + v[6:0]) / 128.0 * pow2(int'(v[14:7]) - 127);
    return v[15] ? -mm : mm;
  endfunction

  // ---- output checking ---------------------------------------------------------------
  int cur_nb, cur_wbase, beats_seen;
  always @(posedge clk) if (out_valid && rst_n) begin
    beats_seen++;
    for (int k = 0; k < 4; k++) begin
      if (cur_mode == MODE_BF16) begin
        real refv, mag, got;
        refv = 0; mag = 0;
        for (int r = 0; r < ROWS; r++) for (int i = 0; i < LANES; i++) begin
          real p;
          // a BF16 word line is two half lines: lanes 0..127 in line 2r, 128..255 in line 2r+1
          p = bf2r(xword(int'(out_token), 0, 2 * r + i / 128, i % 128)) *
              bf2r(wword(cur_wbase + int'(out_kb), int'(out_cluster), k, r, i));
          refv += p; mag += p * p;
        end
        got = bf2r(out_data[128*k +: 16]);
        check((got - refv) < 0.03 * $sqrt(mag) && (refv - got) < 0.03 * $sqrt(mag),
              $sformatf("bf16 kb %0d cl %0d tok %0d core %0d got %f exp %f", out_kb, out_cluster, out_token, k, got, refv));
      end else begin
        longint e [4];
        for (int c = 0; c < 4; c++) e[c] = 0;
        for (int nb = 0; nb < cur_nb; nb++)
          for (int r = 0; r < ROWS; r++) for (int i = 0; i < LANES; i++) begin
            int xv;
            logic [15:0] w;
            xv = int'(signed'(xword(int'(out_token), nb, r, i)[7:0]));
            w  = wword(cur_wbase + int'(out_kb) * cur_nb + nb, int'(out_cluster), k, r, i);
            if (cur_mode == MODE_INT8) begin
              e[0] += xv * int'(signed'(w[15:8]));
              e[1] += xv * int'(signed'(w[7:0]));
            end else
              for (int c = 0; c < 4; c++) e[c] += xv * int'(signed'(w[15-4*c -: 4]));
          end
        for (int c = 0; c < 4; c++)
          check(out_data[128*k + 32*c +: 32] == 32'(e[c]),
                $sformatf("kb %0d cl %0d tok %0d core %0d col %0d got %0d exp %0d", out_kb, out_cluster, out_token, k, c,
                          signed'(out_data[128*k + 32*c +: 32]), e[c]));
      end
    end
  end

  // ---- command helpers ---------------------------------------------------------------
  int ev_rcw, ev_exposed, ev_reuse, ev_stream, ev_acc, ev_int4, ev_bf16, ev_decode;

  task automatic gemm(input cim_mode_e md, input int M, input int NB, input int KB, input int wb);
    int cyc, exp_beats;
    cur_mode = md; cur_nb = NB; cur_wbase = wb; beats_seen = 0;
    @(negedge clk);
    op = OP_GEMM; mode = md; m_tokens = 11'(M); nb_blocks = 4'(NB); kb_blocks = 8'(KB); wbase = 16'(wb); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 400000) begin @(negedge clk); cyc++; end
    exp_beats = KB * CL * M;
    check(done, "gemm finished");
    check(beats_seen == exp_beats, $sformatf("output beats %0d exp %0d", beats_seen, exp_beats));
    check(cnt_rcw_rows == 32'((NB * KB - 1) * 16), "RCW rows per block change");
    $display("gemm %s M=%0d NB=%0d KB=%0d: %0d cycles, in %0d w %0d out %0d beats, rcw %0d exposed %0d reuse %0d",
             md.name(), M, NB, KB, cnt_cycles, cnt_in_beats, cnt_w_beats, cnt_out_beats, cnt_rcw_rows, cnt_exposed_rows, cnt_reuse);
    ev_rcw += int'(cnt_rcw_rows); ev_exposed += int'(cnt_exposed_rows); ev_reuse += int'(cnt_reuse);
    if (cnt_in_beats > 32'(64 * NB * M)) ev_stream++;
    if (md == MODE_INT4) ev_int4++;
    if (md == MODE_BF16) ev_bf16++;
    if (M == 1) ev_decode++;
  endtask

  task automatic traffic(input int M, input int NB, input int KB);
    int mt;
    mt = 8 / NB; if (mt > M) mt = M;
    check(cnt_in_beats == 32'(64 * NB * (M + (KB - 1) * (M - mt))),
          $sformatf("input beats %0d exp %0d", cnt_in_beats, 64 * NB * (M + (KB - 1) * (M - mt))));
    check(cnt_w_beats == 32'(NB * KB * 4096), $sformatf("weight beats %0d", cnt_w_beats));
    check(cnt_out_beats == 32'(KB * 8 * M), $sformatf("output beats %0d", cnt_out_beats));
    check(cnt_rcw_rows + cnt_exposed_rows == 32'(NB * KB * 16), "weight rows written once per block");
    check(cnt_exposed_rows == 32'd16, "only the first block is written by an exposed pass");
    check(cnt_reuse == 32'(NB * mt * (KB - 1)), $sformatf("reused token blocks %0d exp %0d", cnt_reuse, NB * mt * (KB - 1)));
  endtask

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    gemm(MODE_INT4, 24, 3, 2, 0);     traffic(24, 3, 2);   // prefill tile, FFN down shape
    gemm(MODE_INT4, 1, 1, 2, 100);    traffic(1, 1, 2);    // decode, attention projection shape
    gemm(MODE_INT4, 1, 3, 1, 200);    traffic(1, 3, 1);    // decode, FFN down shape
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
