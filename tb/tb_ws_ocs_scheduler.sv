// tb_ws_ocs_scheduler: runs the WS-OCS scheduler against a one-cycle DRAM model for
// several GEMM shapes (INT8 with input reuse, several N and K blocks, a decode-like M = 1,
// BF16) and an OP_LOAD. A shadow of the input-reuse buffer records which token, N block and
// line each buffer line holds; every compute step is checked to read the line of the token
// and row it computes. The event counters are checked against the traffic formulas of the
// dataflow (weights NK once, inputs (K/k)(M-m)N plus the first pass, one RCW row write per
// row of every block after the first), and the total cycle count against the schedule.
`timescale 1ns/1ps
module tb_ws_ocs_scheduler;
  import rcw_pkg::*;
  localparam int CL = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0; sched_op_e op = OP_GEMM; cim_mode_e mode = MODE_INT8;
  logic [10:0] m_tokens = 1; logic [3:0] nb_blocks = 1; logic [7:0] kb_blocks = 1; logic [15:0] wbase = 0;
  logic busy, done, dram_req_valid;
  dram_req_t dram_req;
  logic [BEAT_W-1:0] dram_rsp_data = '0;
  logic in_wr_en; logic [7:0] in_wr_line; logic [1:0] in_wr_quarter; logic [BEAT_W-1:0] in_wr_data;
  logic wb_wr_en; logic [2:0] wb_wr_cluster; logic [1:0] wb_wr_core; logic [3:0] wb_wr_row; logic [2:0] wb_wr_beat;
  logic [BEAT_W-1:0] wb_wr_data;
  step_t step;
  logic ps_rd_en; logic [2:0] ps_rd_cluster; logic [9:0] ps_rd_addr;
  logic out_valid; logic [7:0] out_kb; logic [2:0] out_cluster; logic [9:0] out_token;
  logic [31:0] cnt_in_beats, cnt_w_beats, cnt_out_beats, cnt_rcw_rows, cnt_exposed_rows, cnt_reuse, cnt_cycles;

  ws_ocs_scheduler #(.CLUSTERS(CL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DRAM model: the beat carries its own request fields
  always @(posedge clk) begin
    dram_rsp_data <= '0;
    if (dram_req_valid) dram_rsp_data <= BEAT_W'({dram_req.kind, dram_req.blk, dram_req.token, dram_req.nb, dram_req.beat,
                                                  dram_req.cluster, dram_req.core, dram_req.row});
  end

  // shadow of the input-reuse buffer: {token, nb, line-in-token}
  int sh_tok [256], sh_nb [256], sh_line [256];
  int steps, passes, cur_m, cur_nb, cur_row, errs_line, wr_seen_last;
  int cur_M, cur_NB;
  bit cur_bf;
  always @(posedge clk) if (rst_n) begin
    if (in_wr_en) begin
      logic [BEAT_W-1:0] d;
      d = in_wr_data;
      // fields (LSB first): row 4, core 2, cluster 3, beat 7, nb 4, token 10
      sh_tok[in_wr_line]  = int'(d[20 +: 10]);
      sh_nb[in_wr_line]   = int'(d[16 +: 4]);
      sh_line[in_wr_line] = int'(d[9 +: 7]) / 4;
      if (in_wr_quarter != d[9 +: 2]) errs_line++;
    end
    if (step.ld) begin
      int pass_nb, want_line;
      pass_nb   = (passes / cur_M) % cur_NB;
      want_line = cur_bf ? 2 * int'(step.row) + int'(step.ld_half) : int'(step.row);
      if (sh_tok[step.ld_line] != int'(step.token) || sh_nb[step.ld_line] != pass_nb || sh_line[step.ld_line] != want_line)
        errs_line++;
      if (step.rq) steps++;
      if (step.last) passes++;
    end
  end

  task automatic run(input sched_op_e o, input cim_mode_e md, input int M, input int NB, input int KB);
    int MT, res, exp_in, exp_w, exp_rcw, exp_cyc, tb_cyc, nblk, exp_reuse;
    bit bf;
    bf = (md == MODE_BF16);
    @(negedge clk);
    op = o; mode = md; m_tokens = 11'(M); nb_blocks = 4'(NB); kb_blocks = 8'(KB); wbase = 16'd100; start = 1;
    cur_M = M; cur_NB = NB; cur_bf = bf; steps = 0; passes = 0; errs_line = 0;
    @(negedge clk); start = 0;
    tb_cyc = 1;
    while (!done && tb_cyc < 3000000) begin @(negedge clk); tb_cyc++; end
    res  = bf ? 4 : 8;
    MT   = res / NB;
    nblk = NB * KB;
    exp_w = nblk * CL * 4 * 16 * 8;
    if (o == OP_LOAD) begin
      check(cnt_w_beats == 32'(CL * 512), "load weight beats");
      check(cnt_exposed_rows == 16 && cnt_rcw_rows == 0, "load uses an exposed write pass");
      check(cnt_cycles == 32'(CL * 512 + 16 + 13 + 1), $sformatf("load cycles %0d", cnt_cycles));
      return;
    end
    exp_in    = (bf ? 128 : 64) * NB * (M + (KB - 1) * (M - (M < MT ? M : MT)));
    exp_reuse = (KB - 1) * NB * (M < MT ? M : MT);
    exp_rcw   = (nblk - 1) * 16;
    exp_cyc   = CL * 512 + 16                               // first block, exposed
              + nblk * M                                    // S_TOK
              + exp_in                                      // input fetches
              + (nblk - 1) * CL * 512                       // next-block weight fetches
              + nblk * M * (bf ? 32 : 16)                   // compute steps
              + KB * (13 + CL * M) + 1;                     // flush, drain, done
    check(cnt_in_beats == 32'(exp_in), $sformatf("input beats %0d exp %0d", cnt_in_beats, exp_in));
    check(cnt_w_beats == 32'(exp_w), $sformatf("weight beats %0d exp %0d", cnt_w_beats, exp_w));
    check(cnt_rcw_rows == 32'(exp_rcw), $sformatf("rcw rows %0d exp %0d", cnt_rcw_rows, exp_rcw));
    check(cnt_exposed_rows == 16, "one exposed write pass");
    check(cnt_reuse == 32'(exp_reuse), $sformatf("reuse %0d exp %0d", cnt_reuse, exp_reuse));
    check(cnt_out_beats == 32'(KB * CL * M), "output beats");
    check(steps == nblk * M * 16, $sformatf("compute steps %0d", steps));
    check(errs_line == 0, $sformatf("%0d steps read a wrong input line", errs_line));
    check(cnt_cycles == 32'(exp_cyc), $sformatf("cycles %0d exp %0d", cnt_cycles, exp_cyc));
  endtask

  int outs;
  int out_err;
  always @(posedge clk) if (out_valid && rst_n) outs++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(OP_GEMM, MODE_INT8, 12, 1, 3);   // tile of 8 resident tokens, 4 streamed
    run(OP_GEMM, MODE_INT8, 5, 2, 2);    // two N blocks: psum accumulation, MT = 4
    run(OP_GEMM, MODE_INT4, 1, 1, 4);    // decode: every pass is a last pass
    run(OP_GEMM, MODE_BF16, 6, 1, 2);
    run(OP_LOAD, MODE_INT8, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
