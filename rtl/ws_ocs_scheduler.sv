// ws_ocs_scheduler: runs a matrix multiply O[M x K] = I[M x N] * W[N x K] on the CIM
// clusters in the weight-stationary output-column-stationary (WS-OCS) order, and routes
// DRAM read data to the input-reuse and weight buffers.
//
// Tiling. One macro holds a 4096 x 2 (INT8) or 4096 x 4 (INT4) weight tile, so one
// weight block spans 4096 rows of N and, over all CLUSTERS x 4 macros, 64 (INT8) or 128
// (INT4) columns of K. A GEMM has NB blocks along N and KB blocks along K.
// Order: for kb { for nb { for token m { [fetch the token's input block unless it is
// resident]; 16 word-line steps } } ; drain the psums of column block kb }.
//   * Weights stay in the macros for all M tokens of a block (weight-stationary) and are
//     replaced only after the last token: during the last token pass every step writes the
//     next block's row from the weight buffers into the row it computes on
//     (read-compute/write), so the update costs no cycles. The next block is fetched into
//     the weight buffers just before that pass. Only the very first block (and an OP_LOAD,
//     used to program a softmax LUT) is written by an exposed write-only pass.
//   * Output columns stay in the psum buffers until all NB blocks are summed
//     (output-column-stationary), then are drained once, one 512-bit beat per cluster and
//     token.
//   * Input reuse: the first half of the input-buffer slots keeps a tile of
//     MT = RES_SLOTS / NB tokens resident; for kb > 0 these are not fetched again, so input
//     traffic is (K/k) x (M - MT) x N plus the first fetch, as in the paper's table.
//     The other tokens pass through one streaming slot.
// BF16 mode takes two input lines per word line (32 lines per token, two steps per row)
// and supports NB = 1 only (the psum buffer adds integers).
// DRAM protocol (this design's choice): a request in cycle t is answered with one 512-bit
// beat in cycle t+1, no back-pressure. Fetches and compute are not overlapped. The beat is
// not stored here: in_wr_data and wb_wr_data are the response itself, and the scheduler
// only adds the buffer addresses and enables that belong to the request of cycle t.
// Output: one beat per (cluster, token) with out_kb/out_cluster/out_token one cycle after
// ps_rd_en; the top selects the cluster's psum data.
module ws_ocs_scheduler
  import rcw_pkg::*;
#(
  parameter int CLUSTERS  = 8,
  parameter int RES_SLOTS = 8     // resident token blocks in the input-reuse buffer (INT modes)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 start,
  input  sched_op_e            op,
  input  cim_mode_e            mode,
  input  logic [10:0]          m_tokens,   // 1..1024
  input  logic [3:0]           nb_blocks,  // 1..8
  input  logic [7:0]           kb_blocks,  // >= 1
  input  logic [15:0]          wbase,      // index of the first weight block
  output logic                 busy,
  output logic                 done,
  // DRAM
  output logic                 dram_req_valid,
  output dram_req_t            dram_req,
  input  logic [BEAT_W-1:0]    dram_rsp_data,
  // buffer writes
  output logic                 in_wr_en,
  output logic [7:0]           in_wr_line,
  output logic [1:0]           in_wr_quarter,
  output logic [BEAT_W-1:0]    in_wr_data,
  output logic                 wb_wr_en,
  output logic [2:0]           wb_wr_cluster,
  output logic [1:0]           wb_wr_core,
  output logic [3:0]           wb_wr_row,
  output logic [2:0]           wb_wr_beat,
  output logic [BEAT_W-1:0]    wb_wr_data,
  // steps
  output step_t                step,
  // psum drain
  output logic                 ps_rd_en,
  output logic [2:0]           ps_rd_cluster,
  output logic [9:0]           ps_rd_addr,
  output logic                 out_valid,
  output logic [7:0]           out_kb,
  output logic [2:0]           out_cluster,
  output logic [9:0]           out_token,
  // event counters (since start)
  output logic [31:0]          cnt_in_beats,
  output logic [31:0]          cnt_w_beats,
  output logic [31:0]          cnt_out_beats,
  output logic [31:0]          cnt_rcw_rows,
  output logic [31:0]          cnt_exposed_rows,
  output logic [31:0]          cnt_reuse,
  output logic [31:0]          cnt_cycles
);
  localparam int CLW = (CLUSTERS > 1) ? $clog2(CLUSTERS) : 1;
  localparam int WCNT_W = CLW + 2 + 4 + 3;          // cluster, core, row, beat
  localparam int WBEATS = CLUSTERS * 4 * ROWS * BEATS_PER_ROW;

  typedef enum logic [3:0] {
    S_IDLE, S_WFETCH, S_WPASS, S_TOK, S_TFETCH, S_NWFETCH, S_COMPUTE, S_FLUSH, S_DRAIN, S_DONE
  } state_e;
  state_e st;

  sched_op_e  op_q;
  cim_mode_e  mode_q;
  logic [10:0] m_q;
  logic [3:0]  nb_q;
  logic [7:0]  kb_q;
  logic [15:0] wbase_q;
  logic [7:0]  kb;
  logic [3:0]  nb;
  logic [9:0]  m;
  logic [12:0] cnt;        // beat / step / drain counter
  logic [15:0] blk;        // current block index = kb * NB + nb
  logic [10:0] mt;         // resident tokens

  logic        bf16;
  logic [6:0]  tok_beats;  // input beats per token block - 1
  logic [5:0]  tok_steps;  // steps per token pass - 1
  logic [4:0]  res_slots;
  assign bf16          = (mode_q == MODE_BF16);
  assign tok_beats     = bf16 ? 7'd127 : 7'd63;
  assign tok_steps     = bf16 ? 6'd31 : 6'd15;
  assign res_slots     = bf16 ? 5'(RES_SLOTS / 2) : 5'(RES_SLOTS);

  logic resident, has_next, fetch_needed;
  logic [4:0] slot;
  always_comb begin
    resident     = (11'(m) < mt);
    has_next     = !((kb == kb_q - 8'd1) && (nb == nb_q - 4'd1));
    fetch_needed = !(resident && kb != 8'd0);
    slot         = resident ? 5'(32'(m) * 32'(nb_q) + 32'(nb)) : res_slots;
  end

  function automatic logic [7:0] line_addr(input logic [4:0] s, input logic [6:0] l, input logic bf);
    return bf ? 8'(32'(s) * 32 + 32'(l)) : 8'(32'(s) * 16 + 32'(l));
  endfunction

  // ---- DRAM response routing (fixed one-cycle latency) ---------------------------------
  logic      rsp_pending;
  dram_req_t req_q;
  logic [4:0] req_slot;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsp_pending <= 1'b0;
    else        rsp_pending <= dram_req_valid;
  end
  always_ff @(posedge clk) begin
    req_q    <= dram_req;
    req_slot <= slot;
  end
  always_comb begin
    in_wr_en      = rsp_pending && req_q.kind == DRAM_INPUT;
    in_wr_line    = line_addr(req_slot, 7'(req_q.beat[6:2]), bf16);
    in_wr_quarter = req_q.beat[1:0];
    in_wr_data    = dram_rsp_data;
    wb_wr_en      = rsp_pending && req_q.kind == DRAM_WEIGHT;
    wb_wr_cluster = req_q.cluster;
    wb_wr_core    = req_q.core;
    wb_wr_row     = req_q.row;
    wb_wr_beat    = req_q.beat[2:0];
    wb_wr_data    = dram_rsp_data;
  end

  // ---- request / step generation -------------------------------------------------------
  always_comb begin
    dram_req_valid = 1'b0;
    dram_req       = '0;
    step           = '0;
    ps_rd_en       = 1'b0;
    ps_rd_cluster  = '0;
    ps_rd_addr     = '0;
    unique case (st)
      S_WFETCH, S_NWFETCH: begin
        dram_req_valid   = 1'b1;
        dram_req.kind    = DRAM_WEIGHT;
        dram_req.blk     = (st == S_NWFETCH) ? wbase_q + blk + 16'd1 : wbase_q + blk;
        dram_req.cluster = 3'(cnt[WCNT_W-1 -: CLW]);
        dram_req.core    = cnt[8:7];
        dram_req.row     = cnt[6:3];
        dram_req.beat    = 7'(cnt[2:0]);
      end
      S_TFETCH: begin
        dram_req_valid = 1'b1;
        dram_req.kind  = DRAM_INPUT;
        dram_req.token = m;
        dram_req.nb    = nb;
        dram_req.beat  = cnt[6:0];
      end
      S_WPASS: begin
        step.rq    = 1'b1;
        step.rq_wr = 1'b1;
        step.row   = cnt[3:0];
        step.mode  = mode_q;
      end
      S_COMPUTE: begin
        step.ld         = 1'b1;
        step.ld_wide    = bf16;
        step.ld_half    = bf16 & cnt[0];
        step.ld_line    = line_addr(slot, cnt[6:0], bf16);
        step.rq         = bf16 ? cnt[0] : 1'b1;
        step.rq_compute = 1'b1;
        step.rq_wr      = (11'(m) == m_q - 11'd1) && has_next;
        step.row        = bf16 ? cnt[4:1] : cnt[3:0];
        step.mode       = mode_q;
        step.token      = m;
        step.first      = bf16 ? (cnt[5:0] == 6'd1) : (cnt[3:0] == 4'd0);
        step.last       = (cnt[5:0] == 6'(tok_steps));
        step.acc_add    = (nb != 4'd0);
      end
      S_DRAIN: begin
        ps_rd_en      = 1'b1;
        ps_rd_cluster = 3'(cnt[12:10]);
        ps_rd_addr    = cnt[9:0];
      end
      default: ;
    endcase
  end

  // ---- state machine ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; kb <= '0; nb <= '0; m <= '0; blk <= '0; mt <= '0;
      op_q <= OP_GEMM; mode_q <= MODE_INT8; m_q <= '0; nb_q <= '0; kb_q <= '0; wbase_q <= '0;
      done <= 1'b0;
      out_valid <= 1'b0; out_kb <= '0; out_cluster <= '0; out_token <= '0;
      cnt_in_beats <= '0; cnt_w_beats <= '0; cnt_out_beats <= '0; cnt_rcw_rows <= '0;
      cnt_exposed_rows <= '0; cnt_reuse <= '0; cnt_cycles <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= ps_rd_en;
      if (ps_rd_en) begin
        out_kb      <= kb;
        out_cluster <= ps_rd_cluster;
        out_token   <= ps_rd_addr;
      end
      if (st != S_IDLE) cnt_cycles <= cnt_cycles + 32'd1;
      if (dram_req_valid && dram_req.kind == DRAM_INPUT)  cnt_in_beats <= cnt_in_beats + 32'd1;
      if (dram_req_valid && dram_req.kind == DRAM_WEIGHT) cnt_w_beats  <= cnt_w_beats + 32'd1;
      if (ps_rd_en) cnt_out_beats <= cnt_out_beats + 32'd1;
      if (step.rq && step.rq_wr && step.rq_compute)  cnt_rcw_rows     <= cnt_rcw_rows + 32'd1;
      if (step.rq && step.rq_wr && !step.rq_compute) cnt_exposed_rows <= cnt_exposed_rows + 32'd1;

      unique case (st)
        S_IDLE: if (start) begin
          op_q <= op; mode_q <= mode; m_q <= m_tokens; nb_q <= nb_blocks; kb_q <= kb_blocks;
          wbase_q <= wbase;
          mt  <= 11'((((mode == MODE_BF16) ? RES_SLOTS / 2 : RES_SLOTS)) / ((nb_blocks == 0) ? 1 : int'(nb_blocks)));
          kb <= '0; nb <= '0; m <= '0; blk <= '0; cnt <= '0;
          cnt_in_beats <= '0; cnt_w_beats <= '0; cnt_out_beats <= '0; cnt_rcw_rows <= '0;
          cnt_exposed_rows <= '0; cnt_reuse <= '0; cnt_cycles <= '0;
          st <= S_WFETCH;
        end
        S_WFETCH: begin
          cnt <= cnt + 13'd1;
          if (32'(cnt) == WBEATS - 1) begin cnt <= '0; st <= S_WPASS; end
        end
        S_WPASS: begin
          cnt <= cnt + 13'd1;
          if (cnt[3:0] == 4'd15) begin
            cnt <= '0;
            st  <= (op_q == OP_LOAD) ? S_FLUSH : S_TOK;
          end
        end
        S_TOK: begin
          cnt <= '0;
          if (fetch_needed) st <= S_TFETCH;
          else begin
            cnt_reuse <= cnt_reuse + 32'd1;
            st <= ((11'(m) == m_q - 11'd1) && has_next) ? S_NWFETCH : S_COMPUTE;
          end
        end
        S_TFETCH: begin
          cnt <= cnt + 13'd1;
          if (cnt[6:0] == tok_beats) begin
            cnt <= '0;
            st  <= ((11'(m) == m_q - 11'd1) && has_next) ? S_NWFETCH : S_COMPUTE;
          end
        end
        S_NWFETCH: begin
          cnt <= cnt + 13'd1;
          if (32'(cnt) == WBEATS - 1) begin cnt <= '0; st <= S_COMPUTE; end
        end
        S_COMPUTE: begin
          cnt <= cnt + 13'd1;
          if (cnt[5:0] == tok_steps) begin
            cnt <= '0;
            if (11'(m) != m_q - 11'd1) begin
              m  <= m + 10'd1;
              st <= S_TOK;
            end else begin
              m   <= '0;
              blk <= blk + 16'd1;
              if (nb != nb_q - 4'd1) begin
                nb <= nb + 4'd1;
                st <= S_TOK;
              end else st <= S_FLUSH;
            end
          end
        end
        S_FLUSH: begin   // let the last token results reach the psum buffers
          cnt <= cnt + 13'd1;
          if (cnt[3:0] == 4'd12) begin
            cnt <= '0;
            st  <= (op_q == OP_LOAD) ? S_DONE : S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (11'(cnt[9:0]) == m_q - 11'd1) begin
            cnt[9:0] <= '0;
            if (32'(cnt[12:10]) == CLUSTERS - 1) begin
              cnt <= '0;
              nb  <= '0;
              if (kb == kb_q - 8'd1) st <= S_DONE;
              else begin kb <= kb + 8'd1; st <= S_TOK; end
            end else cnt[12:10] <= cnt[12:10] + 3'd1;
          end else cnt[9:0] <= cnt[9:0] + 10'd1;
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  a_bf16_single_nb: assert property (@(posedge clk) disable iff (!rst_n)
      (st == S_IDLE && start && op == OP_GEMM && mode == MODE_BF16) |-> nb_blocks == 4'd1)
    else $error("BF16 GEMM supports one N block only");
  a_nb_range: assert property (@(posedge clk) disable iff (!rst_n)
      (st == S_IDLE && start) |-> (nb_blocks != 0 && 32'(nb_blocks) <= RES_SLOTS && m_tokens != 0 && m_tokens <= 11'd1024 && kb_blocks != 0))
    else $error("scheduler command out of range");

endmodule
