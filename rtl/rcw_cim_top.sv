// rcw_cim_top: the RCW-CIM accelerator: WS-OCS scheduler, CLUSTERS CIM clusters of four
// CIM cores each, the nonlinear operator fusion controller, and the on-chip network.
//
// On-chip network (this design's simple realisation of the figure's OCN):
//   * input beats from DRAM are broadcast to the input-reuse buffers of all clusters, since
//     every macro multiplies the same activations with its own weight columns;
//   * weight beats go to the weight buffer of the one core named in the request;
//   * the scheduler's step stream is broadcast to all clusters (they run in lockstep);
//   * psum drain beats of the selected cluster are forwarded to the output stream;
//   * the fusion controller reaches the macro of core 0 in cluster 0.
// The scheduler and the fusion controller share that macro, so they are mutually
// exclusive: a GEMM command is not accepted while the controller is busy and the
// controller does not accept a group while a GEMM runs. A GEMM's weights overwrite the
// softmax LUT and vice versa (mode switches are counted); the LUT is (re)programmed with an
// OP_LOAD command of the scheduler whose weight block holds the coefficients.
// External parts (AXI bus, memory controller, DRAM, host) are outside: the top exposes the
// scheduler's DRAM request/response ports (response one cycle after the request) and a
// 512-bit output beat stream tagged with column block, cluster and token.
module rcw_cim_top
  import rcw_pkg::*;
#(
  parameter int CLUSTERS = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // GEMM / load command
  input  logic                   start,
  input  sched_op_e              op,
  input  cim_mode_e              mode,
  input  logic [10:0]            m_tokens,
  input  logic [3:0]             nb_blocks,
  input  logic [7:0]             kb_blocks,
  input  logic [15:0]            wbase,
  output logic                   busy,
  output logic                   done,
  // DRAM
  output logic                   dram_req_valid,
  output dram_req_t              dram_req,
  input  logic [BEAT_W-1:0]      dram_rsp_data,
  // results
  output logic                   out_valid,
  output logic [7:0]             out_kb,
  output logic [2:0]             out_cluster,
  output logic [9:0]             out_token,
  output logic [BEAT_W-1:0]      out_data,
  // nonlinear fusion
  input  logic                   nl_in_valid,
  output logic                   nl_in_ready,
  input  nl_op_e                 nl_in_op,
  input  logic [SM_LANES*16-1:0] nl_in_x,
  input  logic [SM_LANES*16-1:0] nl_in_gamma,
  output logic                   nl_out_valid,
  output logic [SM_LANES*16-1:0] nl_out_y,
  // event counters
  output logic [31:0]            cnt_in_beats,
  output logic [31:0]            cnt_w_beats,
  output logic [31:0]            cnt_out_beats,
  output logic [31:0]            cnt_rcw_rows,
  output logic [31:0]            cnt_exposed_rows,
  output logic [31:0]            cnt_reuse,
  output logic [31:0]            cnt_cycles,
  output logic [31:0]            cnt_psum_acc,
  output logic [31:0]            cnt_softmax,
  output logic [31:0]            cnt_rmsnorm,
  output logic [31:0]            cnt_rms_sync,
  output logic [31:0]            cnt_mode_switch
);
  logic nl_busy, sched_busy, sched_start;
  assign sched_start = start && !nl_busy;

  logic              in_wr_en;  logic [7:0] in_wr_line; logic [1:0] in_wr_quarter; logic [BEAT_W-1:0] in_wr_data;
  logic              wb_wr_en;  logic [2:0] wb_wr_cluster; logic [1:0] wb_wr_core; logic [3:0] wb_wr_row;
  logic [2:0]        wb_wr_beat; logic [BEAT_W-1:0] wb_wr_data;
  step_t             step;
  logic              ps_rd_en;  logic [2:0] ps_rd_cluster; logic [9:0] ps_rd_addr;

  ws_ocs_scheduler #(.CLUSTERS(CLUSTERS)) u_sched (
    .clk, .rst_n,
    .start(sched_start), .op, .mode, .m_tokens, .nb_blocks, .kb_blocks, .wbase,
    .busy(sched_busy), .done,
    .dram_req_valid, .dram_req, .dram_rsp_data,
    .in_wr_en, .in_wr_line, .in_wr_quarter, .in_wr_data,
    .wb_wr_en, .wb_wr_cluster, .wb_wr_core, .wb_wr_row, .wb_wr_beat, .wb_wr_data,
    .step,
    .ps_rd_en, .ps_rd_cluster, .ps_rd_addr,
    .out_valid, .out_kb, .out_cluster, .out_token,
    .cnt_in_beats, .cnt_w_beats, .cnt_out_beats, .cnt_rcw_rows, .cnt_exposed_rows, .cnt_reuse, .cnt_cycles
  );
  assign busy = sched_busy;

  // fusion controller <-> cluster 0, core 0
  logic                   mac_valid;
  logic [SM_LANES*16-1:0] mac_x;
  logic signed [15:0]     mac_grpmax;
  logic                   mac_res_valid;
  logic [15:0]            mac_exp [SM_LANES];
  logic [31:0]            mac_sum;
  logic                   nl_ready_i;

  nl_fusion_ctrl u_nl (
    .clk, .rst_n,
    .in_valid(nl_in_valid && !sched_busy), .in_ready(nl_ready_i), .in_op(nl_in_op),
    .in_x(nl_in_x), .in_gamma(nl_in_gamma),
    .out_valid(nl_out_valid), .out_y(nl_out_y),
    .mac_valid, .mac_x, .mac_grpmax, .mac_res_valid, .mac_exp, .mac_sum,
    .busy(nl_busy)
  );
  assign nl_in_ready = nl_ready_i && !sched_busy;

  logic [BEAT_W-1:0] ps_rd_data [CLUSTERS];
  logic              ps_acc_seen [CLUSTERS];

  for (genvar c = 0; c < CLUSTERS; c++) begin : g_cluster
    logic              x_valid;
    logic [15:0]       x_exp [SM_LANES];
    logic [31:0]       x_sum;
    logic              wr_seen;
    cim_cluster u_cluster (
      .clk, .rst_n,
      .step,
      .in_wr_en, .in_wr_line, .in_wr_quarter, .in_wr_data,
      .wb_wr_en(wb_wr_en && wb_wr_cluster == 3'(c)), .wb_wr_core, .wb_wr_row, .wb_wr_beat, .wb_wr_data,
      .ps_rd_en(ps_rd_en && ps_rd_cluster == 3'(c)), .ps_rd_addr, .ps_rd_data(ps_rd_data[c]),
      .ps_wr_seen(wr_seen), .ps_acc_seen(ps_acc_seen[c]),
      .ext_valid(c == 0 ? mac_valid : 1'b0), .ext_x(mac_x), .ext_grpmax(mac_grpmax),
      .ext_res_valid(x_valid), .ext_exp(x_exp), .ext_sum(x_sum)
    );
    if (c == 0) begin : g_ext
      assign mac_res_valid = x_valid;
      assign mac_exp       = x_exp;
      assign mac_sum       = x_sum;
    end
  end

  assign out_data = ps_rd_data[out_cluster];

  // top-level event counters
  logic last_user_nl;   // which function used the shared macro last
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_psum_acc <= '0; cnt_softmax <= '0; cnt_rmsnorm <= '0; cnt_rms_sync <= '0;
      cnt_mode_switch <= '0;
      last_user_nl <= 1'b0;
    end else begin
      if (ps_acc_seen[0]) cnt_psum_acc <= cnt_psum_acc + 32'd1;
      if (nl_in_valid && nl_in_ready) begin
        unique case (nl_in_op)
          NL_SOFTMAX:  cnt_softmax  <= cnt_softmax + 32'd1;
          NL_RMS_SYNC: cnt_rms_sync <= cnt_rms_sync + 32'd1;
          default:     cnt_rmsnorm  <= cnt_rmsnorm + 32'd1;
        endcase
      end
      if (mac_valid && !last_user_nl) begin
        last_user_nl    <= 1'b1;
        cnt_mode_switch <= cnt_mode_switch + 32'd1;
      end
      if (step.rq && last_user_nl) begin
        last_user_nl    <= 1'b0;
        cnt_mode_switch <= cnt_mode_switch + 32'd1;
      end
    end
  end

endmodule
