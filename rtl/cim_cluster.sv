// cim_cluster: one CIM cluster = four CIM cores, a 64 KB input-reuse buffer and a 64 KB
// partial-sum buffer, joined by the cluster's local on-chip network.
//
// Every core sees the same input line (the local network broadcasts the 2048-bit read of
// the input-reuse buffer) and holds different weight columns, so the four cores work in
// lockstep on the scheduler's step stream. When a token pass ends, the four cores' column
// results arrive in the same cycle and are written as one 512-bit psum entry (lane
// 4*core + column), overwritten for the first N block and accumulated for later ones.
// Weight beats from the top-level network are steered to one core's weight buffer.
// Core 0 also exposes the macro port used by the nonlinear fusion controller.
// Timing: a step's line is read from the input buffer in the step's cycle, reaches the
// cores one cycle later; psum drain reads are registered (one cycle).
module cim_cluster
  import rcw_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  step_t                  step,
  // input-reuse buffer writes (broadcast from the network)
  input  logic                   in_wr_en,
  input  logic [7:0]             in_wr_line,
  input  logic [1:0]             in_wr_quarter,
  input  logic [BEAT_W-1:0]      in_wr_data,
  // weight-buffer writes
  input  logic                   wb_wr_en,
  input  logic [1:0]             wb_wr_core,
  input  logic [3:0]             wb_wr_row,
  input  logic [2:0]             wb_wr_beat,
  input  logic [BEAT_W-1:0]      wb_wr_data,
  // psum drain
  input  logic                   ps_rd_en,
  input  logic [9:0]             ps_rd_addr,
  output logic [BEAT_W-1:0]      ps_rd_data,
  output logic                   ps_wr_seen,   // a token result was written this cycle
  output logic                   ps_acc_seen,  // ... and it was an accumulation
  // fusion-controller macro port (core 0)
  input  logic                   ext_valid,
  input  logic [SM_LANES*16-1:0] ext_x,
  input  logic signed [15:0]     ext_grpmax,
  output logic                   ext_res_valid,
  output logic [15:0]            ext_exp [SM_LANES],
  output logic [31:0]            ext_sum
);
  localparam int CORES = 4;

  logic [LINE_W-1:0] line_data;
  input_reuse_buffer u_ibuf (
    .clk,
    .wr_en(in_wr_en), .wr_line(in_wr_line), .wr_quarter(in_wr_quarter), .wr_data(in_wr_data),
    .rd_en(step.ld), .rd_line(step.ld_line), .rd_data(line_data)
  );

  step_t step_d1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) step_d1 <= '0;
    else        step_d1 <= step;
  end

  logic        c_valid [CORES];
  logic [9:0]  c_token [CORES];
  logic        c_add   [CORES];
  logic [31:0] c_cols  [CORES][COLS_MAX];
  logic        x_valid [CORES];
  logic [15:0] x_exp   [CORES][SM_LANES];
  logic [31:0] x_sum   [CORES];

  for (genvar k = 0; k < CORES; k++) begin : g_core
    cim_core u_core (
      .clk, .rst_n,
      .step_d1, .line_data,
      .wb_wr_en(wb_wr_en && wb_wr_core == 2'(k)), .wb_wr_row, .wb_wr_beat, .wb_wr_data,
      .out_valid(c_valid[k]), .out_token(c_token[k]), .out_add(c_add[k]), .out_cols(c_cols[k]),
      .ext_valid(k == 0 ? ext_valid : 1'b0), .ext_x, .ext_grpmax,
      .ext_res_valid(x_valid[k]), .ext_exp(x_exp[k]), .ext_sum(x_sum[k])
    );
  end

  assign ext_res_valid = x_valid[0];
  assign ext_exp       = x_exp[0];
  assign ext_sum       = x_sum[0];

  logic [BEAT_W-1:0] ps_data;
  always_comb
    for (int k = 0; k < CORES; k++)
      for (int c = 0; c < COLS_MAX; c++)
        ps_data[32*(COLS_MAX*k + c) +: 32] = c_cols[k][c];

  psum_buffer u_psum (
    .clk,
    .acc_en(c_valid[0]), .acc_add(c_add[0]), .acc_addr(c_token[0]), .acc_data(ps_data),
    .rd_en(ps_rd_en), .rd_addr(ps_rd_addr), .rd_data(ps_rd_data)
  );

  assign ps_wr_seen  = c_valid[0];
  assign ps_acc_seen = c_valid[0] && c_add[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      c_valid[0] == c_valid[1] && c_valid[0] == c_valid[2] && c_valid[0] == c_valid[3])
    else $error("cores of a cluster out of lockstep");

endmodule
