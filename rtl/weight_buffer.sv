// weight_buffer: staging memory for the next weight block of one CIM core.
//
// The next block's word lines arrive from DRAM as 512-bit beats (8 beats per 4096-bit
// row) while the core still computes with the current block. During the last token pass
// of the current block the scheduler reads one row per cycle from here and the macro
// writes it into the same word line it is computing on (read-compute/write), so the update
// is hidden. The paper shows a weight buffer feeding the CIM writes but gives no size; one
// full macro image (ROWS_P rows) is this design's choice.
// Timing: writes take effect at the clock edge; reads are registered (data one cycle after
// rd_en).
module weight_buffer
  import rcw_pkg::*;
#(
  parameter int ROWS_P  = ROWS,
  parameter int BEATS_P = BEATS_PER_ROW
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(ROWS_P)-1:0]    wr_row,
  input  logic [$clog2(BEATS_P)-1:0]   wr_beat,
  input  logic [BEAT_W-1:0]            wr_data,
  input  logic                         rd_en,
  input  logic [$clog2(ROWS_P)-1:0]    rd_row,
  output logic [BEATS_P*BEAT_W-1:0]    rd_data
);
  logic [BEAT_W-1:0] mem [ROWS_P][BEATS_P];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_beat] <= wr_data;
    if (rd_en)
      for (int b = 0; b < BEATS_P; b++) rd_data[BEAT_W*b +: BEAT_W] <= mem[rd_row][b];
  end
endmodule
