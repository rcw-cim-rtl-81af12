// input_reuse_buffer: the 64 KB input buffer of a CIM cluster.
//
// It holds LINES input lines of 2048 bits (256 INT8 activations, one word line's worth for
// a macro). Lines are written from the on-chip network as 512-bit quarters and read whole
// into the input line buffers of the cluster's four cores, which all see the same line.
// In the WS-OCS dataflow a tile of tokens stays resident here and is reused for every
// column block, so only the remaining tokens are fetched again from DRAM; which slots
// are resident is decided by the scheduler.
// Size: 256 x 2048 bit = 64 KB as in the paper. Widths 512 (cluster port) and 2048 (line
// buffer port) are the figure's numbers. Reads are registered (one cycle).
module input_reuse_buffer
  import rcw_pkg::*;
#(
  parameter int LINES_P = 256
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(LINES_P)-1:0]    wr_line,
  input  logic [1:0]                    wr_quarter,
  input  logic [BEAT_W-1:0]             wr_data,
  input  logic                          rd_en,
  input  logic [$clog2(LINES_P)-1:0]    rd_line,
  output logic [LINE_W-1:0]             rd_data
);
  logic [BEAT_W-1:0] mem [LINES_P][BEATS_PER_LINE];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_line][wr_quarter] <= wr_data;
    if (rd_en)
      for (int q = 0; q < BEATS_PER_LINE; q++) rd_data[BEAT_W*q +: BEAT_W] <= mem[rd_line][q];
  end
endmodule
