// psum_buffer: the 64 KB partial-sum buffer of a CIM cluster.
//
// One entry per token holds the column outputs of the cluster's four cores: 4 cores x 4
// columns x 32 bits = 512 bits, so ENTRIES = 1024 entries is 64 KB. In the WS-OCS
// dataflow the first N block of a column block overwrites the entry (acc_add = 0) and
// every later N block adds to it lane by lane (acc_add = 1); once all N blocks are done
// the entries are drained 512 bits per beat towards DRAM. The accumulate is a single-cycle
// read-modify-write; an entry is updated at most once per 16-cycle token pass, so there
// is no read-after-write hazard. Drain reads are registered (one cycle).
// The entry layout (lane 4*core + column) is this design's choice.
module psum_buffer
  import rcw_pkg::*;
#(
  parameter int ENTRIES_P = 1024
) (
  input  logic                            clk,
  input  logic                            acc_en,
  input  logic                            acc_add,
  input  logic [$clog2(ENTRIES_P)-1:0]    acc_addr,
  input  logic [BEAT_W-1:0]               acc_data,
  input  logic                            rd_en,
  input  logic [$clog2(ENTRIES_P)-1:0]    rd_addr,
  output logic [BEAT_W-1:0]               rd_data
);
  localparam int L = BEAT_W / 32;
  logic [BEAT_W-1:0] mem [ENTRIES_P];

  always_ff @(posedge clk) begin
    if (acc_en)
      for (int l = 0; l < L; l++)
        mem[acc_addr][32*l +: 32] <= (acc_add ? mem[acc_addr][32*l +: 32] : 32'd0) + acc_data[32*l +: 32];
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
