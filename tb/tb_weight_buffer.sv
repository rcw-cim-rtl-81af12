// tb_weight_buffer: writes random beats in random order and checks that every row reads
// back as the concatenation of its eight beats, one cycle after the read request.
`timescale 1ns/1ps
module tb_weight_buffer;
  import rcw_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_row = 0, rd_row = 0;
  logic [2:0] wr_beat = 0;
  logic [BEAT_W-1:0] wr_data = '0;
  logic [ROW_W-1:0] rd_data;
  weight_buffer dut (.*);

  int checks = 0, failures = 0;
  logic [BEAT_W-1:0] ref_m [ROWS][BEATS_PER_ROW];

  function automatic logic [BEAT_W-1:0] rnd_beat();
    logic [BEAT_W-1:0] v;
    for (int i = 0; i < BEAT_W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < ROWS * BEATS_PER_ROW; k++) begin
        int r, b;
        r = (k * 7 + pass) % ROWS; b = (k * 3) % BEATS_PER_ROW;
        r = $urandom_range(0, ROWS - 1); b = $urandom_range(0, BEATS_PER_ROW - 1);
        if (pass == 0) begin r = k / BEATS_PER_ROW; b = k % BEATS_PER_ROW; end
        @(negedge clk);
        wr_en = 1; wr_row = 4'(r); wr_beat = 3'(b); wr_data = rnd_beat();
        ref_m[r][b] = wr_data;
      end
      @(negedge clk);
      wr_en = 0;
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        rd_en = 1; rd_row = 4'(r);
        @(negedge clk);
        rd_en = 0;
        for (int b = 0; b < BEATS_PER_ROW; b++) begin
          checks++;
          if (rd_data[BEAT_W*b +: BEAT_W] !== ref_m[r][b]) begin failures++; $display("FAIL row %0d beat %0d", r, b); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
