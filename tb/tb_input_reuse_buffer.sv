// tb_input_reuse_buffer: fills all 256 lines with random quarters, overwrites some, and
// checks each 2048-bit line read (registered, one cycle) against a reference copy.
`timescale 1ns/1ps
module tb_input_reuse_buffer;
  import rcw_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [7:0] wr_line = 0, rd_line = 0;
  logic [1:0] wr_quarter = 0;
  logic [BEAT_W-1:0] wr_data = '0;
  logic [LINE_W-1:0] rd_data;
  input_reuse_buffer dut (.*);

  int checks = 0, failures = 0;
  logic [BEAT_W-1:0] ref_m [256][4];

  function automatic logic [BEAT_W-1:0] rnd_beat();
    logic [BEAT_W-1:0] v;
    for (int i = 0; i < BEAT_W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic wr(input int l, input int q);
    @(negedge clk);
    wr_en = 1; wr_line = 8'(l); wr_quarter = 2'(q); wr_data = rnd_beat();
    ref_m[l][q] = wr_data;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 256; l++) for (int q = 0; q < 4; q++) wr(l, q);
    for (int k = 0; k < 200; k++) wr($urandom_range(0, 255), $urandom_range(0, 3));
    @(negedge clk);
    wr_en = 0;
    for (int k = 0; k < 300; k++) begin
      int l;
      l = (k < 256) ? k : $urandom_range(0, 255);
      @(negedge clk);
      rd_en = 1; rd_line = 8'(l);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== {ref_m[l][3], ref_m[l][2], ref_m[l][1], ref_m[l][0]}) begin
        failures++; $display("FAIL line %0d", l);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
