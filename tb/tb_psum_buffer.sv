// tb_psum_buffer: overwrites and accumulates random 32-bit lanes into random entries, as
// the N-block passes of the WS-OCS dataflow do, and checks every drained entry against a
// reference sum (wrap-around 32-bit arithmetic per lane).
`timescale 1ns/1ps
module tb_psum_buffer;
  import rcw_pkg::*;
  localparam int E = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_en = 0, acc_add = 0, rd_en = 0;
  logic [9:0] acc_addr = 0, rd_addr = 0;
  logic [BEAT_W-1:0] acc_data = '0;
  logic [BEAT_W-1:0] rd_data;
  psum_buffer dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] ref_m [E][16];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic acc(input int a, input bit add);
    @(negedge clk);
    acc_en = 1; acc_add = add; acc_addr = 10'(a);
    for (int l = 0; l < 16; l++) begin
      acc_data[32*l +: 32] = $urandom;
      ref_m[a][l] = (add ? ref_m[a][l] : 32'd0) + acc_data[32*l +: 32];
    end
  endtask

  initial begin
    for (int a = 0; a < E; a++) acc(a, 0);
    for (int k = 0; k < 3000; k++) acc($urandom_range(0, E - 1), ($urandom_range(0, 3) != 0));
    // back-to-back accumulation into one entry
    for (int k = 0; k < 5; k++) acc(17, 1);
    @(negedge clk);
    acc_en = 0;
    for (int a = 0; a < E; a++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 10'(a);
      @(negedge clk);
      rd_en = 0;
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (rd_data[32*l +: 32] !== ref_m[a][l]) begin failures++; $display("FAIL entry %0d lane %0d", a, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
