// seq_div: sequential unsigned restoring divider, one quotient bit per cycle.
// quo = num / den after NW cycles; `done` pulses for one cycle when quo is valid.
// den = 0 returns an all-ones quotient. Used by the nonlinear fusion controller for the
// softmax reciprocal 1/sum and the RMSNorm reciprocal 1/rms.
module seq_div #(
  parameter int NW = 48,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);
  logic [DW:0]         rem;
  logic [NW-1:0]       n_sh;
  logic [DW-1:0]       d_q;
  logic [$clog2(NW+1)-1:0] i;

  logic [DW:0] trial;
  assign trial = {rem[DW-1:0], n_sh[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; i <= '0; rem <= '0; n_sh <= '0; d_q <= '0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; rem <= '0; n_sh <= num; d_q <= den; i <= '0; quo <= '0;
      end else if (busy) begin
        n_sh <= n_sh << 1;
        if (trial >= {1'b0, d_q}) begin
          rem <= trial - {1'b0, d_q};
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= trial;
          quo <= {quo[NW-2:0], 1'b0};
        end
        i <= i + 1'b1;
        if (32'(i) == NW - 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
