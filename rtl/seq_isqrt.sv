// seq_isqrt: sequential integer square root, root = floor(sqrt(rad)), one root bit per cycle
// (digit-by-digit method, W/2 cycles). `done` pulses when root is valid. Used by the
// RMSNorm path of the nonlinear fusion controller.
module seq_isqrt #(
  parameter int W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   rad,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]   r_sh;
  logic [W/2+1:0] rem;
  logic [$clog2(W/2+1)-1:0] i;
  logic [W/2+3:0] trial, test;
  assign trial = {rem, r_sh[W-1 -: 2]};
  assign test  = {2'b00, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; r_sh <= '0; rem <= '0; root <= '0; i <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; r_sh <= rad; rem <= '0; root <= '0; i <= '0;
      end else if (busy) begin
        r_sh <= r_sh << 2;
        if (trial >= test) begin
          rem  <= (W/2+2)'(trial - test);
          root <= {root[W/2-2:0], 1'b1};
        end else begin
          rem  <= (W/2+2)'(trial);
          root <= {root[W/2-2:0], 1'b0};
        end
        i <= i + 1'b1;
        if (32'(i) == W / 2 - 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
