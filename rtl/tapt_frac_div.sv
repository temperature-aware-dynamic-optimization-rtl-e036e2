// tapt_frac_div: sequential fixed-point divider for the phase signature.
//
// Computes q = floor(num * 256 / den), i.e. the ratio num/den in units of 1/256,
// as an 11-bit result (0..2047, so ratios up to almost 8). A ratio of 8 or more
// saturates to 2047, and den = 0 gives 0. It is a restoring divider producing one
// quotient bit per cycle: start loads the operands, and done pulses 12 cycles
// later with q valid (q holds until the next start), whatever the operands, so
// several dividers started together finish together.
module tapt_frac_div (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num,
  input  logic [31:0] den,
  output logic        done,
  output logic [10:0] q
);
  logic [42:0] rem_q;
  logic [31:0] den_q;
  logic [3:0]  k_q;
  logic        busy_q, sat_q;

  logic [42:0] dsh;
  assign dsh = {11'd0, den_q} << k_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q  <= '0;
      den_q  <= '0;
      k_q    <= '0;
      busy_q <= 1'b0;
      sat_q  <= 1'b0;
      done   <= 1'b0;
      q      <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem_q  <= {3'd0, num, 8'd0};
        den_q  <= den;
        k_q    <= 4'd10;
        busy_q <= 1'b1;
        sat_q  <= ({3'd0, num, 8'd0} >= ({11'd0, den} << 11));
        q      <= '0;
      end else if (busy_q) begin
        if (rem_q >= dsh) begin
          rem_q  <= rem_q - dsh;
          q[k_q] <= 1'b1;
        end
        if (k_q == 4'd0) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
          if (den_q == '0)    q <= '0;
          else if (sat_q)     q <= 11'h7ff;
        end else begin
          k_q <= k_q - 4'd1;
        end
      end
    end
  end
endmodule
