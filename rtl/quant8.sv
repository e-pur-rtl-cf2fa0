// quant8: linear quantiser of MWL partial outputs. The input is already
// scaled, a = beta * o_k with beta = (2^(n-1)-1)/alpha computed offline, and
// the output is q = round(a) as an 8-bit two's complement integer, one
// cycle after in_valid. Rounding is half away from zero; values beyond
// +-127 saturate. The comparison against +-127 uses the MU comparator
// (fp_cmp), and the rounding itself is integer shift/add/and logic on the
// significand. The 8-bit width follows the reference design; the rounding
// mode and saturation are this design's reading of it.
module quant8
  import epur_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  output logic        out_valid,
  output logic [7:0]  q
);
  logic [2:0] cmp_hi, cmp_lo;
  logic       v_hi, v_lo;
  logic [7:0] mag_q;
  logic       sign_q;

  fp_cmp #(.LAT(1)) u_hi (.clk, .rst_n, .in_valid, .a(a), .b(FP_Q127),
                          .out_valid(v_hi), .y(cmp_hi));
  fp_cmp #(.LAT(1)) u_lo (.clk, .rst_n, .in_valid, .a(a), .b(fp_neg_f(FP_Q127)),
                          .out_valid(v_lo), .y(cmp_lo));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mag_q  <= '0;
      sign_q <= 1'b0;
    end else if (in_valid) begin
      mag_q  <= fp_round_mag_f(a);
      sign_q <= a[31];
    end
  end

  always_comb begin
    if (cmp_hi[0])                          q = 8'sd127;    // a > 127
    else if (cmp_lo[2])                     q = -8'sd127;   // a < -127
    else if (mag_q > 8'd127)                q = sign_q ? -8'sd127 : 8'sd127;
    else                                    q = sign_q ? 8'(-mag_q) : mag_q;
  end
  assign out_valid = v_hi & v_lo;
endmodule
