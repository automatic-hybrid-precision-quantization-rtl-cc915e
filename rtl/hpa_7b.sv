// hpa_7b: PE 1 of the CPE ("z add", HPA-7b+), z_i = xhat_i + d_i.
//
// xhat is 1-2-2 (5 bits), d is 1-3-4 (8 bits) and z is 1-4-4 (9 bits). The
// two fractional bits of d below xhat's LSB need no addition, so they are
// copied to z[1:0]; the remaining bits are added in a 7-bit adder:
// {xhat[4],xhat[4],xhat[4:0]} + {d[7],d[7:2]} -> z[8:2]. The 7-bit sum
// cannot overflow (|xhat| <= 4, |d| <= 8, 7 bits at 1/4 LSB hold +-16).
// This bit arrangement follows the paper. Purely combinational.
module hpa_7b
  import hfamp_pkg::*;
(
  input  x_t xhat,   // xhat_i^(l), 1-2-2
  input  d_t d,      // d_i^(l),    1-3-4
  output z_t z       // z_i^(l),    1-4-4
);
  logic signed [6:0] op_x, op_d, sum;

  assign op_x = {xhat[4], xhat[4], xhat[4:0]};
  assign op_d = {d[7], d[7:2]};
  assign sum  = op_x + op_d;
  assign z    = {sum, d[1:0]};
endmodule
