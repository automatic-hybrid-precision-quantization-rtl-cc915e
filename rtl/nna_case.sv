// nna_case: PE 3 of the CPE ("F sel", NNA-CASE with MUX-Omega and MUX-Delta).
//
// The nearest and second-nearest 16-QAM (per real dimension) symbols of z
// depend only on which of six intervals z falls in, bounded at -2, -1, 0, 1
// and 2. The integral part of z, z[8:4] (floor of z), selects:
//   MUX-Omega {F1,F2,F3}: 111 z<-2, 110 [-2,-1), 010 [-1,0), 000 [0,1),
//                         100 [1,2), 101 z>=2
//   MUX-Delta {F4,F5}:    01 z<-1 (a_omega=-4), 11 [-1,1) (a_omega=0),
//                         10 z>=1 (a_omega=+4)
// The codes are the paper's; the {F4,F5} assignment follows its text (its
// interval drawing swaps 10 and 11). A value exactly on a boundary goes to
// the interval above; both neighbour pairs are then equally near.
// Purely combinational.
module nna_case
  import hfamp_pkg::*;
(
  input  z_t         z,
  output nna_flags_t flags
);
  logic signed [4:0] ip;   // integral part, floor(z)

  assign ip = z[8:4];

  // MUX-Omega
  always_comb begin
    if (ip <= -5'sd3)      {flags.f1, flags.f2, flags.f3} = 3'b111;
    else if (ip == -5'sd2) {flags.f1, flags.f2, flags.f3} = 3'b110;
    else if (ip == -5'sd1) {flags.f1, flags.f2, flags.f3} = 3'b010;
    else if (ip ==  5'sd0) {flags.f1, flags.f2, flags.f3} = 3'b000;
    else if (ip ==  5'sd1) {flags.f1, flags.f2, flags.f3} = 3'b100;
    else                   {flags.f1, flags.f2, flags.f3} = 3'b101;
  end

  // MUX-Delta
  always_comb begin
    if (ip <= -5'sd2)     flags.f45 = AW_NEG;
    else if (ip <= 5'sd0) flags.f45 = AW_ZERO;
    else                  flags.f45 = AW_POS;
  end
endmodule
