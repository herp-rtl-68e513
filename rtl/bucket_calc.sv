// bucket_calc: bucket index of a query spectrum from its precursor m/z and charge (Eq. 1).
//
//   bucket = floor( (m/z - m_q) * C / d_c ),  m_q = 1.00794, d_c = 1.0005079
//
// m/z arrives as unsigned fixed point with 16 fraction bits (Q16.16). The division by d_c
// is a multiplication by round(2^24 / d_c) = 16768699 and m_q is round(1.00794 * 2^16) =
// 66056; the product is shifted right by 40 bits, which floors it. An m/z below m_q gives 0
// and an index above the bucket-ID range saturates. The formula and constants are the
// paper's; the fixed-point formats and the purely combinational form are this design's.
// The fixed-point result differs from the real-valued floor only when the exact quotient
// lies within about 1e-6 of an integer.
module bucket_calc
  import herp_pkg::*;
#(
  parameter int unsigned MZ_W = 32,   // Q16.16 m/z
  parameter int unsigned CH_W = 3     // precursor charge
) (
  input  logic [MZ_W-1:0] mz,
  input  logic [CH_W-1:0] charge,
  output bucket_t         bucket
);
  localparam logic [MZ_W-1:0] MQ     = MZ_W'(66056);      // 1.00794 in Q16.16
  localparam logic [24:0]     INV_DC = 25'd16768699;      // 2^24 / 1.0005079
  localparam int unsigned     PW     = MZ_W + CH_W + 25;

  logic [PW-1:0] prod;
  logic [PW-1:0] q;
  always_comb begin
    prod = '0;
    if (mz > MQ) prod = PW'(mz - MQ) * PW'(charge) * PW'(INV_DC);
    q = prod >> 40;
    bucket = (q > PW'({BUCKET_W{1'b1}})) ? '1 : BUCKET_W'(q);
  end
endmodule
