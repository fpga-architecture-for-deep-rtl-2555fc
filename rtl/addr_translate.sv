// Address translation block ("AT"): turns an accumulator net value into the address
// of an activation look-up table.
//
// The tables hold 256 samples of a function of net over [-8, 8), one per 1/16.
// The net (Q23.8) is shifted right by four bits and clamped to [-128, 127]; adding
// 128 gives the address. Nets beyond the table saturate to its first or last entry,
// which for the sigmoid and its derivative is already within one LSB of the limit.
// The block is purely combinational. The paper names this block between the
// accumulator and each ROM; its clamp-and-shift insides are this design's choice.
module addr_translate
  import ql_pkg::*;
(
  input  acc_t              net,
  output logic [LUT_AW-1:0] addr,
  output logic              clipped   // net lay outside the table's range
);
  always_comb begin
    addr    = lut_addr(net);
    clipped = (net >= acc_t'(128 <<< LUT_SHIFT)) || (net < -acc_t'(128 <<< LUT_SHIFT));
  end
endmodule
