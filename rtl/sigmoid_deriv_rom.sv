// Sigmoid-derivative table f'(net) = f(net) * (1 - f(net)), used by back-propagation.
//
// Same addressing as sigmoid_rom (256 bins of 1/16 over [-8, 8)); entry i holds
// round(256 * s * (1 - s)) with s the sigmoid at the bin centre, in Q7.8 (at most
// 0x0040 = 0.25). Computed at elaboration time by a constant function; asynchronous
// read. Storing the derivative in a pre-computed ROM follows the paper; its size is
// this design's choice.
module sigmoid_deriv_rom
  import ql_pkg::*;
(
  input  logic [LUT_AW-1:0] addr,
  output fx_t               data
);
  typedef logic [DW-1:0] table_t [2**LUT_AW];

  function automatic table_t make_table();
    table_t t;
    real xc, sg;
    for (int i = 0; i < 2**LUT_AW; i++) begin
      xc = ((i - 128) + 0.5) / 16.0;
      sg = 1.0 / (1.0 + $exp(-xc));
      t[i] = DW'($rtoi($floor(256.0 * sg * (1.0 - sg) + 0.5)));
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  assign data = fx_t'(TABLE[addr]);
endmodule
