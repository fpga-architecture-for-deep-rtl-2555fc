// Sigmoid activation table f(net) = 1 / (1 + exp(-net)).
//
// 256 entries, addressed by addr_translate. Entry i holds
// round(256 * f(((i - 128) + 0.5) / 16)), i.e. the sigmoid at the centre of the
// 1/16-wide net bin, in Q7.8 (0x0000 .. 0x0100). The table is computed at
// elaboration time by a constant function, so no data file is needed and synthesis
// turns it into a ROM. The read is asynchronous, as in a distributed-RAM ROM, so the
// activation is ready in the cycle that presents the address. A pre-computed sigmoid
// ROM is the paper's method; its size and resolution are this design's choice.
module sigmoid_rom
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
      t[i] = DW'($rtoi($floor(256.0 * sg + 0.5)));
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  assign data = fx_t'(TABLE[addr]);
endmodule
