// Reward table, indexed by state.
//
// Holds one Q7.8 reward per state of the environment; the accelerator reads the
// reward of the state reached, s_t+1, while it forms the target value. The paper
// shows a reward ROM addressed by the state; since it gives no contents, the table
// is written by the host through the wr_* port before learning starts (the reward
// function then stays fixed, as in a ROM). Writes are synchronous, reads are
// asynchronous. Addresses at or beyond NUM_STATES read as zero and are not written.
module reward_rom
  import ql_pkg::*;
#(
  parameter int unsigned NUM_STATES = 1800,
  localparam int unsigned SW = $clog2(NUM_STATES)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [SW-1:0] wr_addr,
  input  fx_t           wr_data,
  input  logic [SW-1:0] rd_addr,
  output fx_t           rd_data
);
  fx_t mem [NUM_STATES];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < NUM_STATES) mem[wr_addr] <= wr_data;
  end

  assign rd_data = (32'(rd_addr) < NUM_STATES) ? mem[rd_addr] : '0;
endmodule
