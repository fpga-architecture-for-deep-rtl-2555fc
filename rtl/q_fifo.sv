// Q-value buffer: a first-in first-out store of one entry per action of a state.
//
// The accelerators hold two of these, one for the present state s_t and one for the
// next state s_t+1. Entries are pushed as the feed-forward produces them (action 0
// first) and popped in the same order when the error generator reads both buffers
// in parallel. The read is first-word fall-through: dout shows the oldest entry
// while the buffer is not empty, and pop removes it at the clock edge. push and pop
// may be asserted together. flush empties the buffer (used at the start of every
// update). Pushing a full or popping an empty buffer is a protocol error and is
// checked by assertions. Depth and use follow the paper's "A sized FIFOs"; the
// interface is this design's choice.
module q_fifo #(
  parameter int unsigned DEPTH = 40,
  parameter int unsigned WIDTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       empty,
  output logic                       full
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !flush) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else if (flush) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      assert (!(push && full && !pop)) else $error("q_fifo: push while full");
      assert (!(pop && empty))         else $error("q_fifo: pop while empty");
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end
endmodule
