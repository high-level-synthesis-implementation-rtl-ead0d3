// c_fifo: one FIFO of the C FIFO system, a circular buffer of DEPTH words.
//
// push writes din at the tail; dout always shows the head word
// (combinational read, like a small MLAB memory) and pop advances past it.
// Push and pop may happen in the same cycle. count reports the occupancy.
// Pointers and count reset to zero; the words themselves are not reset.
// Assertions flag a push into a full FIFO and a pop from an empty one.
module c_fifo
  import mmm_pkg::*;
#(
  parameter int DEPTH = 576
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  fp32_t                      din,
  input  logic                       pop,
  output fp32_t                      dout,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  fp32_t         mem [DEPTH];
  logic [AW-1:0] wp, rp;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) if (push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  assign dout = mem[rp];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push && !pop |-> int'(count) < DEPTH) else $error("c_fifo: push into full FIFO");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    pop |-> count != 0) else $error("c_fifo: pop from empty FIFO");
endmodule
