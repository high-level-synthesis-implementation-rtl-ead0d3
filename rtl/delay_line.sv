// delay_line: DEPTH-stage register chain with a common enable.
//
// Output equals the input DEPTH enabled cycles earlier; DEPTH = 0 is a plain
// wire. Used for the input skew and output de-skew of the systolic array, so
// that the wavefront of one tile reaches PE(i,j,L) at cycle i+j+L*LDOT. Data
// registers carry no reset.
module delay_line #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 1
) (
  input  logic clk,
  input  logic en,
  input  T     d,
  output T     q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    T sr [DEPTH];
    always_ff @(posedge clk) begin
      if (en) begin
        sr[0] <= d;
        for (int s = 1; s < DEPTH; s++) sr[s] <= sr[s-1];
      end
    end
    assign q = sr[DEPTH-1];
  end
endmodule
