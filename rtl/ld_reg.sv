// ld_reg -- load-enable register used for every register array of the datapath.
//
// The datapath separates its functional units with five arrays of registers: regC
// (one 16-bit character), reg3C and reg4C (three- and four-character stems) and reg
// (plain bit vectors of different widths).  They differ only in width, so one
// parameterised register serves them all; the instance names in the datapath follow
// the paper's names.
//
// Interface: q takes d on the rising edge of clk when ld is high and holds otherwise.
// Reset is synchronous, active high, and clears q to RESET_VALUE.  The paper leaves
// reset behaviour open; a synchronous clear is this design's choice.
module ld_reg #(
  parameter int unsigned           WIDTH       = 16,
  parameter logic [WIDTH-1:0]      RESET_VALUE = '0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             ld,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  always_ff @(posedge clk) begin
    if (rst)     q <= RESET_VALUE;
    else if (ld) q <= d;
  end

endmodule
