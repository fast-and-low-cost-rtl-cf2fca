// cfglut5 -- behaviour of a dynamically reconfigurable five-input LUT.
//
// A 32-bit truth table held in a shift register. While ce is high, each rising
// clk edge shifts cdi into entry 0 and moves every entry up by one; entry 31
// leaves on cdo, so several of these can be cascaded into one serial chain.
// After 32 enabled edges the first bit sent sits in entry 31. The output o6 is
// the table entry addressed by i (i[0] is the least significant address bit)
// and is combinational in i; a table change is seen right after the clock edge.
//
// The published multiplier uses the AMD-Xilinx CFGLUT5 primitive for this; this
// module is a synthesizable description of the same load-and-read behaviour so
// the design can be simulated and built without the vendor library. The
// primitive's second output O5 is not used by the multiplier and is left out.
// The initial table is all zeros (parameter INIT).
module cfglut5 #(
  parameter logic [31:0] INIT = 32'h0
) (
  input  logic       clk,
  input  logic       ce,
  input  logic       cdi,
  input  logic [4:0] i,
  output logic       o6,
  output logic       cdo
);

  logic [31:0] table_q = INIT;

  always_ff @(posedge clk)
    if (ce) table_q <= {table_q[30:0], cdi};

  assign o6  = table_q[i];
  assign cdo = table_q[31];

endmodule
