// mod_mul: fully pipelined modular multiplier, r = a * b mod MODULUS, in
// standard (integer, non-Montgomery) representation.
//
// A new operand pair is accepted every clock; the result appears LAT clocks
// later. The product is formed and reduced in the first stage and then carried
// through LAT-1 further registers, so the block has the latency of a deeply
// pipelined FPGA multiplier with table-based reduction without modelling its
// internal split. Inputs must be below MODULUS; the output is fully reduced.
// The use of standard form and a single multiplier per modular product follows
// the paper; the latency value (38) is this design's choice, picked so that the
// whole point-processor pipeline has the 270-clock latency the paper reports.
module mod_mul
  import zkp_pkg::*;
#(
  parameter fe_t MODULUS = P_BLS12_381,
  parameter int  LAT     = 38
) (
  input  logic clk,
  input  fe_t  a,
  input  fe_t  b,
  output fe_t  r
);
  logic [2*FW-1:0] prod;
  fe_t             red;

  always_comb begin
    prod = {{FW{1'b0}}, a} * {{FW{1'b0}}, b};
    red  = fe_t'(prod % {{FW{1'b0}}, MODULUS});
  end

  pipe_delay #(.WIDTH(FW), .DEPTH(LAT)) u_pipe (.clk(clk), .d(red), .q(r));

  initial assert (LAT >= 1) else $error("mod_mul: LAT must be at least 1");
endmodule
