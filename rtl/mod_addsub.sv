// mod_addsub: modular adder, subtractor or shift-by-1 (doubler), selected at
// build time by OP. Computes (a+b), (a-b) or (2a) modulo MODULUS with one
// conditional correction, which is enough because both inputs are already
// reduced. One result per clock, latency LAT clocks (default 1).
// The set of operations (add, subtract, shift-by-1) is the paper's; the paper
// lets these units see inputs below 2p and skips the final reduction, whereas
// this design keeps every value below p so that results can be compared and
// tested for zero directly.
module mod_addsub
  import zkp_pkg::*;
#(
  parameter fe_t  MODULUS = P_BLS12_381,
  parameter fop_e OP      = OP_ADD,
  parameter int   LAT     = 1
) (
  input  logic clk,
  input  fe_t  a,
  input  fe_t  b,
  output fe_t  r
);
  logic [FW:0] s, t;
  fe_t         res;

  always_comb begin
    unique case (OP)
      OP_ADD:  s = {1'b0, a} + {1'b0, b};
      OP_DBL:  s = {a, 1'b0};
      default: s = {1'b0, a} - {1'b0, b};   // OP_SUB: borrow shows in s[FW]
    endcase
    if (OP == OP_SUB) begin
      t   = s + {1'b0, MODULUS};
      res = s[FW] ? t[FW-1:0] : s[FW-1:0];
    end else begin
      t   = s - {1'b0, MODULUS};
      res = t[FW] ? s[FW-1:0] : t[FW-1:0];   // no borrow: s >= p
    end
  end

  pipe_delay #(.WIDTH(FW), .DEPTH(LAT)) u_pipe (.clk(clk), .d(res), .q(r));
endmodule
