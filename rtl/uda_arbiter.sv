// uda_arbiter: shares one point processor between N_CLIENTS compute blocks
// (the "join" of the paper's shared add/double unit).
//
// Every clock at most one request is granted, to the lowest-numbered client
// that is asking (fixed priority). The granted request's tag has its client
// field, bits [CID_LSB +: CID_BITS], overwritten with the client number; when
// the result comes back that field routes it to the same client. The point
// processor never stalls (uda_ready tied high), so a grant is a completed
// transfer; when the arbiter itself feeds another arbiter, uda_ready carries
// that arbiter's grant back. Results are delivered without back-pressure: each client must accept any result it is
// owed in the clock it arrives. Grant is combinational, results pass straight
// through (no added latency).
// Sharing one unit among all blocks is the paper's; fixed priority, with the
// blocks nearest the end of the computation given the lowest numbers, is this
// design's choice.
module uda_arbiter
  import zkp_pkg::*;
#(
  parameter int N_CLIENTS = 4,
  parameter int CID_LSB   = LTAG_W,
  parameter int CID_BITS  = CID_W
) (
  input  logic                 req_valid [N_CLIENTS],
  output logic                 req_ready [N_CLIENTS],
  input  uda_req_t             req       [N_CLIENTS],
  output logic                 uda_valid,
  input  logic                 uda_ready,    // tie to 1 in front of the UDA itself
  output uda_req_t             uda_req,
  input  logic                 uda_rsp_valid,
  input  uda_rsp_t             uda_rsp,
  output logic                 rsp_valid [N_CLIENTS],
  output uda_rsp_t             rsp,
  output logic                 contention   // a request waited this clock
);
  // The grant is worked out from the requests alone; uda_ready only gates the
  // ready returned to the granted client, so no valid depends on a ready.
  logic [N_CLIENTS-1:0] grant;

  always_comb begin
    uda_valid  = 1'b0;
    uda_req    = req[0];
    contention = 1'b0;
    grant      = '0;
    for (int i = 0; i < N_CLIENTS; i++) begin
      if (req_valid[i]) begin
        if (!uda_valid) begin
          uda_valid = 1'b1;
          grant[i]  = 1'b1;
          uda_req   = req[i];
          uda_req.tag[CID_LSB +: CID_BITS] = CID_BITS'(i);
        end else begin
          contention = 1'b1;
        end
      end
    end
  end

  for (genvar i = 0; i < N_CLIENTS; i++) begin : g_ready
    assign req_ready[i] = grant[i] && uda_ready;
  end

  assign rsp = uda_rsp;
  always_comb
    for (int i = 0; i < N_CLIENTS; i++)
      rsp_valid[i] = uda_rsp_valid && (uda_rsp.tag[CID_LSB +: CID_BITS] == CID_BITS'(i));

  initial assert (N_CLIENTS <= (1 << CID_BITS))
    else $error("uda_arbiter: too many clients for the tag field");
endmodule
