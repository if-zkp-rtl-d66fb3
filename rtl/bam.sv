// bam: Bucket Array Manager. Runs the fill phase of the bucket (Pippenger)
// algorithm for one window: for every incoming pair (index s, point P) it
// performs B[s] = B[s] + P, using the shared point processor for the addition,
// and afterwards streams the non-empty buckets out. The same module, with a
// small BUCKET_BITS, is the RBAM inside the recursive stage.
//
// Buckets live in a 2^BUCKET_BITS-entry point memory with a valid bit per
// entry (cleared at reset and as each bucket is drained) and a pending bit per
// entry that is set while a sum for that bucket is inside the point processor.
//   * index 0 is dropped (it contributes nothing);
//   * an empty bucket takes the point directly, without an addition (bypass);
//   * a bucket whose sum is still in flight blocks the input (conflict stall)
//     until the result returns; a returning result also blocks a bypass write
//     in the same clock, so the memory needs one write port.
// The request tag's low bits carry the bucket index; the result is written
// back to that bucket. Drain (drain_start while idle and nothing in flight)
// visits indices 1 .. 2^BUCKET_BITS-1 at one per clock, presents each valid
// bucket on the out_* stream, clears it, and pulses drain_done at the end.
// The paper names the block and its function; the memory organisation,
// hazard handling and drain order are this design's choices.
module bam
  import zkp_pkg::*;
#(
  parameter int BUCKET_BITS = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // (index, point) input stream
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [BUCKET_BITS-1:0] in_idx,
  input  point_t                 in_point,
  // point processor request / result
  output logic                   req_valid,
  input  logic                   req_ready,
  output uda_req_t               req,
  input  logic                   rsp_valid,
  input  uda_rsp_t               rsp,
  // drain stream
  input  logic                   drain_start,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [BUCKET_BITS-1:0] out_idx,
  output point_t                 out_point,
  output logic                   drain_done,
  output logic                   busy,          // sums in flight
  output logic                   ev_conflict,   // input blocked by a pending bucket
  output logic                   ev_bypass      // point written to an empty bucket
);
  localparam int NB = 1 << BUCKET_BITS;

  point_t                 mem [NB];
  logic [NB-1:0]          vld, pend;
  logic                   draining;
  logic [BUCKET_BITS-1:0] dptr;
  logic [15:0]            inflight;

  logic [BUCKET_BITS-1:0] rsp_idx;
  logic                   zero_idx, do_bypass, do_req, d_adv, d_take;

  assign rsp_idx  = rsp.tag[BUCKET_BITS-1:0];
  assign zero_idx = (in_idx == '0);

  // fill side
  assign req_valid = in_valid && !draining && !zero_idx && !pend[in_idx] && vld[in_idx];
  assign req.p1    = mem[in_idx];
  assign req.p2    = in_point;
  assign req.tag   = tag_t'(in_idx);
  assign do_req    = req_valid && req_ready;
  assign do_bypass = in_valid && !draining && !zero_idx && !pend[in_idx] && !vld[in_idx] && !rsp_valid;
  assign in_ready  = !draining && (zero_idx || do_bypass || do_req);
  assign ev_conflict = in_valid && !draining && !zero_idx && pend[in_idx];
  assign ev_bypass   = do_bypass;

  // drain side
  assign out_valid = draining && vld[dptr];
  assign out_idx   = dptr;
  assign out_point = mem[dptr];
  assign d_take    = out_valid && out_ready;
  assign d_adv     = draining && (d_take || !vld[dptr]);
  assign busy      = (inflight != '0);

  always_ff @(posedge clk) begin
    if (rsp_valid)      mem[rsp_idx] <= rsp.sum;
    else if (do_bypass) mem[in_idx]  <= in_point;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld        <= '0;
      pend       <= '0;
      draining   <= 1'b0;
      dptr       <= '0;
      inflight   <= '0;
      drain_done <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      if (do_bypass) vld[in_idx] <= 1'b1;
      if (do_req)    pend[in_idx] <= 1'b1;
      if (rsp_valid) pend[rsp_idx] <= 1'b0;
      inflight <= inflight + 16'(do_req) - 16'(rsp_valid);
      if (drain_start && !draining) begin
        draining <= 1'b1;
        dptr     <= BUCKET_BITS'(1);
      end else if (d_adv) begin
        if (d_take) vld[dptr] <= 1'b0;
        dptr <= dptr + 1'b1;
        if (dptr == BUCKET_BITS'(NB - 1)) begin
          draining   <= 1'b0;
          drain_done <= 1'b1;
        end
      end
    end
  end

  // a result must belong to a bucket that is waiting for it
  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> pend[rsp_idx]);
  // draining starts only with nothing in flight
  assert property (@(posedge clk) disable iff (!rst_n) (drain_start && !draining) |-> !busy);
endmodule
