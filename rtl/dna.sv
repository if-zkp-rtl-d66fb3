// dna: Double-and-Add unit, the last stage of the MSM. It first collects the
// recursive-stage buckets by bit position, then runs one double-and-add pass
// over all bit positions to produce the single result point.
//
// Collection: an IS-RBAM bucket (window j, RBAM r, digit c, point R) stands
// for c * 2^(K*j + RB*r) * R. For every set bit t of c the unit adds R into
// collector C[K*j + RB*r + t] (one bit per clock), so that afterwards
//   MSM = sum_u 2^u * C[u],  u = 0 .. NUM_WINDOWS*K - 1.
// Collectors use the same empty-bucket bypass and pending-bit conflict stall
// as the bucket managers. Collectors are emptied by `clear` at the start of
// every MSM. Windows at or beyond NUM_WINDOWS are dropped.
// Final pass (final_start, with busy low): Horner's rule from the top bit
// position down, A = 2A (skipped while A is still O) then A = A + C[u] (a copy
// while A is O, skipped when C[u] is empty). Each step waits for its result
// from the point processor, so the pass is strictly sequential: about two
// point-processor latencies per bit position. The result and a done pulse
// follow; the result is O if nothing was ever collected.
// Tags: collector index in the low bits; bit LTAG_W-1 marks the accumulator.
// The paper describes the unit as a bit collector for the recursive stage
// followed by double-and-add combination; the organisation of the collector
// memory and the single Horner pass are this design's choices.
module dna
  import zkp_pkg::*;
#(
  parameter int WINDOW_BITS = 12,
  parameter int RBAM_BITS   = 3,
  parameter int NUM_WINDOWS = 32,
  parameter int RID_W       = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  // collection stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [7:0]           in_window,
  input  logic [RID_W-1:0]     in_rbam,
  input  logic [RBAM_BITS-1:0] in_digit,
  input  point_t               in_point,
  // final pass
  input  logic                 final_start,
  output logic                 final_done,
  output point_t               result,
  // point processor
  output logic                 req_valid,
  input  logic                 req_ready,
  output uda_req_t             req,
  input  logic                 rsp_valid,
  input  uda_rsp_t             rsp,
  output logic                 busy,
  output logic                 ev_conflict,
  output logic                 ev_bypass,
  output logic                 ev_double     // a Horner doubling was issued
);
  localparam int NPOS = NUM_WINDOWS * WINDOW_BITS;
  localparam int PB   = $clog2(NPOS);

  point_t            cmem [NPOS];
  logic [NPOS-1:0]   vld, pend;
  logic [15:0]       inflight;

  // ---------------- collection ----------------
  logic [$clog2(RBAM_BITS+1)-1:0] tbit;
  logic              bit_set, last_bit, in_range, c_bypass, c_req, c_adv;
  logic [PB-1:0]     pos;

  assign in_range = (int'(in_window) < NUM_WINDOWS);
  assign bit_set  = in_digit[tbit];
  assign last_bit = (tbit == ($bits(tbit))'(RBAM_BITS - 1));
  assign pos      = PB'(int'(in_window) * WINDOW_BITS + int'(in_rbam) * RBAM_BITS + int'(tbit));

  // ---------------- final pass ----------------
  typedef enum logic [2:0] {F_IDLE, F_DBL, F_DBL_W, F_ADD, F_ADD_W, F_NEXT} fstate_e;
  fstate_e       fst;
  logic [PB-1:0] hpos;
  point_t        acc;
  logic          acc_vld;

  always_comb begin
    c_bypass = 1'b0;
    c_req    = 1'b0;
    req_valid = 1'b0;
    req       = '{p1: cmem[pos], p2: in_point, tag: tag_t'(pos)};
    if (fst == F_DBL) begin
      req_valid = 1'b1;
      req       = '{p1: acc, p2: acc, tag: tag_t'(1 << (LTAG_W - 1))};
    end else if (fst == F_ADD && acc_vld && vld[hpos]) begin
      req_valid = 1'b1;
      req       = '{p1: acc, p2: cmem[hpos], tag: tag_t'(1 << (LTAG_W - 1))};
    end else if (fst == F_IDLE && in_valid && in_range && bit_set && !pend[pos]) begin
      if (vld[pos]) begin
        req_valid = 1'b1;
        c_req     = req_ready;
      end else begin
        c_bypass  = !rsp_valid;
      end
    end
    c_adv    = (fst == F_IDLE) && in_valid &&
               (!in_range || !bit_set || c_req || c_bypass);
    in_ready = c_adv && (last_bit || !in_range);
  end

  assign ev_conflict = (fst == F_IDLE) && in_valid && in_range && bit_set && pend[pos];
  assign ev_bypass   = c_bypass;
  assign ev_double   = (fst == F_DBL) && req_ready;
  assign busy        = (inflight != '0);

  logic          rsp_acc;
  logic [PB-1:0] rsp_pos;
  assign rsp_acc = rsp.tag[LTAG_W-1];
  assign rsp_pos = rsp.tag[PB-1:0];

  always_ff @(posedge clk) begin
    if (rsp_valid && !rsp_acc) cmem[rsp_pos] <= rsp.sum;
    else if (c_bypass)         cmem[pos]     <= in_point;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld        <= '0;
      pend       <= '0;
      inflight   <= '0;
      tbit       <= '0;
      fst        <= F_IDLE;
      hpos       <= '0;
      acc        <= POINT_INF;
      acc_vld    <= 1'b0;
      final_done <= 1'b0;
      result     <= POINT_INF;
    end else begin
      final_done <= 1'b0;
      if (c_bypass) vld[pos] <= 1'b1;
      if (c_req)    pend[pos] <= 1'b1;
      if (rsp_valid && !rsp_acc) pend[rsp_pos] <= 1'b0;
      inflight <= inflight + 16'(c_req) - 16'(rsp_valid && !rsp_acc);
      if (c_adv) tbit <= (last_bit || !in_range) ? '0 : tbit + 1'b1;
      if (clear) vld <= '0;

      unique case (fst)
        F_IDLE: if (final_start) begin
          hpos    <= PB'(NPOS - 1);
          acc     <= POINT_INF;
          acc_vld <= 1'b0;
          fst     <= F_ADD;                 // nothing to double at the top
        end
        F_DBL:   if (req_ready) fst <= F_DBL_W;
        F_DBL_W: if (rsp_valid && rsp_acc) begin acc <= rsp.sum; fst <= F_ADD; end
        F_ADD: begin
          if (!vld[hpos])      fst <= F_NEXT;
          else if (!acc_vld) begin
            acc     <= cmem[hpos];
            acc_vld <= 1'b1;
            fst     <= F_NEXT;
          end else if (req_ready) fst <= F_ADD_W;
        end
        F_ADD_W: if (rsp_valid && rsp_acc) begin acc <= rsp.sum; fst <= F_NEXT; end
        F_NEXT: begin
          if (hpos == '0) begin
            fst        <= F_IDLE;
            final_done <= 1'b1;
            result     <= acc_vld ? acc : POINT_INF;
          end else begin
            hpos <= hpos - 1'b1;
            fst  <= acc_vld ? F_DBL : F_ADD;
          end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (rsp_valid && !rsp_acc) |-> pend[rsp_pos]);
  assert property (@(posedge clk) disable iff (!rst_n) (final_start && fst == F_IDLE) |-> !busy);
endmodule
