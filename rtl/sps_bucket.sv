// sps_bucket: the second scalar-point stream. After a fill pass it turns the
// buckets of each BAM into a new (scalar, point) stream for the recursive
// stage: the bucket index is the scalar and the bucket content the point.
//
// On start it handles BAM 0, 1, ... NUM_BAM-1 in turn: it starts that BAM's
// drain and forwards its stream into the IS-RBAM (the join of the BAM
// outputs), waits for the drain to end and for the IS-RBAM to have no sums in
// flight, then starts the IS-RBAM drain towards the double-and-add unit and
// presents on `window` the window number of that BAM (pass*NUM_BAM + b), which
// the double-and-add unit uses to place the results. When the IS-RBAM drain
// has finished it moves to the next BAM, and pulses done after the last.
// The paper shows this second stream between the BAMs and the IS-RBAM; its
// sequencing is this design's choice.
module sps_bucket
  import zkp_pkg::*;
#(
  parameter int NUM_BAM     = 2,
  parameter int WINDOW_BITS = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [7:0]             pass,
  output logic                   done,
  output logic [7:0]             window,
  // BAM drain side
  output logic                   bam_drain_start [NUM_BAM],
  input  logic                   bam_out_valid   [NUM_BAM],
  output logic                   bam_out_ready   [NUM_BAM],
  input  logic [WINDOW_BITS-1:0] bam_out_idx     [NUM_BAM],
  input  point_t                 bam_out_point   [NUM_BAM],
  input  logic                   bam_drain_done  [NUM_BAM],
  // IS-RBAM side
  output logic                   rb_valid,
  input  logic                   rb_ready,
  output logic [WINDOW_BITS-1:0] rb_idx,
  output point_t                 rb_point,
  input  logic                   rb_busy,
  output logic                   rb_drain_start,
  input  logic                   rb_drain_done
);
  localparam int BW = (NUM_BAM > 1) ? $clog2(NUM_BAM) : 1;

  typedef enum logic [2:0] {S_IDLE, S_BSTART, S_BDRAIN, S_SETTLE, S_RSTART, S_RDRAIN} state_e;
  state_e        st;
  logic [BW-1:0] sel;
  logic [1:0]    settle;

  assign window = 8'(int'(pass) * NUM_BAM + int'(sel));

  always_comb begin
    for (int b = 0; b < NUM_BAM; b++) begin
      bam_drain_start[b] = (st == S_BSTART) && (sel == BW'(b));
      bam_out_ready[b]   = (st == S_BDRAIN) && (sel == BW'(b)) && rb_ready;
    end
    rb_valid       = (st == S_BDRAIN) && bam_out_valid[sel];
    rb_idx         = bam_out_idx[sel];
    rb_point       = bam_out_point[sel];
    rb_drain_start = (st == S_RSTART);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      sel    <= '0;
      settle <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE:   if (start) begin sel <= '0; st <= S_BSTART; end
        S_BSTART: st <= S_BDRAIN;
        S_BDRAIN: if (bam_drain_done[sel]) begin settle <= 2'd3; st <= S_SETTLE; end
        S_SETTLE: if (settle != 0) settle <= settle - 1'b1;
                  else if (!rb_busy) st <= S_RSTART;
        S_RSTART: st <= S_RDRAIN;
        S_RDRAIN: if (rb_drain_done) begin
                    if (sel == BW'(NUM_BAM - 1)) begin
                      st   <= S_IDLE;
                      done <= 1'b1;
                    end else begin
                      sel <= sel + 1'b1;
                      st  <= S_BSTART;
                    end
                  end
        default:  st <= S_IDLE;
      endcase
    end
  end
endmodule
