// msm_ctrl: phase sequencer of one multi-scalar multiplication.
//
// For pass q = 0 .. NUM_PASSES-1 (each pass serves NUM_BAM windows at once):
//   1. fill:  start the scalar-point stream over all points; wait for its done
//             pulse and then for the BAMs to have no sums in flight;
//   2. drain: start the bucket stream, which pushes each BAM's buckets through
//             the IS-RBAM into the double-and-add collectors; wait for done.
// After the last pass it waits for the collectors to settle, runs the final
// double-and-add pass and pulses done; the result stays valid at the top until
// the next start. `clear` empties the collectors when a new MSM begins.
// Short settle counts (3 clocks) cover the one-clock delay between a handshake
// and the in-flight counter that reports it.
// The paper gives the order of the stages (stream, bucket fill, recursive
// bucket stage, double-and-add); running the passes one after another, without
// overlap, is this design's choice.
module msm_ctrl #(
  parameter int NUM_PASSES = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       done,
  output logic       running,
  output logic [7:0] pass,
  output logic       sps_start,
  input  logic       sps_done,
  input  logic       bam_busy,
  output logic       sb_start,
  input  logic       sb_done,
  output logic       dna_clear,
  input  logic       dna_busy,
  output logic       dna_final_start,
  input  logic       dna_final_done
);
  typedef enum logic [2:0] {C_IDLE, C_FILL, C_FILL_W, C_SETTLE_B, C_DRAIN, C_DRAIN_W,
                            C_SETTLE_D, C_FINAL_W} cstate_e;
  cstate_e    st;
  logic [1:0] settle;

  assign running         = (st != C_IDLE);
  assign sps_start       = (st == C_FILL);
  assign sb_start        = (st == C_DRAIN);
  assign dna_clear       = (st == C_IDLE) && start;
  assign dna_final_start = (st == C_SETTLE_D) && (settle == '0) && !dna_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= C_IDLE;
      pass   <= '0;
      settle <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE:     if (start) begin pass <= '0; st <= C_FILL; end
        C_FILL:     st <= C_FILL_W;
        C_FILL_W:   if (sps_done) begin settle <= 2'd3; st <= C_SETTLE_B; end
        C_SETTLE_B: if (settle != '0) settle <= settle - 1'b1;
                    else if (!bam_busy) st <= C_DRAIN;
        C_DRAIN:    st <= C_DRAIN_W;
        C_DRAIN_W:  if (sb_done) begin
                      if (int'(pass) == NUM_PASSES - 1) begin
                        settle <= 2'd3;
                        st     <= C_SETTLE_D;
                      end else begin
                        pass <= pass + 1'b1;
                        st   <= C_FILL;
                      end
                    end
        C_SETTLE_D: if (settle != '0) settle <= settle - 1'b1;
                    else if (!dna_busy) st <= C_FINAL_W;
        C_FINAL_W:  if (dna_final_done) begin done <= 1'b1; st <= C_IDLE; end
        default:    st <= C_IDLE;
      endcase
    end
  end
endmodule
