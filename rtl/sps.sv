// sps: Scalar-Point Stream. Fetches the MSM inputs from the external memory
// channels, pairs every point with its scalar and streams the pairs to the
// bucket array managers (BAMs), giving each BAM the scalar slice of its own
// window.
//
// Channel layout (this design's choice; the paper says only that points and,
// if needed, scalars are split across banks by the host): channel 0 holds the
// X coordinates, channel 1 the Y coordinates and channel 2 the scalars, one
// word per point at word address i, i = 0 .. num_points-1. Points are affine
// in memory and enter the datapath as Jacobian points with Z = 1.
// Each channel is an Avalon-MM-style read master: rd_read/rd_addr held while
// rd_waitreq, in-order data returned with rd_rvalid. Every channel has its own
// address counter and a FIFO_DEPTH-word return FIFO, and a read is issued only
// when its FIFO has room for the word, so the memory never needs to stall.
// A pair leaves when all three FIFOs hold a word; it is offered to all BAMs at
// once (fork) and removed when every BAM has taken it, each BAM accepting in
// its own clock. BAM b of pass q receives bits [K*j +: K] of the scalar with
// window j = q*NUM_BAM + b (slice 0 if j is past the last window).
// start begins a pass over all points; done pulses once every pair has been
// taken by every BAM.
module sps
  import zkp_pkg::*;
#(
  parameter int NUM_BAM     = 2,
  parameter int WINDOW_BITS = 12,
  parameter int NUM_WINDOWS = 32,
  parameter int AW          = 32,
  parameter int FIFO_DEPTH  = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [AW-1:0]          num_points,
  input  logic [7:0]             pass,
  output logic                   done,
  output logic                   active,
  // memory channels: 0 = X, 1 = Y, 2 = scalar
  output logic                   rd_read    [3],
  output logic [AW-1:0]          rd_addr    [3],
  input  logic                   rd_waitreq [3],
  input  logic                   rd_rvalid  [3],
  input  fe_t                    rd_rdata   [3],
  // fork to the BAMs
  output logic                   bam_valid  [NUM_BAM],
  input  logic                   bam_ready  [NUM_BAM],
  output logic [WINDOW_BITS-1:0] bam_idx    [NUM_BAM],
  output point_t                 bam_point
);
  localparam int SB = NUM_WINDOWS * WINDOW_BITS;   // padded scalar width
  localparam int CW = $clog2(FIFO_DEPTH) + 1;

  logic [AW-1:0] issued [3];
  logic [CW:0]   outstanding [3];   // issued and not yet popped
  logic [AW-1:0] popped;
  logic          f_empty [3];
  fe_t           f_head  [3];
  logic [CW-1:0] f_count [3];
  logic          head_valid, pop;
  logic [NUM_BAM-1:0] taken, take_now;
  logic [SB-1:0] scalar;

  // ---------------- request side ----------------
  for (genvar c = 0; c < 3; c++) begin : g_ch
    assign rd_read[c] = active && (issued[c] < num_points) &&
                        (outstanding[c] < (CW+1)'(FIFO_DEPTH));
    assign rd_addr[c] = issued[c];

    sync_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(rd_rvalid[c]), .wdata(rd_rdata[c]),
      .pop(pop), .rdata(f_head[c]), .empty(f_empty[c]), .full(), .count(f_count[c])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        issued[c]      <= '0;
        outstanding[c] <= '0;
      end else if (start && !active) begin
        issued[c]      <= '0;
        outstanding[c] <= '0;
      end else begin
        if (rd_read[c] && !rd_waitreq[c]) issued[c] <= issued[c] + 1'b1;
        outstanding[c] <= outstanding[c] + (CW+1)'(rd_read[c] && !rd_waitreq[c]) - (CW+1)'(pop);
      end
    end
  end

  // ---------------- pairing and fork ----------------
  assign head_valid = active && !f_empty[0] && !f_empty[1] && !f_empty[2];
  assign scalar     = SB'(f_head[2]);
  assign bam_point  = '{x: f_head[0], y: f_head[1], z: fe_t'(1)};

  always_comb begin
    for (int b = 0; b < NUM_BAM; b++) begin
      int j;
      j = int'(pass) * NUM_BAM + b;
      bam_valid[b] = head_valid && !taken[b];
      bam_idx[b]   = (j < NUM_WINDOWS) ? scalar[j*WINDOW_BITS +: WINDOW_BITS] : '0;
    end
  end
  // kept apart from the block above so that valid never depends on ready
  for (genvar b = 0; b < NUM_BAM; b++) begin : g_take
    assign take_now[b] = bam_valid[b] && bam_ready[b];
  end
  assign pop = head_valid && ((taken | take_now) == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      taken  <= '0;
      popped <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active <= (num_points != '0);
        done   <= (num_points == '0);
        taken  <= '0;
        popped <= '0;
      end else if (active) begin
        taken <= pop ? '0 : (taken | take_now);
        if (pop) begin
          popped <= popped + 1'b1;
          if (popped + 1'b1 == num_points) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
        end
      end
    end
  end

  // memory must not return more words than were asked for
  for (genvar c = 0; c < 3; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) rd_rvalid[c] |-> (f_count[c] < CW'(FIFO_DEPTH)));
  end
endmodule
