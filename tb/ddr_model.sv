// ddr_model: behavioural model of one external memory channel as seen by the
// accelerator (a DDR bank behind its controller), for simulation only. It
// answers Avalon-MM-style reads: the request is held while waitreq is high
// (asserted at random), and accepted reads return in order after LAT clocks
// plus a random extra delay of up to JITTER clocks. Contents are loaded by the
// testbench with the write_word task.
module ddr_model
  import zkp_pkg::*;
#(
  parameter int DEPTH  = 64,
  parameter int AW     = 32,
  parameter int LAT    = 6,
  parameter int JITTER = 4,
  parameter int BUSY_PCT = 25
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          read,
  input  logic [AW-1:0] addr,
  output logic          waitreq,
  output logic          rvalid,
  output fe_t           rdata
);
  fe_t mem [DEPTH];
  fe_t dq [$];
  longint tq [$];
  longint now;

  task automatic write_word(int a, fe_t d);
    mem[a] = d;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waitreq <= 1'b0;
      rvalid  <= 1'b0;
      rdata   <= '0;
      now     <= 0;
    end else begin
      now     <= now + 1;
      waitreq <= ($urandom % 100) < BUSY_PCT;
      if (read && !waitreq) begin
        dq.push_back(mem[addr % DEPTH]);
        if (tq.size() > 0 && tq[$] > now + longint'(LAT)) tq.push_back(tq[$]);
        else tq.push_back(now + longint'(LAT) + longint'(32'($urandom % 32'(JITTER + 1))));
      end
      rvalid <= 1'b0;
      if (tq.size() > 0 && tq[0] <= now) begin
        rvalid <= 1'b1;
        rdata  <= dq.pop_front();
        void'(tq.pop_front());
      end
    end
  end
endmodule
