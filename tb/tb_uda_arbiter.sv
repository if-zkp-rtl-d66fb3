// tb_uda_arbiter: random request patterns on a four-client arbiter. Checks
// every clock that the lowest-numbered requesting client (and only it) is
// granted, that the forwarded request carries that client's number in its tag
// client field and its own payload elsewhere, that nothing is granted while
// the downstream is not ready, that the contention flag is right, and that a
// result is routed to exactly the client named in its tag.
module tb_uda_arbiter;
  import zkp_pkg::*;

  localparam int NC = 4;

  logic     req_valid [NC], req_ready [NC], rsp_valid [NC];
  uda_req_t req [NC];
  logic     uda_valid, uda_ready, uda_rsp_valid, contention;
  uda_req_t uda_req;
  uda_rsp_t uda_rsp, rsp;

  uda_arbiter #(.N_CLIENTS(NC)) dut (
    .req_valid, .req_ready, .req, .uda_valid, .uda_ready, .uda_req,
    .uda_rsp_valid, .uda_rsp, .rsp_valid, .rsp, .contention
  );

  int checks = 0, failures = 0;

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int win, nreq;
      win = -1; nreq = 0;
      for (int i = 0; i < NC; i++) begin
        req_valid[i] = ($urandom % 3) == 0;
        req[i].p1  = '{x: fe_t'($urandom), y: fe_t'(i), z: fe_t'(it)};
        req[i].p2  = '{x: fe_t'(it), y: fe_t'($urandom), z: fe_t'(1)};
        req[i].tag = tag_t'($urandom);
        if (req_valid[i]) begin
          nreq++;
          if (win < 0) win = i;
        end
      end
      uda_ready     = ($urandom % 4) != 0;
      uda_rsp_valid = ($urandom % 2) == 0;
      uda_rsp.sum   = '{x: fe_t'($urandom), y: '0, z: fe_t'(1)};
      uda_rsp.tag   = tag_t'($urandom);
      #1;
      checks++;
      if (uda_valid !== (win >= 0)) begin failures++; $display("FAIL valid"); end
      for (int i = 0; i < NC; i++) begin
        checks++;
        if (req_ready[i] !== (i == win && uda_ready)) begin
          failures++; $display("FAIL ready %0d", i);
        end
      end
      if (win >= 0) begin
        uda_req_t expect_q;
        expect_q = req[win];
        expect_q.tag[LTAG_W +: CID_W] = CID_W'(win);
        checks++;
        if (uda_req !== expect_q) begin failures++; $display("FAIL payload/tag"); end
      end
      checks++;
      if (contention !== (nreq > 1)) begin failures++; $display("FAIL contention"); end
      for (int i = 0; i < NC; i++) begin
        checks++;
        if (rsp_valid[i] !== (uda_rsp_valid && uda_rsp.tag[LTAG_W +: CID_W] == CID_W'(i))) begin
          failures++; $display("FAIL route %0d", i);
        end
      end
      checks++;
      if (rsp !== uda_rsp) begin failures++; $display("FAIL rsp data"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
