// tb_tcdm_xbar: a 4x3 crossbar between random masters and echoing slaves.
//
// Masters send requests to random slaves; the slave index is also written
// into the address so a slave can check it got the right beat. Slaves take
// requests with random ready and answer, after a random delay, with the
// write data echoed and the master index as response destination. The test
// checks routing in both directions, that nothing is lost or duplicated,
// that a beat crosses in the same cycle when the path is free, and
// round-robin fairness when all masters address one slave.
module tb_tcdm_xbar;
  import tcdm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned M = 4;
  localparam int unsigned S = 3;

  logic       [M-1:0]      mreq_valid, mreq_ready, mresp_valid, mresp_ready;
  tcdm_req_t  [M-1:0]      mreq;
  tcdm_resp_t [M-1:0]      mresp;
  logic       [M-1:0][1:0] req_sel;
  logic       [S-1:0]      sreq_valid, sreq_ready, sresp_valid, sresp_ready;
  tcdm_req_t  [S-1:0]      sreq;
  tcdm_resp_t [S-1:0]      sresp;
  logic       [S-1:0][1:0] resp_sel;

  tcdm_xbar #(.NumMst(M), .NumSlv(S)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mst_req_valid_i(mreq_valid), .mst_req_ready_o(mreq_ready), .mst_req_i(mreq),
    .req_sel_i(req_sel),
    .mst_resp_valid_o(mresp_valid), .mst_resp_ready_i(mresp_ready), .mst_resp_o(mresp),
    .slv_req_valid_o(sreq_valid), .slv_req_ready_i(sreq_ready), .slv_req_o(sreq),
    .slv_resp_valid_i(sresp_valid), .slv_resp_ready_o(sresp_ready), .slv_resp_i(sresp),
    .resp_sel_i(resp_sel)
  );

  int checks = 0, failures = 0;
  int unsigned sent [M], got [M], grants [M];
  logic traffic = 1'b0, hot = 1'b0;
  tcdm_resp_t sq [S][$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Masters.
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mreq_valid <= '0; mreq <= '0; req_sel <= '0; mresp_ready <= '0;
      for (int m = 0; m < M; m++) begin sent[m] <= 0; got[m] <= 0; grants[m] <= 0; end
    end else begin
      for (int m = 0; m < M; m++) begin
        mresp_ready[m] <= ($urandom % 4) != 0;
        if (mresp_valid[m] && mresp_ready[m]) begin
          got[m] <= got[m] + 1;
          check(int'(mresp[m].id) == m && mresp[m].rdata[31:24] == 8'(m),
                $sformatf("response to master %0d carries id %0d", m, mresp[m].id));
        end
        if (mreq_valid[m] && mreq_ready[m]) begin
          grants[m] <= grants[m] + 1;
          // The beat is at its slave in the cycle it is accepted.
          check(sreq_valid[req_sel[m]] && sreq[req_sel[m]] == mreq[m],
                $sformatf("master %0d request crosses in the same cycle", m));
        end
        if (!mreq_valid[m] || mreq_ready[m]) begin
          logic go;
          int unsigned s;
          go = hot || (traffic && ($urandom % 2 == 0));
          s  = hot ? 0 : $urandom % S;
          mreq_valid[m] <= go;
          if (go) begin
            sent[m]          <= sent[m] + 1;
            req_sel[m]       <= 2'(s);
            mreq[m]          <= '0;
            mreq[m].addr     <= 32'(s);
            mreq[m].wdata    <= {8'(m), 24'($urandom)};
            mreq[m].id       <= 16'(m);
          end
        end
      end
    end
  end

  // Slaves: accept with random ready, answer from a queue.
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreq_ready <= '0; sresp_valid <= '0; sresp <= '0; resp_sel <= '0;
    end else begin
      for (int s = 0; s < S; s++) begin
        sreq_ready[s] <= hot || ($urandom % 3 != 0);
        if (sreq_valid[s] && sreq_ready[s]) begin
          tcdm_resp_t r;
          check(int'(sreq[s].addr) == s, $sformatf("request for slave %0d reached %0d",
                                                   sreq[s].addr, s));
          r.rdata = sreq[s].wdata; r.id = sreq[s].id; r.wen = 1'b0;
          sq[s].push_back(r);
        end
        if (sresp_valid[s] && sresp_ready[s]) begin
          sresp_valid[s] <= 1'b0;
        end
        if ((!sresp_valid[s] || sresp_ready[s]) && sq[s].size() > 0 && ($urandom % 2 == 0)) begin
          tcdm_resp_t r;
          r = sq[s].pop_front();
          sresp_valid[s] <= 1'b1;
          sresp[s]       <= r;
          resp_sel[s]    <= r.id[1:0];
        end
      end
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned g0 [M];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // Random traffic.
    traffic = 1'b1;
    repeat (3000) @(negedge clk);
    traffic = 1'b0;
    // Fairness: every master targets slave 0, slave always ready.
    hot = 1'b1;
    repeat (20) @(negedge clk);
    for (int m = 0; m < M; m++) g0[m] = grants[m];
    repeat (40) @(negedge clk);
    for (int m = 0; m < M; m++)
      check(grants[m] - g0[m] >= 9 && grants[m] - g0[m] <= 11,
            $sformatf("master %0d got %0d of 40 grants", m, grants[m] - g0[m]));
    hot = 1'b0;
    repeat (1000) @(negedge clk);
    for (int m = 0; m < M; m++)
      check(got[m] == sent[m], $sformatf("master %0d: %0d sent, %0d answered", m, sent[m], got[m]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
