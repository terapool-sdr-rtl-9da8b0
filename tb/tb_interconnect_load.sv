// tb_interconnect_load: throughput and average round-trip latency of the
// L1 interconnect as a function of the injected load.
//
// Every core port gets a traffic generator that starts a request with
// probability lambda per cycle (Bernoulli approximation of a Poisson process)
// to a uniformly random bank of the whole cluster, with at most 8 requests
// in flight. For each lambda the test measures, over a fixed window,
// completed requests per core per cycle and their average latency.
//
// Size: 4 Groups x 4 SubGroups x 2 Tiles x 2 cores with 8 banks per Tile
// (the full design's 4 banks per core), configuration 1-3-5-11.
// Checks: at the lowest load the throughput equals the injected load and
// the average latency equals the zero-load value expected from the share of
// banks at each distance (1, 3, 5, 11 cycles); latency does not fall as
// load rises; at the highest load the throughput saturates below the
// injected load; all reads return the data written.
module tb_interconnect_load;
  import tcdm_pkg::*;

  localparam int unsigned NC = 2, NB = 8, W = 16, T = 2, S = 4, G = 4, X = 11;
  localparam int unsigned NTot = NC * T * S * G;
  localparam int unsigned NTiles = T * S * G;
  localparam int unsigned NLoads = 6;
  localparam int unsigned Window = 2000;
  // Injected load in 1/1000 request per core per cycle.
  localparam int unsigned Load [NLoads] = '{10, 50, 100, 200, 400, 800};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       [NTot-1:0] req_valid, req_ready, resp_valid, resp_ready;
  tcdm_req_t  [NTot-1:0] req;
  tcdm_resp_t [NTot-1:0] resp;
  logic        tg_en = 1'b0;
  int unsigned rate = 0;

  terapool_cluster #(
    .NumCores(NC), .BanksPerTile(NB), .BankWords(W), .TilesPerSubGroup(T),
    .SubGroupsPerGroup(S), .NumGroups(G), .RemoteGroupLatency(X)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(req_valid), .core_req_ready_o(req_ready), .core_req_i(req),
    .core_resp_valid_o(resp_valid), .core_resp_ready_i(resp_ready), .core_resp_o(resp)
  );

  for (genvar c = 0; c < NTot; c++) begin : g_tg
    tb_traffic_gen #(
      .CoreIdx(c), .NumCores(NC), .BanksPerTile(NB), .TilesPerSG(T),
      .SGsPerGroup(S), .NumGroups(G), .BankWords(W), .Scope(3)
    ) i_tg (
      .clk_i(clk), .rst_ni(rst_n), .enable_i(tg_en), .rate_i(rate), .resp_stall_i(1'b0),
      .req_valid_o(req_valid[c]), .req_ready_i(req_ready[c]), .req_o(req[c]),
      .resp_valid_i(resp_valid[c]), .resp_ready_o(resp_ready[c]), .resp_i(resp[c])
    );
  end

  // The generators' counters.
  longint unsigned done_c [NTot], lat_c [NTot], err_c [NTot], chk_c [NTot];
  for (genvar c = 0; c < NTot; c++) begin : g_cnt
    assign done_c[c] = longint'(g_tg[c].i_tg.n_done);
    assign lat_c[c]  = g_tg[c].i_tg.lat_sum;
    assign err_c[c]  = longint'(g_tg[c].i_tg.n_errors);
    assign chk_c[c]  = longint'(g_tg[c].i_tg.n_checked);
  end

  function automatic void totals(output longint unsigned d, output longint unsigned l,
                                 output longint unsigned e, output longint unsigned k);
    d = 0; l = 0; e = 0; k = 0;
    for (int c = 0; c < NTot; c++) begin
      d += done_c[c]; l += lat_c[c]; e += err_c[c]; k += chk_c[c];
    end
  endfunction

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real thr [NLoads], lat [NLoads], zl;
    longint unsigned d0, l0, d1, l1, e, k;
    // Zero-load average for uniform banks: share of Tiles at each distance.
    zl = (1.0 * 1 + 3.0 * (T - 1) + 5.0 * T * (S - 1) + real'(X) * T * S * (G - 1)) / NTiles;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    tg_en = 1'b1;
    for (int i = 0; i < NLoads; i++) begin
      rate = Load[i] * 65536 / 1000;
      repeat (300) @(posedge clk);          // settle
      totals(d0, l0, e, k);
      repeat (Window) @(posedge clk);
      totals(d1, l1, e, k);
      thr[i] = real'(d1 - d0) / (NTot * Window);
      lat[i] = real'(l1 - l0) / real'(d1 - d0);
      $display("load %0.3f req/core/cycle: throughput %0.3f, average latency %0.2f cycles",
               Load[i] / 1000.0, thr[i], lat[i]);
    end
    tg_en = 1'b0;
    repeat (300) @(posedge clk);
    totals(d1, l1, e, k);
    checks += int'(k);
    failures += int'(e);
    check(k > 1000, "enough reads checked");
    check(thr[0] > 0.8 * Load[0] / 1000.0 && thr[0] < 1.2 * Load[0] / 1000.0,
          "throughput follows the load at low load");
    check(lat[0] > zl - 0.3 && lat[0] < zl + 0.7,
          $sformatf("low-load latency %0.2f near the zero-load %0.2f", lat[0], zl));
    for (int i = 1; i < NLoads; i++)
      check(lat[i] >= lat[i-1] - 0.2, $sformatf("latency does not fall at load %0d", i));
    check(thr[NLoads-1] < 0.9 * Load[NLoads-1] / 1000.0, "saturation at the highest load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
