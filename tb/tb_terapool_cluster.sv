// tb_terapool_cluster: end-to-end test of the cluster at a reduced size.
//
// Size: 4 Groups x 4 SubGroups x 2 Tiles x 2 cores, 4 banks of 16 words per
// Tile (64 cores, 128 banks), latency configuration 1-3-5-11. Every Group,
// SubGroup and crossbar of the full design is present; only the counts per
// level are smaller.
//
// Phase 1, directed: core 0 writes and reads one word in its own Tile, in
// another Tile of its SubGroup, in another SubGroup and in another Group, on
// an idle cluster. The read data and the zero-load latencies 1, 3, 5 and 11
// cycles are checked.
// Phase 2, random: every core runs a traffic generator over the whole
// cluster at a medium and then a saturating load, with some cores refusing
// responses at random. Every read of a word the core wrote is checked, and
// the test requires that each mechanism happened at least once: accesses at
// all four distances, requests stalled by arbitration, responses held back
// by a busy core, and a core reaching its 8 outstanding transactions.
// Phase 3: traffic stops and every request must get its response.
module tb_terapool_cluster;
  import tcdm_pkg::*;

  localparam int unsigned NumCores = 2;
  localparam int unsigned Banks    = 4;
  localparam int unsigned Words    = 16;
  localparam int unsigned T        = 2;
  localparam int unsigned S        = 4;
  localparam int unsigned G        = 4;
  localparam int unsigned X        = 11;
  localparam int unsigned NTot     = NumCores * T * S * G;
  localparam int unsigned NBanks   = Banks * T * S * G;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       [NTot-1:0] req_valid, req_ready, resp_valid, resp_ready;
  tcdm_req_t  [NTot-1:0] req;
  tcdm_resp_t [NTot-1:0] resp;

  // Traffic generators and the directed driver of core 0.
  logic       [NTot-1:0] tg_valid, tg_resp_ready;
  tcdm_req_t  [NTot-1:0] tg_req;
  logic        dir_mode = 1'b1;
  logic        dir_valid = 1'b0;
  tcdm_req_t   dir_req = '0;
  logic        tg_en = 1'b0;
  int unsigned rate = 0;
  logic [NTot-1:0] stall;

  always_comb begin
    req_valid  = tg_valid;
    req        = tg_req;
    resp_ready = tg_resp_ready;
    if (dir_mode) begin
      req_valid[0]  = dir_valid;
      req[0]        = dir_req;
      resp_ready[0] = 1'b1;
    end
  end

  terapool_cluster #(
    .NumCores          (NumCores),
    .BanksPerTile      (Banks),
    .BankWords         (Words),
    .TilesPerSubGroup  (T),
    .SubGroupsPerGroup (S),
    .NumGroups         (G),
    .RemoteGroupLatency(X)
  ) dut (
    .clk_i            (clk),
    .rst_ni           (rst_n),
    .core_req_valid_i (req_valid),
    .core_req_ready_o (req_ready),
    .core_req_i       (req),
    .core_resp_valid_o(resp_valid),
    .core_resp_ready_i(resp_ready),
    .core_resp_o      (resp)
  );

  for (genvar c = 0; c < NTot; c++) begin : g_tg
    tb_traffic_gen #(
      .CoreIdx(c), .NumCores(NumCores), .BanksPerTile(Banks), .TilesPerSG(T),
      .SGsPerGroup(S), .NumGroups(G), .BankWords(Words), .Scope(3)
    ) i_tg (
      .clk_i       (clk),
      .rst_ni      (rst_n),
      .enable_i    (tg_en && !(dir_mode && c == 0)),
      .rate_i      (rate),
      .resp_stall_i(stall[c]),
      .req_valid_o (tg_valid[c]),
      .req_ready_i (req_ready[c] && !(dir_mode && c == 0)),
      .req_o       (tg_req[c]),
      .resp_valid_i(resp_valid[c] && !(dir_mode && c == 0)),
      .resp_ready_o(tg_resp_ready[c]),
      .resp_i      (resp[c])
    );
  end

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // One access from core 0; returns read data and zero-load latency.
  task automatic access(input logic [31:0] addr, input logic wen, input logic [31:0] wdata,
                        output logic [31:0] rdata, output int lat);
    int t0;
    // Inputs change after the negative edge, outputs are sampled 1 ns after it.
    @(negedge clk);
    dir_req       = '0;
    dir_req.addr  = addr;
    dir_req.wen   = wen;
    dir_req.be    = '1;
    dir_req.wdata = wdata;
    dir_req.id    = 16'h0500;  // core 0, tag 5
    dir_valid     = 1'b1;
    t0 = 0;
    #1;
    while (!req_ready[0]) begin @(negedge clk); #1; t0++; end
    @(posedge clk);
    #1 dir_valid = 1'b0;
    lat = 1;
    while (!resp_valid[0]) begin @(posedge clk); #1; lat++; end
    rdata = resp[0].rdata;
    check(resp[0].id == 16'h0500, "response identifier");
    @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int exp_lat [4] = '{1, 3, 5, X};
    automatic int bank_of [4] = '{0, Banks, Banks * T, Banks * T * S};
    logic [31:0] rd;
    int lat;
    stall = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // Phase 1: directed accesses at the four distances.
    for (int l = 0; l < 4; l++) begin
      logic [31:0] a, d;
      a = 32'((3 * NBanks + bank_of[l] + 1) * 4);
      d = 32'hC0DE_0000 + 32'(l);
      access(a, 1'b1, d, rd, lat);
      check(lat == exp_lat[l], $sformatf("write latency level %0d: %0d", l, lat));
      access(a, 1'b0, 0, rd, lat);
      check(rd == d, $sformatf("read data level %0d: %h", l, rd));
      check(lat == exp_lat[l], $sformatf("read latency level %0d: %0d, expected %0d",
                                         l, lat, exp_lat[l]));
    end

    // Phase 2: random traffic.
    @(negedge clk);
    dir_mode = 1'b0;
    tg_en    = 1'b1;
    rate     = 65536 / 10;
    fork
      begin
        repeat (1500) begin
          @(negedge clk);
          for (int c = 0; c < NTot; c++) stall[c] = (c % 8 == 3) && ($urandom % 4 == 0);
        end
      end
      begin
        repeat (500) @(posedge clk);
        rate = 65536 / 2;
      end
    join
    stall = '0;

    // Phase 3: drain.
    tg_en = 1'b0;
    repeat (400) @(posedge clk);
    begin
      int unsigned issued, done, checked, errs, stalls, rstalls, full;
      int unsigned lvl [4];
      issued = 0; done = 0; checked = 0; errs = 0; stalls = 0; rstalls = 0; full = 0;
      lvl = '{0, 0, 0, 0};
      for (int c = 0; c < NTot; c++) begin
        // Hierarchical access to every generator's statistics.
        issued  += tb_stat(c, 0);
        done    += tb_stat(c, 1);
        checked += tb_stat(c, 2);
        errs    += tb_stat(c, 3);
        stalls  += tb_stat(c, 4);
        rstalls += tb_stat(c, 5);
        full    += tb_stat(c, 6);
        for (int l = 0; l < 4; l++) lvl[l] += tb_stat(c, 7 + l);
      end
      $display("issued=%0d done=%0d checked reads=%0d errors=%0d", issued, done, checked, errs);
      $display("accesses per distance: tile=%0d subgroup=%0d group=%0d cluster=%0d",
               lvl[0], lvl[1], lvl[2], lvl[3]);
      $display("request stall cycles=%0d response stall cycles=%0d outstanding-limit hits=%0d",
               stalls, rstalls, full);
      checks += int'(checked);
      failures += int'(errs);
      check(done == issued, "every request answered");
      check(checked > 100, "enough reads checked");
      for (int l = 0; l < 4; l++) check(lvl[l] > 0, $sformatf("accesses at distance %0d", l));
      check(stalls > 0, "arbitration stall happened");
      check(rstalls > 0, "response backpressure happened");
      check(full > 0, "outstanding limit reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Statistics of generator c: 0 issued, 1 done, 2 checked, 3 errors,
  // 4 request stall cycles, 5 response stall cycles, 6 limit hits,
  // 7..10 completed accesses per distance.
  function automatic int unsigned tb_stat(int c, int what);
    int unsigned v [NTot][11];
    v = stats;
    return v[c][what];
  endfunction

  int unsigned stats [NTot][11];
  for (genvar c = 0; c < NTot; c++) begin : g_stat
    always_comb begin
      stats[c][0]  = g_tg[c].i_tg.n_issued;
      stats[c][1]  = g_tg[c].i_tg.n_done;
      stats[c][2]  = g_tg[c].i_tg.n_checked;
      stats[c][3]  = g_tg[c].i_tg.n_errors;
      stats[c][4]  = g_tg[c].i_tg.n_stall_cycles;
      stats[c][5]  = g_tg[c].i_tg.n_resp_stalls;
      stats[c][6]  = g_tg[c].i_tg.n_full;
      for (int l = 0; l < 4; l++) stats[c][7 + l] = g_tg[c].i_tg.lvl_count[l];
    end
  end

endmodule
