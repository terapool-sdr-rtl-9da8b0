// tb_subgroup: two SubGroups (2 Tiles of 2 cores, 4 banks each) wired to
// each other the way a Group wires them, with traffic generators on all
// cores addressing the whole Group.
//
// Checks every read against the generators' shadow copies, that all
// requests are answered, the minimum (zero-load) latency at each distance,
// 1 cycle in the Tile, 3 in the SubGroup and 5 to the other SubGroup, and
// that nothing leaves on the remote-Group ports.
module tb_subgroup;
  import tcdm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned NC = 2, NB = 4, W = 16, T = 2, S = 2, G = 2;
  localparam int unsigned NCS = NC * T;        // cores per SubGroup
  localparam int unsigned NSG = (S - 1) * T;
  localparam int unsigned NG  = (G - 1) * T;

  logic       [S-1:0][NCS-1:0] c_req_valid, c_req_ready, c_resp_valid, c_resp_ready;
  tcdm_req_t  [S-1:0][NCS-1:0] c_req;
  tcdm_resp_t [S-1:0][NCS-1:0] c_resp;
  logic       [S-1:0][NSG-1:0] m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
  tcdm_req_t  [S-1:0][NSG-1:0] m_req;
  tcdm_resp_t [S-1:0][NSG-1:0] m_resp;
  logic       [S-1:0][NG-1:0]  gm_req_valid;
  tcdm_req_t  [S-1:0][NG-1:0]  gm_req;
  logic       [S-1:0][NG-1:0]  gm_resp_ready, gs_req_ready, gs_resp_valid;
  tcdm_resp_t [S-1:0][NG-1:0]  gs_resp;
  logic tg_en = 1'b0;
  int unsigned rate = 65536 / 50;

  for (genvar s = 0; s < S; s++) begin : g_sg
    subgroup #(
      .NumCores(NC), .BanksPerTile(NB), .BankWords(W),
      .TilesPerSubGroup(T), .SubGroupsPerGroup(S), .NumGroups(G)
    ) dut (
      .clk_i(clk), .rst_ni(rst_n), .sg_id_i(2'(s)),
      .core_req_valid_i(c_req_valid[s]), .core_req_ready_o(c_req_ready[s]),
      .core_req_i(c_req[s]), .core_resp_valid_o(c_resp_valid[s]),
      .core_resp_ready_i(c_resp_ready[s]), .core_resp_o(c_resp[s]),
      // SubGroup s direction 1 goes to SubGroup 1-s, which sees it on its slave ports.
      .sg_mst_req_valid_o(m_req_valid[s]), .sg_mst_req_ready_i(m_req_ready[s]),
      .sg_mst_req_o(m_req[s]), .sg_mst_resp_valid_i(m_resp_valid[s]),
      .sg_mst_resp_ready_o(m_resp_ready[s]), .sg_mst_resp_i(m_resp[s]),
      .sg_slv_req_valid_i(m_req_valid[1-s]), .sg_slv_req_ready_o(m_req_ready[1-s]),
      .sg_slv_req_i(m_req[1-s]), .sg_slv_resp_valid_o(m_resp_valid[1-s]),
      .sg_slv_resp_ready_i(m_resp_ready[1-s]), .sg_slv_resp_o(m_resp[1-s]),
      .g_mst_req_valid_o(gm_req_valid[s]), .g_mst_req_ready_i('0), .g_mst_req_o(gm_req[s]),
      .g_mst_resp_valid_i('0), .g_mst_resp_ready_o(gm_resp_ready[s]), .g_mst_resp_i('0),
      .g_slv_req_valid_i('0), .g_slv_req_ready_o(gs_req_ready[s]), .g_slv_req_i('0),
      .g_slv_resp_valid_o(gs_resp_valid[s]), .g_slv_resp_ready_i('1), .g_slv_resp_o(gs_resp[s])
    );
    for (genvar c = 0; c < NCS; c++) begin : g_tg
      tb_traffic_gen #(
        .CoreIdx(s * NCS + c), .NumCores(NC), .BanksPerTile(NB), .TilesPerSG(T),
        .SGsPerGroup(S), .NumGroups(G), .BankWords(W), .Scope(2)
      ) i_tg (
        .clk_i(clk), .rst_ni(rst_n), .enable_i(tg_en), .rate_i(rate), .resp_stall_i(1'b0),
        .req_valid_o(c_req_valid[s][c]), .req_ready_i(c_req_ready[s][c]), .req_o(c_req[s][c]),
        .resp_valid_i(c_resp_valid[s][c]), .resp_ready_o(c_resp_ready[s][c]),
        .resp_i(c_resp[s][c])
      );
    end
  end

  int checks = 0, failures = 0;
  logic leaked = 1'b0;
  always @(posedge clk) if (rst_n && gm_req_valid != '0) leaked <= 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned stat_chk, stat_err, stat_iss, stat_done, stat_stall;
  int unsigned stat_min [3];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    tg_en = 1'b1;
    repeat (1500) @(posedge clk);   // light load: zero-load latencies show up
    rate = 65536 / 2;
    repeat (1500) @(posedge clk);   // heavy load
    tg_en = 1'b0;
    repeat (100) @(posedge clk);
    stat_chk = 0; stat_err = 0; stat_iss = 0; stat_done = 0; stat_stall = 0;
    stat_min = '{32'hffff_ffff, 32'hffff_ffff, 32'hffff_ffff};
  end

  // Gather the statistics of all generators once traffic has drained.
  for (genvar s = 0; s < S; s++) begin : g_sum
    for (genvar c = 0; c < NCS; c++) begin : g_c
      always @(posedge clk) if (gather) begin
        stat_chk  += g_sg[s].g_tg[c].i_tg.n_checked;
        stat_err  += g_sg[s].g_tg[c].i_tg.n_errors;
        stat_iss  += g_sg[s].g_tg[c].i_tg.n_issued;
        stat_done += g_sg[s].g_tg[c].i_tg.n_done;
        stat_stall += g_sg[s].g_tg[c].i_tg.n_stall_cycles;
        for (int l = 0; l < 3; l++)
          if (g_sg[s].g_tg[c].i_tg.lvl_min[l] < stat_min[l]) stat_min[l] = g_sg[s].g_tg[c].i_tg.lvl_min[l];
      end
    end
  end

  logic gather = 1'b0;
  initial begin
    wait (tg_en);
    wait (!tg_en);
    repeat (101) @(negedge clk);
    gather = 1'b1;
    @(negedge clk);
    gather = 1'b0;
    $display("requests=%0d checked reads=%0d stall cycles=%0d min latency %0d/%0d/%0d",
             stat_iss, stat_chk, stat_stall, stat_min[0], stat_min[1], stat_min[2]);
    checks += int'(stat_chk);
    failures += int'(stat_err);
    check(stat_iss == stat_done, "all requests answered");
    check(stat_chk > 200, "enough reads checked");
    check(stat_stall > 0, "contention stalls happened");
    check(stat_min[0] == 1, "Tile latency 1");
    check(stat_min[1] == 3, "SubGroup latency 3");
    check(stat_min[2] == 5, "remote SubGroup latency 5");
    check(!leaked, "no request on the remote-Group ports");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
