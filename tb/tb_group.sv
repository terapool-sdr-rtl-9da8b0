// tb_group: pairs of Groups (2 SubGroups of 2 Tiles of 2 cores, 4 banks per
// Tile) linked to each other, in the latency configurations 1-3-5-5,
// 1-3-5-7 and 1-3-5-9 (1-3-5-11 is covered by the cluster test). The links
// between the two Groups carry one register each way for X >= 7, as the
// cluster level does.
//
// Traffic generators on all cores address both Groups. The test checks
// every read against the generators' shadow copies, that all requests are
// answered, and the minimum latency at each distance: 1, 3, 5 and X cycles.
module tb_group;
  import tcdm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned NC = 2, NB = 4, W = 16, T = 2, S = 2, G = 2;
  localparam int unsigned NCG = NC * T * S;   // cores per Group
  localparam int unsigned NG  = (G - 1) * T * S;
  localparam int unsigned NCfg = 3;
  localparam int unsigned Lat [NCfg] = '{5, 7, 9};

  logic tg_en = 1'b0;
  int unsigned rate = 65536 / 50;

  for (genvar k = 0; k < NCfg; k++) begin : g_cfg
    localparam int unsigned X = Lat[k];
    logic       [G-1:0][NCG-1:0] c_req_valid, c_req_ready, c_resp_valid, c_resp_ready;
    tcdm_req_t  [G-1:0][NCG-1:0] c_req;
    tcdm_resp_t [G-1:0][NCG-1:0] c_resp;
    logic       [G-1:0][NG-1:0]  m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
    tcdm_req_t  [G-1:0][NG-1:0]  m_req;
    tcdm_resp_t [G-1:0][NG-1:0]  m_resp;
    logic       [G-1:0][NG-1:0]  s_req_valid, s_req_ready, s_resp_valid, s_resp_ready;
    tcdm_req_t  [G-1:0][NG-1:0]  s_req;
    tcdm_resp_t [G-1:0][NG-1:0]  s_resp;

    for (genvar g = 0; g < G; g++) begin : g_grp
      group #(
        .NumCores(NC), .BanksPerTile(NB), .BankWords(W), .TilesPerSubGroup(T),
        .SubGroupsPerGroup(S), .NumGroups(G), .RemoteGroupLatency(X)
      ) dut (
        .clk_i(clk), .rst_ni(rst_n), .group_id_i(1'(g)),
        .core_req_valid_i(c_req_valid[g]), .core_req_ready_o(c_req_ready[g]),
        .core_req_i(c_req[g]), .core_resp_valid_o(c_resp_valid[g]),
        .core_resp_ready_i(c_resp_ready[g]), .core_resp_o(c_resp[g]),
        .g_mst_req_valid_o(m_req_valid[g]), .g_mst_req_ready_i(m_req_ready[g]),
        .g_mst_req_o(m_req[g]), .g_mst_resp_valid_i(m_resp_valid[g]),
        .g_mst_resp_ready_o(m_resp_ready[g]), .g_mst_resp_i(m_resp[g]),
        .g_slv_req_valid_i(s_req_valid[g]), .g_slv_req_ready_o(s_req_ready[g]),
        .g_slv_req_i(s_req[g]), .g_slv_resp_valid_o(s_resp_valid[g]),
        .g_slv_resp_ready_i(s_resp_ready[g]), .g_slv_resp_o(s_resp[g])
      );
      for (genvar p = 0; p < NG; p++) begin : g_link
        spill_pipe #(.data_t(tcdm_req_t), .Depth(X >= 7 ? 1 : 0)) i_req (
          .clk_i(clk), .rst_ni(rst_n),
          .valid_i(m_req_valid[g][p]), .ready_o(m_req_ready[g][p]), .data_i(m_req[g][p]),
          .valid_o(s_req_valid[1-g][p]), .ready_i(s_req_ready[1-g][p]), .data_o(s_req[1-g][p])
        );
        spill_pipe #(.data_t(tcdm_resp_t), .Depth(X >= 7 ? 1 : 0)) i_resp (
          .clk_i(clk), .rst_ni(rst_n),
          .valid_i(s_resp_valid[1-g][p]), .ready_o(s_resp_ready[1-g][p]),
          .data_i(s_resp[1-g][p]),
          .valid_o(m_resp_valid[g][p]), .ready_i(m_resp_ready[g][p]), .data_o(m_resp[g][p])
        );
      end
      for (genvar c = 0; c < NCG; c++) begin : g_tg
        tb_traffic_gen #(
          .CoreIdx(g * NCG + c), .NumCores(NC), .BanksPerTile(NB), .TilesPerSG(T),
          .SGsPerGroup(S), .NumGroups(G), .BankWords(W), .Scope(3)
        ) i_tg (
          .clk_i(clk), .rst_ni(rst_n), .enable_i(tg_en), .rate_i(rate), .resp_stall_i(1'b0),
          .req_valid_o(c_req_valid[g][c]), .req_ready_i(c_req_ready[g][c]),
          .req_o(c_req[g][c]), .resp_valid_i(c_resp_valid[g][c]),
          .resp_ready_o(c_resp_ready[g][c]), .resp_i(c_resp[g][c])
        );
      end
    end
  end

  int checks = 0, failures = 0;
  logic gather = 1'b0;
  int unsigned chk [NCfg], err [NCfg], iss [NCfg], dn [NCfg];
  int unsigned mn [NCfg][4];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  for (genvar k = 0; k < NCfg; k++) begin : g_sum
    for (genvar g = 0; g < G; g++) begin : g_g
      for (genvar c = 0; c < NCG; c++) begin : g_c
        always @(posedge clk) if (gather) begin
          chk[k] += g_cfg[k].g_grp[g].g_tg[c].i_tg.n_checked;
          err[k] += g_cfg[k].g_grp[g].g_tg[c].i_tg.n_errors;
          iss[k] += g_cfg[k].g_grp[g].g_tg[c].i_tg.n_issued;
          dn[k]  += g_cfg[k].g_grp[g].g_tg[c].i_tg.n_done;
          for (int l = 0; l < 4; l++)
            if (g_cfg[k].g_grp[g].g_tg[c].i_tg.lvl_min[l] < mn[k][l])
              mn[k][l] = g_cfg[k].g_grp[g].g_tg[c].i_tg.lvl_min[l];
        end
      end
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NCfg; k++) begin
      chk[k] = 0; err[k] = 0; iss[k] = 0; dn[k] = 0;
      for (int l = 0; l < 4; l++) mn[k][l] = 32'hffff_ffff;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    tg_en = 1'b1;
    repeat (1500) @(posedge clk);
    rate = 65536 / 2;
    repeat (1500) @(posedge clk);
    tg_en = 1'b0;
    repeat (150) @(negedge clk);
    gather = 1'b1;
    @(negedge clk);
    gather = 1'b0;
    for (int k = 0; k < NCfg; k++) begin
      $display("1-3-5-%0d: requests=%0d checked reads=%0d min latency %0d/%0d/%0d/%0d",
               Lat[k], iss[k], chk[k], mn[k][0], mn[k][1], mn[k][2], mn[k][3]);
      checks += int'(chk[k]);
      failures += int'(err[k]);
      check(iss[k] == dn[k], "all requests answered");
      check(chk[k] > 200, "enough reads checked");
      check(mn[k][0] == 1 && mn[k][1] == 3 && mn[k][2] == 5,
            "latency 1/3/5 inside the Group");
      check(mn[k][3] == Lat[k], $sformatf("latency %0d to the other Group", Lat[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
