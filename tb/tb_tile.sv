// tb_tile: one Tile (4 cores, 8 banks, K = 3 at this size) in isolation.
//
// Cores 0..2 run traffic generators on the Tile's own banks (reads checked
// against shadow copies, stalls from bank conflicts counted). Core 3 is
// driven directly: it sends one request to each of the three other
// destinations (a Tile of the own SubGroup, the other SubGroup, the other
// Group) and the test checks the master port the request leaves on, that it
// leaves one cycle after acceptance (master-port register), and that the
// answer of the test bench, given one cycle later, reaches the core after
// three cycles in total. Then requests from foreign cores enter on each
// slave port, and their responses must come back on the same slave port one
// cycle later with the right data.
module tb_tile;
  import tcdm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned NC = 4, NB = 8, W = 16, T = 2, S = 2, G = 2, K = S + G - 1;

  logic       [NC-1:0] c_req_valid, c_req_ready, c_resp_valid, c_resp_ready;
  tcdm_req_t  [NC-1:0] c_req;
  tcdm_resp_t [NC-1:0] c_resp;
  logic       [K-1:0]  m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
  tcdm_req_t  [K-1:0]  m_req;
  tcdm_resp_t [K-1:0]  m_resp;
  logic       [K-1:0]  s_req_valid, s_req_ready, s_resp_valid, s_resp_ready;
  tcdm_req_t  [K-1:0]  s_req;
  tcdm_resp_t [K-1:0]  s_resp;

  tile #(
    .NumCores(NC), .BanksPerTile(NB), .BankWords(W),
    .TilesPerSubGroup(T), .SubGroupsPerGroup(S), .NumGroups(G)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n), .tile_id_i('0),
    .core_req_valid_i(c_req_valid), .core_req_ready_o(c_req_ready), .core_req_i(c_req),
    .core_resp_valid_o(c_resp_valid), .core_resp_ready_i(c_resp_ready), .core_resp_o(c_resp),
    .mst_req_valid_o(m_req_valid), .mst_req_ready_i(m_req_ready), .mst_req_o(m_req),
    .mst_resp_valid_i(m_resp_valid), .mst_resp_ready_o(m_resp_ready), .mst_resp_i(m_resp),
    .slv_req_valid_i(s_req_valid), .slv_req_ready_o(s_req_ready), .slv_req_i(s_req),
    .slv_resp_valid_o(s_resp_valid), .slv_resp_ready_i(s_resp_ready), .slv_resp_o(s_resp)
  );

  // Traffic generators on cores 0..2, own Tile only.
  logic tg_en = 1'b0;
  for (genvar c = 0; c < NC - 1; c++) begin : g_tg
    tb_traffic_gen #(
      .CoreIdx(c), .NumCores(NC), .BanksPerTile(NB), .TilesPerSG(T),
      .SGsPerGroup(S), .NumGroups(G), .BankWords(W), .Scope(0)
    ) i_tg (
      .clk_i(clk), .rst_ni(rst_n), .enable_i(tg_en), .rate_i(65536 / 2), .resp_stall_i(1'b0),
      .req_valid_o(c_req_valid[c]), .req_ready_i(c_req_ready[c]), .req_o(c_req[c]),
      .resp_valid_i(c_resp_valid[c]), .resp_ready_o(c_resp_ready[c]), .resp_i(c_resp[c])
    );
  end

  // Responder on the master ports: answers one cycle after taking a request.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_resp_valid <= '0;
      m_resp       <= '0;
    end else begin
      for (int k = 0; k < K; k++) begin
        if (m_resp_valid[k] && m_resp_ready[k]) m_resp_valid[k] <= 1'b0;
        if (m_req_valid[k]) begin
          m_resp_valid[k]    <= 1'b1;
          m_resp[k].rdata    <= ~m_req[k].addr;
          m_resp[k].id       <= m_req[k].id;
          m_resp[k].wen      <= m_req[k].wen;
        end
      end
    end
  end
  assign m_req_ready = '1;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] word_addr(int bank, int t, int s, int g, int row);
    return 32'((bank + NB * (t + T * (s + S * g)) + NB * T * S * G * row) * 4);
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    c_req_valid[3] = 1'b0; c_req[3] = '0; c_resp_ready[3] = 1'b1;
    s_req_valid = '0; s_req = '0; s_resp_ready = '1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // Core 3 to the three remote destinations.
    for (int k = 0; k < K; k++) begin
      logic [31:0] a;
      a = (k == 0) ? word_addr(3, 1, 0, 0, 2) : (k == 1) ? word_addr(3, 0, 1, 0, 2)
                                              : word_addr(3, 0, 0, 1, 2);
      @(negedge clk);
      c_req_valid[3] = 1'b1;
      c_req[3] = '0; c_req[3].addr = a; c_req[3].id = 16'h0103;  // core 3, tag 1
      #1 check(c_req_ready[3], "remote request accepted at once");
      @(negedge clk);
      c_req_valid[3] = 1'b0;
      check(m_req_valid == 3'(1 << k) && m_req[k].addr == a,
            $sformatf("request on master port %0d one cycle later", k));
      lat = 1;
      while (!c_resp_valid[3] && lat < 20) begin @(negedge clk); lat++; end
      check(lat == 3 && c_resp[3].rdata == ~a && c_resp[3].id == 16'h0103,
            $sformatf("remote response via port %0d after %0d cycles", k, lat));
      @(negedge clk);
    end

    // Foreign cores through each slave port: write, then read back.
    for (int k = 0; k < K; k++) begin
      logic [15:0] id;
      logic [31:0] a, d;
      // Source core 1 of: Tile 1 of own SubGroup / Tile 0 of SubGroup 1 / of Group 1.
      id = (k == 0) ? 16'(1 + NC * 1) : (k == 1) ? 16'(1 + NC * T) : 16'(1 + NC * T * S);
      a  = word_addr(5, 0, 0, 0, 9 + k);
      d  = 32'hBEEF_0000 + 32'(k);
      for (int rw = 0; rw < 2; rw++) begin
        @(negedge clk);
        s_req_valid[k] = 1'b1;
        s_req[k] = '0; s_req[k].addr = a; s_req[k].wen = (rw == 0); s_req[k].be = '1;
        s_req[k].wdata = d; s_req[k].id = id;
        #1 check(s_req_ready[k], "slave request accepted");
        @(negedge clk);
        s_req_valid[k] = 1'b0;
        check(s_resp_valid == 3'(1 << k) && s_resp[k].id == id,
              $sformatf("response on slave port %0d after one cycle", k));
        if (rw == 1) check(s_resp[k].rdata == d, $sformatf("slave port %0d read data", k));
      end
    end

    // Local random traffic with bank conflicts.
    tg_en = 1'b1;
    repeat (2000) @(posedge clk);
    tg_en = 1'b0;
    repeat (50) @(posedge clk);
    begin
      int unsigned chk, err, st, iss, dn, minlat;
      chk = g_tg[0].i_tg.n_checked + g_tg[1].i_tg.n_checked + g_tg[2].i_tg.n_checked;
      err = g_tg[0].i_tg.n_errors + g_tg[1].i_tg.n_errors + g_tg[2].i_tg.n_errors;
      st  = g_tg[0].i_tg.n_stall_cycles + g_tg[1].i_tg.n_stall_cycles + g_tg[2].i_tg.n_stall_cycles;
      iss = g_tg[0].i_tg.n_issued + g_tg[1].i_tg.n_issued + g_tg[2].i_tg.n_issued;
      dn  = g_tg[0].i_tg.n_done + g_tg[1].i_tg.n_done + g_tg[2].i_tg.n_done;
      minlat = g_tg[0].i_tg.lvl_min[0];
      $display("local traffic: %0d requests, %0d reads checked, %0d stall cycles", iss, chk, st);
      checks += int'(chk);
      failures += int'(err);
      check(iss == dn, "all local requests answered");
      check(chk > 100, "enough local reads checked");
      check(st > 0, "bank conflicts stalled cores");
      check(minlat == 1, $sformatf("local zero-load latency %0d", minlat));
      check(m_req_valid == '0, "local traffic stays in the Tile");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
