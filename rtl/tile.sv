// tile: the basic building block of the cluster.
//
// A Tile holds the TCDM ports of NumCores cores, BanksPerTile L1 banks (its
// slice of the shared scratchpad) and three interconnects:
//   * the local crossbar, (NumCores + K) x BanksPerTile, reaching the banks
//     from the Tile's own cores and from the K slave ports;
//   * the remote request/response interconnect, NumCores x K, carrying the
//     cores' accesses to banks of other Tiles out on the K master ports;
//   * a 2:1 response merge per core (a core can receive a local and a
//     remote response in the same cycle).
// K = SubGroupsPerGroup + NumGroups - 1 (7 by default). Port 0 reaches the
// other Tiles of the own SubGroup; ports 1..S-1 reach SubGroup (own+j) mod S
// of the own Group; ports S..S+G-2 reach Group (own+j) mod G. A slave port
// with the same number carries requests that came the opposite way.
//
// Timing: an access to an own bank has one cycle of zero-load latency (the
// bank's registered response). Each master port has a spill register on the
// outgoing request and one on the incoming response, so a remote access
// spends two cycles more in the Tile. The core's request is split between
// local and remote by its address, then the response networks route on the
// core identifier in the response (see tcdm_pkg for the address map and the
// identifier). `tile_id_i` is the Tile's global index {group, subgroup,
// tile}.
//
// From the paper: 8 cores, 32 banks of 1 KiB, the (8+K)x32 local crossbar,
// K = 7 and its split, the registers on master ports. This design's choice:
// the address map, the identifier-based response routing, the handshakes.
// The cores and the instruction caches are outside this module: their
// TCDM ports are this module's core ports.
module tile
  import tcdm_pkg::*;
#(
  parameter int unsigned NumCores          = 8,
  parameter int unsigned BanksPerTile      = 32,
  parameter int unsigned BankWords         = 256,
  parameter int unsigned TilesPerSubGroup  = 8,
  parameter int unsigned SubGroupsPerGroup = 4,
  parameter int unsigned NumGroups         = 4,
  localparam int unsigned K = SubGroupsPerGroup + NumGroups - 1,
  localparam int unsigned TileIdW = $clog2(TilesPerSubGroup) + $clog2(SubGroupsPerGroup)
                                    + $clog2(NumGroups)
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic       [TileIdW-1:0]     tile_id_i,
  // Core TCDM ports.
  input  logic       [NumCores-1:0]    core_req_valid_i,
  output logic       [NumCores-1:0]    core_req_ready_o,
  input  tcdm_req_t  [NumCores-1:0]    core_req_i,
  output logic       [NumCores-1:0]    core_resp_valid_o,
  input  logic       [NumCores-1:0]    core_resp_ready_i,
  output tcdm_resp_t [NumCores-1:0]    core_resp_o,
  // Master ports (requests to other Tiles).
  output logic       [K-1:0]           mst_req_valid_o,
  input  logic       [K-1:0]           mst_req_ready_i,
  output tcdm_req_t  [K-1:0]           mst_req_o,
  input  logic       [K-1:0]           mst_resp_valid_i,
  output logic       [K-1:0]           mst_resp_ready_o,
  input  tcdm_resp_t [K-1:0]           mst_resp_i,
  // Slave ports (requests from other Tiles).
  input  logic       [K-1:0]           slv_req_valid_i,
  output logic       [K-1:0]           slv_req_ready_o,
  input  tcdm_req_t  [K-1:0]           slv_req_i,
  output logic       [K-1:0]           slv_resp_valid_o,
  input  logic       [K-1:0]           slv_resp_ready_i,
  output tcdm_resp_t [K-1:0]           slv_resp_o
);
  localparam int unsigned CoreW  = $clog2(NumCores);
  localparam int unsigned BankW  = $clog2(BanksPerTile);
  localparam int unsigned TileW  = $clog2(TilesPerSubGroup);
  localparam int unsigned SgW    = $clog2(SubGroupsPerGroup);
  localparam int unsigned GrpW   = $clog2(NumGroups);
  localparam int unsigned RowLsb = 2 + BankW + TileW + SgW + GrpW;
  localparam int unsigned NumLocIn = NumCores + K;
  localparam int unsigned LocSelW  = $clog2(NumLocIn);
  localparam int unsigned KSelW    = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned S = SubGroupsPerGroup;

  // Own position.
  logic [TileW-1:0] my_tile;
  logic [SgW-1:0]   my_sg;
  logic [GrpW-1:0]  my_grp;
  assign my_tile = tile_id_i[0 +: TileW];
  assign my_sg   = tile_id_i[TileW +: SgW];
  assign my_grp  = tile_id_i[TileW + SgW +: GrpW];

  // Master port that leads from this Tile to Tile {g, s, t}; only valid when
  // the target is not this Tile.
  function automatic logic [KSelW-1:0] port_to(logic [GrpW-1:0] g, logic [SgW-1:0] s);
    logic [SgW-1:0]  ds;
    logic [GrpW-1:0] dg;
    ds = s - my_sg;
    dg = g - my_grp;
    if (g != my_grp)     return KSelW'(S - 1 + int'(dg));
    else if (s != my_sg) return KSelW'(ds);
    else                 return '0;
  endfunction

  // Slave port on which a request from Tile {g, s, t} arrives here.
  function automatic logic [KSelW-1:0] port_from(logic [GrpW-1:0] g, logic [SgW-1:0] s);
    logic [SgW-1:0]  ds;
    logic [GrpW-1:0] dg;
    ds = my_sg - s;
    dg = my_grp - g;
    if (g != my_grp)     return KSelW'(S - 1 + int'(dg));
    else if (s != my_sg) return KSelW'(ds);
    else                 return '0;
  endfunction

  // ---------------------------------------------------------------------
  // Split of the core requests into local and remote.
  // ---------------------------------------------------------------------
  logic      [NumCores-1:0] is_local;
  logic      [NumCores-1:0] loc_req_valid, loc_req_ready, rem_req_valid, rem_req_ready;
  logic      [NumCores-1:0][KSelW-1:0] rem_sel;

  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      logic [TileW-1:0] t;
      logic [SgW-1:0]   s;
      logic [GrpW-1:0]  g;
      t = core_req_i[c].addr[2 + BankW +: TileW];
      s = core_req_i[c].addr[2 + BankW + TileW +: SgW];
      g = core_req_i[c].addr[2 + BankW + TileW + SgW +: GrpW];
      is_local[c]      = (t == my_tile) && (s == my_sg) && (g == my_grp);
      rem_sel[c]       = port_to(g, s);
    end
  end

  assign loc_req_valid    = core_req_valid_i & is_local;
  assign rem_req_valid    = core_req_valid_i & ~is_local;
  assign core_req_ready_o = (is_local & loc_req_ready) | (~is_local & rem_req_ready);

  // ---------------------------------------------------------------------
  // Local crossbar: cores and slave ports to the banks.
  // ---------------------------------------------------------------------
  logic       [NumLocIn-1:0]               lx_req_valid, lx_req_ready;
  tcdm_req_t  [NumLocIn-1:0]               lx_req;
  logic       [NumLocIn-1:0][BankW-1:0]    lx_req_sel;
  logic       [NumLocIn-1:0]               lx_resp_valid, lx_resp_ready;
  tcdm_resp_t [NumLocIn-1:0]               lx_resp;
  logic       [BanksPerTile-1:0]           bk_req_valid, bk_req_ready, bk_resp_valid, bk_resp_ready;
  tcdm_req_t  [BanksPerTile-1:0]           bk_req;
  tcdm_resp_t [BanksPerTile-1:0]           bk_resp;
  logic       [BanksPerTile-1:0][LocSelW-1:0] bk_resp_sel;

  // Merge of local and remote responses per core.
  logic       [NumCores-1:0]               loc_resp_valid, loc_resp_ready;
  tcdm_resp_t [NumCores-1:0]               loc_resp;
  logic       [NumCores-1:0]               rem_resp_valid, rem_resp_ready;
  tcdm_resp_t [NumCores-1:0]               rem_resp;

  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      lx_req_valid[c] = loc_req_valid[c];
      lx_req[c]       = core_req_i[c];
      lx_req_sel[c]   = core_req_i[c].addr[2 +: BankW];
    end
    for (int unsigned k = 0; k < K; k++) begin
      lx_req_valid[NumCores+k] = slv_req_valid_i[k];
      lx_req[NumCores+k]       = slv_req_i[k];
      lx_req_sel[NumCores+k]   = slv_req_i[k].addr[2 +: BankW];
    end
  end

  assign loc_req_ready    = lx_req_ready[NumCores-1:0];
  assign slv_req_ready_o  = lx_req_ready[NumLocIn-1:NumCores];
  assign loc_resp_valid   = lx_resp_valid[NumCores-1:0];
  assign loc_resp         = lx_resp[NumCores-1:0];
  assign slv_resp_valid_o = lx_resp_valid[NumLocIn-1:NumCores];
  assign slv_resp_o       = lx_resp[NumLocIn-1:NumCores];
  assign lx_resp_ready    = {slv_resp_ready_i, loc_resp_ready};

  // Response destination: own core, or the slave port the request came in.
  always_comb begin
    for (int unsigned b = 0; b < BanksPerTile; b++) begin
      logic [CoreW-1:0] sc;
      logic [TileW-1:0] st;
      logic [SgW-1:0]   ss;
      logic [GrpW-1:0]  sgp;
      sc  = bk_resp[b].id[0 +: CoreW];
      st  = bk_resp[b].id[CoreW +: TileW];
      ss  = bk_resp[b].id[CoreW + TileW +: SgW];
      sgp = bk_resp[b].id[CoreW + TileW + SgW +: GrpW];
      if (st == my_tile && ss == my_sg && sgp == my_grp)
        bk_resp_sel[b] = LocSelW'(sc);
      else
        bk_resp_sel[b] = LocSelW'(NumCores + int'(port_from(sgp, ss)));
    end
  end

  tcdm_xbar #(
    .NumMst(NumLocIn),
    .NumSlv(BanksPerTile)
  ) i_local_xbar (
    .clk_i,
    .rst_ni,
    .mst_req_valid_i (lx_req_valid),
    .mst_req_ready_o (lx_req_ready),
    .mst_req_i       (lx_req),
    .req_sel_i       (lx_req_sel),
    .mst_resp_valid_o(lx_resp_valid),
    .mst_resp_ready_i(lx_resp_ready),
    .mst_resp_o      (lx_resp),
    .slv_req_valid_o (bk_req_valid),
    .slv_req_ready_i (bk_req_ready),
    .slv_req_o       (bk_req),
    .slv_resp_valid_i(bk_resp_valid),
    .slv_resp_ready_o(bk_resp_ready),
    .slv_resp_i      (bk_resp),
    .resp_sel_i      (bk_resp_sel)
  );

  for (genvar b = 0; b < BanksPerTile; b++) begin : g_bank
    tcdm_bank #(
      .NumWords(BankWords),
      .RowLsb  (RowLsb)
    ) i_bank (
      .clk_i,
      .rst_ni,
      .req_valid_i (bk_req_valid[b]),
      .req_ready_o (bk_req_ready[b]),
      .req_i       (bk_req[b]),
      .resp_valid_o(bk_resp_valid[b]),
      .resp_ready_i(bk_resp_ready[b]),
      .resp_o      (bk_resp[b])
    );
  end

  // ---------------------------------------------------------------------
  // Remote request / response interconnect: cores to the K master ports.
  // ---------------------------------------------------------------------
  logic       [K-1:0]             rx_req_valid, rx_req_ready, rx_resp_valid, rx_resp_ready;
  tcdm_req_t  [K-1:0]             rx_req;
  tcdm_resp_t [K-1:0]             rx_resp;
  logic       [K-1:0][CoreW-1:0]  rx_resp_sel;

  always_comb begin
    for (int unsigned k = 0; k < K; k++) rx_resp_sel[k] = rx_resp[k].id[0 +: CoreW];
  end

  tcdm_xbar #(
    .NumMst(NumCores),
    .NumSlv(K),
    .SlvSelW(KSelW)
  ) i_remote_xbar (
    .clk_i,
    .rst_ni,
    .mst_req_valid_i (rem_req_valid),
    .mst_req_ready_o (rem_req_ready),
    .mst_req_i       (core_req_i),
    .req_sel_i       (rem_sel),
    .mst_resp_valid_o(rem_resp_valid),
    .mst_resp_ready_i(rem_resp_ready),
    .mst_resp_o      (rem_resp),
    .slv_req_valid_o (rx_req_valid),
    .slv_req_ready_i (rx_req_ready),
    .slv_req_o       (rx_req),
    .slv_resp_valid_i(rx_resp_valid),
    .slv_resp_ready_o(rx_resp_ready),
    .slv_resp_i      (rx_resp),
    .resp_sel_i      (rx_resp_sel)
  );

  // Registers on the master ports, both directions.
  for (genvar k = 0; k < K; k++) begin : g_mst_reg
    spill_register #(.data_t(tcdm_req_t)) i_req_reg (
      .clk_i,
      .rst_ni,
      .valid_i(rx_req_valid[k]),
      .ready_o(rx_req_ready[k]),
      .data_i (rx_req[k]),
      .valid_o(mst_req_valid_o[k]),
      .ready_i(mst_req_ready_i[k]),
      .data_o (mst_req_o[k])
    );
    spill_register #(.data_t(tcdm_resp_t)) i_resp_reg (
      .clk_i,
      .rst_ni,
      .valid_i(mst_resp_valid_i[k]),
      .ready_o(mst_resp_ready_o[k]),
      .data_i (mst_resp_i[k]),
      .valid_o(rx_resp_valid[k]),
      .ready_i(rx_resp_ready[k]),
      .data_o (rx_resp[k])
    );
  end

  // Per-core merge of local and remote responses.
  for (genvar c = 0; c < NumCores; c++) begin : g_merge
    logic [1:0]        m_valid, m_ready;
    tcdm_resp_t [1:0]  m_data;
    assign m_valid = {rem_resp_valid[c], loc_resp_valid[c]};
    assign m_data  = {rem_resp[c], loc_resp[c]};
    assign loc_resp_ready[c] = m_ready[0];
    assign rem_resp_ready[c] = m_ready[1];
    xbar_half #(
      .NumIn (2),
      .NumOut(1),
      .data_t(tcdm_resp_t)
    ) i_merge (
      .clk_i,
      .rst_ni,
      .in_valid_i (m_valid),
      .in_ready_o (m_ready),
      .in_data_i  (m_data),
      .in_sel_i   ('0),
      .out_valid_o(core_resp_valid_o[c]),
      .out_ready_i(core_resp_ready_i[c]),
      .out_data_o (core_resp_o[c])
    );
  end

endmodule
