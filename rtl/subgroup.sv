// subgroup: TilesPerSubGroup Tiles (8 by default) and the crossbars that
// connect them to each other and to the other SubGroups of the Group.
//
// Inside the SubGroup every Tile's master port 0 enters a TxT local
// crossbar whose outputs are the Tiles' slave ports 0. For each other
// SubGroup j = 1..S-1 of the Group there is one more TxT crossbar: it takes
// master port j of all Tiles and leaves the SubGroup on the `sg_mst` ports
// toward SubGroup (own+j) mod S, one port per target Tile. Requests arriving
// from SubGroup (own-j) mod S enter on `sg_slv` and go straight to slave
// port j of the addressed Tile. The remote-Group master/slave ports of the
// Tiles (numbers S..S+G-2) are passed through unchanged to the Group level.
//
// Timing: the outgoing `sg_mst` requests and their incoming responses each
// pass a spill register (registers on master ports at the SubGroup
// boundary), so an access to another SubGroup of the own Group has five
// cycles of zero-load latency and one to another Tile of the own SubGroup
// has three. Port arrays are flat: entry (j-1)*T + t is direction j, Tile t.
// `sg_id_i` is {group, subgroup}.
//
// From the paper: 8 Tiles, four 8x8 crossbars (one local, three remote
// SubGroup), registers on the SubGroup master ports, remote-Group requests
// forwarded to the Group. This design's choice: the port numbering.
module subgroup
  import tcdm_pkg::*;
#(
  parameter int unsigned NumCores          = 8,
  parameter int unsigned BanksPerTile      = 32,
  parameter int unsigned BankWords         = 256,
  parameter int unsigned TilesPerSubGroup  = 8,
  parameter int unsigned SubGroupsPerGroup = 4,
  parameter int unsigned NumGroups         = 4,
  localparam int unsigned T   = TilesPerSubGroup,
  localparam int unsigned NC  = NumCores * T,
  localparam int unsigned NSG = (SubGroupsPerGroup - 1) * T,
  localparam int unsigned NG  = (NumGroups - 1) * T,
  localparam int unsigned SgIdW = $clog2(SubGroupsPerGroup) + $clog2(NumGroups)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic       [SgIdW-1:0]  sg_id_i,
  // Core TCDM ports, core c of Tile t at index t*NumCores + c.
  input  logic       [NC-1:0]     core_req_valid_i,
  output logic       [NC-1:0]     core_req_ready_o,
  input  tcdm_req_t  [NC-1:0]     core_req_i,
  output logic       [NC-1:0]     core_resp_valid_o,
  input  logic       [NC-1:0]     core_resp_ready_i,
  output tcdm_resp_t [NC-1:0]     core_resp_o,
  // Master ports toward the other SubGroups of the Group (registered).
  output logic       [NSG-1:0]    sg_mst_req_valid_o,
  input  logic       [NSG-1:0]    sg_mst_req_ready_i,
  output tcdm_req_t  [NSG-1:0]    sg_mst_req_o,
  input  logic       [NSG-1:0]    sg_mst_resp_valid_i,
  output logic       [NSG-1:0]    sg_mst_resp_ready_o,
  input  tcdm_resp_t [NSG-1:0]    sg_mst_resp_i,
  // Slave ports from the other SubGroups of the Group.
  input  logic       [NSG-1:0]    sg_slv_req_valid_i,
  output logic       [NSG-1:0]    sg_slv_req_ready_o,
  input  tcdm_req_t  [NSG-1:0]    sg_slv_req_i,
  output logic       [NSG-1:0]    sg_slv_resp_valid_o,
  input  logic       [NSG-1:0]    sg_slv_resp_ready_i,
  output tcdm_resp_t [NSG-1:0]    sg_slv_resp_o,
  // Master ports toward the other Groups (from Tile t, direction j).
  output logic       [NG-1:0]     g_mst_req_valid_o,
  input  logic       [NG-1:0]     g_mst_req_ready_i,
  output tcdm_req_t  [NG-1:0]     g_mst_req_o,
  input  logic       [NG-1:0]     g_mst_resp_valid_i,
  output logic       [NG-1:0]     g_mst_resp_ready_o,
  input  tcdm_resp_t [NG-1:0]     g_mst_resp_i,
  // Slave ports from the other Groups (to Tile t, direction j).
  input  logic       [NG-1:0]     g_slv_req_valid_i,
  output logic       [NG-1:0]     g_slv_req_ready_o,
  input  tcdm_req_t  [NG-1:0]     g_slv_req_i,
  output logic       [NG-1:0]     g_slv_resp_valid_o,
  input  logic       [NG-1:0]     g_slv_resp_ready_i,
  output tcdm_resp_t [NG-1:0]     g_slv_resp_o
);
  localparam int unsigned S     = SubGroupsPerGroup;
  localparam int unsigned G     = NumGroups;
  localparam int unsigned K     = S + G - 1;
  localparam int unsigned CoreW = $clog2(NumCores);
  localparam int unsigned BankW = $clog2(BanksPerTile);
  localparam int unsigned TileW = $clog2(T);

  // Tile ports, Tile t port k at index t*K + k.
  logic       [T*K-1:0] t_mreq_valid, t_mreq_ready, t_mresp_valid, t_mresp_ready;
  tcdm_req_t  [T*K-1:0] t_mreq;
  tcdm_resp_t [T*K-1:0] t_mresp;
  logic       [T*K-1:0] t_sreq_valid, t_sreq_ready, t_sresp_valid, t_sresp_ready;
  tcdm_req_t  [T*K-1:0] t_sreq;
  tcdm_resp_t [T*K-1:0] t_sresp;

  for (genvar t = 0; t < T; t++) begin : g_tile
    tile #(
      .NumCores         (NumCores),
      .BanksPerTile     (BanksPerTile),
      .BankWords        (BankWords),
      .TilesPerSubGroup (TilesPerSubGroup),
      .SubGroupsPerGroup(SubGroupsPerGroup),
      .NumGroups        (NumGroups)
    ) i_tile (
      .clk_i,
      .rst_ni,
      .tile_id_i        ({sg_id_i, TileW'(t)}),
      .core_req_valid_i (core_req_valid_i [t*NumCores +: NumCores]),
      .core_req_ready_o (core_req_ready_o [t*NumCores +: NumCores]),
      .core_req_i       (core_req_i       [t*NumCores +: NumCores]),
      .core_resp_valid_o(core_resp_valid_o[t*NumCores +: NumCores]),
      .core_resp_ready_i(core_resp_ready_i[t*NumCores +: NumCores]),
      .core_resp_o      (core_resp_o      [t*NumCores +: NumCores]),
      .mst_req_valid_o  (t_mreq_valid [t*K +: K]),
      .mst_req_ready_i  (t_mreq_ready [t*K +: K]),
      .mst_req_o        (t_mreq       [t*K +: K]),
      .mst_resp_valid_i (t_mresp_valid[t*K +: K]),
      .mst_resp_ready_o (t_mresp_ready[t*K +: K]),
      .mst_resp_i       (t_mresp      [t*K +: K]),
      .slv_req_valid_i  (t_sreq_valid [t*K +: K]),
      .slv_req_ready_o  (t_sreq_ready [t*K +: K]),
      .slv_req_i        (t_sreq       [t*K +: K]),
      .slv_resp_valid_o (t_sresp_valid[t*K +: K]),
      .slv_resp_ready_i (t_sresp_ready[t*K +: K]),
      .slv_resp_o       (t_sresp      [t*K +: K])
    );
  end

  // ---------------------------------------------------------------------
  // Local crossbar (j = 0) and remote-SubGroup crossbars (j = 1..S-1).
  // ---------------------------------------------------------------------
  for (genvar j = 0; j < S; j++) begin : g_xbar
    logic       [T-1:0]            m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
    tcdm_req_t  [T-1:0]            m_req;
    tcdm_resp_t [T-1:0]            m_resp;
    logic       [T-1:0][TileW-1:0] m_sel;
    logic       [T-1:0]            s_req_valid, s_req_ready, s_resp_valid, s_resp_ready;
    tcdm_req_t  [T-1:0]            s_req;
    tcdm_resp_t [T-1:0]            s_resp;
    logic       [T-1:0][TileW-1:0] s_sel;

    for (genvar t = 0; t < T; t++) begin : g_t
      assign m_req_valid[t]         = t_mreq_valid[t*K + j];
      assign m_req[t]               = t_mreq[t*K + j];
      assign m_sel[t]               = t_mreq[t*K + j].addr[2 + BankW +: TileW];
      assign t_mreq_ready[t*K + j]  = m_req_ready[t];
      assign t_mresp_valid[t*K + j] = m_resp_valid[t];
      assign t_mresp[t*K + j]       = m_resp[t];
      assign m_resp_ready[t]        = t_mresp_ready[t*K + j];
      assign s_sel[t]               = s_resp[t].id[CoreW +: TileW];
    end

    tcdm_xbar #(
      .NumMst(T),
      .NumSlv(T)
    ) i_xbar (
      .clk_i,
      .rst_ni,
      .mst_req_valid_i (m_req_valid),
      .mst_req_ready_o (m_req_ready),
      .mst_req_i       (m_req),
      .req_sel_i       (m_sel),
      .mst_resp_valid_o(m_resp_valid),
      .mst_resp_ready_i(m_resp_ready),
      .mst_resp_o      (m_resp),
      .slv_req_valid_o (s_req_valid),
      .slv_req_ready_i (s_req_ready),
      .slv_req_o       (s_req),
      .slv_resp_valid_i(s_resp_valid),
      .slv_resp_ready_o(s_resp_ready),
      .slv_resp_i      (s_resp),
      .resp_sel_i      (s_sel)
    );

    if (j == 0) begin : g_local
      // Straight back into the Tiles' slave ports 0.
      for (genvar t = 0; t < T; t++) begin : g_t
        assign t_sreq_valid[t*K]  = s_req_valid[t];
        assign t_sreq[t*K]        = s_req[t];
        assign s_req_ready[t]     = t_sreq_ready[t*K];
        assign s_resp_valid[t]    = t_sresp_valid[t*K];
        assign s_resp[t]          = t_sresp[t*K];
        assign t_sresp_ready[t*K] = s_resp_ready[t];
      end
    end else begin : g_remote
      // Out of the SubGroup through registers on the master port.
      for (genvar t = 0; t < T; t++) begin : g_t
        localparam int unsigned P = (j - 1) * T + t;
        spill_register #(.data_t(tcdm_req_t)) i_req_reg (
          .clk_i,
          .rst_ni,
          .valid_i(s_req_valid[t]),
          .ready_o(s_req_ready[t]),
          .data_i (s_req[t]),
          .valid_o(sg_mst_req_valid_o[P]),
          .ready_i(sg_mst_req_ready_i[P]),
          .data_o (sg_mst_req_o[P])
        );
        spill_register #(.data_t(tcdm_resp_t)) i_resp_reg (
          .clk_i,
          .rst_ni,
          .valid_i(sg_mst_resp_valid_i[P]),
          .ready_o(sg_mst_resp_ready_o[P]),
          .data_i (sg_mst_resp_i[P]),
          .valid_o(s_resp_valid[t]),
          .ready_i(s_resp_ready[t]),
          .data_o (s_resp[t])
        );
        // Incoming requests from SubGroup (own-j) to Tile t's slave port j.
        assign t_sreq_valid[t*K + j]  = sg_slv_req_valid_i[P];
        assign t_sreq[t*K + j]        = sg_slv_req_i[P];
        assign sg_slv_req_ready_o[P]  = t_sreq_ready[t*K + j];
        assign sg_slv_resp_valid_o[P] = t_sresp_valid[t*K + j];
        assign sg_slv_resp_o[P]       = t_sresp[t*K + j];
        assign t_sresp_ready[t*K + j] = sg_slv_resp_ready_i[P];
      end
    end
  end

  // ---------------------------------------------------------------------
  // Remote-Group ports: forwarded to the Group level.
  // ---------------------------------------------------------------------
  for (genvar j = 1; j < G; j++) begin : g_grp
    for (genvar t = 0; t < T; t++) begin : g_t
      localparam int unsigned P = (j - 1) * T + t;
      localparam int unsigned Q = t * K + S - 1 + j;
      assign g_mst_req_valid_o[P] = t_mreq_valid[Q];
      assign g_mst_req_o[P]       = t_mreq[Q];
      assign t_mreq_ready[Q]      = g_mst_req_ready_i[P];
      assign t_mresp_valid[Q]     = g_mst_resp_valid_i[P];
      assign t_mresp[Q]           = g_mst_resp_i[P];
      assign g_mst_resp_ready_o[P] = t_mresp_ready[Q];
      assign t_sreq_valid[Q]      = g_slv_req_valid_i[P];
      assign t_sreq[Q]            = g_slv_req_i[P];
      assign g_slv_req_ready_o[P] = t_sreq_ready[Q];
      assign g_slv_resp_valid_o[P] = t_sresp_valid[Q];
      assign g_slv_resp_o[P]      = t_sresp[Q];
      assign t_sresp_ready[Q]     = g_slv_resp_ready_i[P];
    end
  end

endmodule
