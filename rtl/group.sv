// group: SubGroupsPerGroup SubGroups (4 by default) and the crossbars toward
// the other Groups of the cluster.
//
// The SubGroups are wired all to all: master direction j of SubGroup s
// connects to slave direction j of SubGroup (s+j) mod S. For each other
// Group j = 1..G-1 there is one (S*T)x(S*T) crossbar (32x32 by default). Its
// inputs are remote-Group master port j of every Tile in the Group, its
// outputs lead, one per target Tile, to Group (own+j) mod G. Requests from
// Group (own-j) mod G arrive on `g_slv` direction j and go to the addressed
// Tile's slave port. Port arrays are flat: entry (j-1)*S*T + s*T + t is
// direction j, SubGroup s, Tile t.
//
// Timing, set by RemoteGroupLatency (the zero-load latency of an access to
// another Group, the X of a 1-3-5-X configuration):
//   * always: one spill register on each outgoing request and incoming
//     response of the Group master ports (5 cycles, with the Tile's);
//   * 7: the cluster adds one register each way between Groups (see
//     terapool_cluster), nothing changes here;
//   * 9: plus one spill register each way on the Group slave ports;
//   * 11: plus a second spill register each way on the Group master ports.
// `group_id_i` is the Group's index.
//
// From the paper: 4 SubGroups, three 32x32 crossbars, one per target Group,
// and the added registers of the 1-3-5-9 and 1-3-5-11 configurations. This
// design's choice: where exactly on the master path the base register sits
// (after the crossbar, as drawn in the Group figure of the paper).
module group
  import tcdm_pkg::*;
#(
  parameter int unsigned NumCores           = 8,
  parameter int unsigned BanksPerTile       = 32,
  parameter int unsigned BankWords          = 256,
  parameter int unsigned TilesPerSubGroup   = 8,
  parameter int unsigned SubGroupsPerGroup  = 4,
  parameter int unsigned NumGroups          = 4,
  parameter int unsigned RemoteGroupLatency = 11,
  localparam int unsigned T   = TilesPerSubGroup,
  localparam int unsigned S   = SubGroupsPerGroup,
  localparam int unsigned TS  = T * S,
  localparam int unsigned NC  = NumCores * TS,
  localparam int unsigned NG  = (NumGroups - 1) * TS,
  localparam int unsigned GrpIdW = $clog2(NumGroups)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic       [GrpIdW-1:0] group_id_i,
  // Core TCDM ports, core c of Tile t of SubGroup s at (s*T + t)*NumCores + c.
  input  logic       [NC-1:0]     core_req_valid_i,
  output logic       [NC-1:0]     core_req_ready_o,
  input  tcdm_req_t  [NC-1:0]     core_req_i,
  output logic       [NC-1:0]     core_resp_valid_o,
  input  logic       [NC-1:0]     core_resp_ready_i,
  output tcdm_resp_t [NC-1:0]     core_resp_o,
  // Master ports toward the other Groups.
  output logic       [NG-1:0]     g_mst_req_valid_o,
  input  logic       [NG-1:0]     g_mst_req_ready_i,
  output tcdm_req_t  [NG-1:0]     g_mst_req_o,
  input  logic       [NG-1:0]     g_mst_resp_valid_i,
  output logic       [NG-1:0]     g_mst_resp_ready_o,
  input  tcdm_resp_t [NG-1:0]     g_mst_resp_i,
  // Slave ports from the other Groups.
  input  logic       [NG-1:0]     g_slv_req_valid_i,
  output logic       [NG-1:0]     g_slv_req_ready_o,
  input  tcdm_req_t  [NG-1:0]     g_slv_req_i,
  output logic       [NG-1:0]     g_slv_resp_valid_o,
  input  logic       [NG-1:0]     g_slv_resp_ready_i,
  output tcdm_resp_t [NG-1:0]     g_slv_resp_o
);
  localparam int unsigned G     = NumGroups;
  localparam int unsigned CoreW = $clog2(NumCores);
  localparam int unsigned BankW = $clog2(BanksPerTile);
  localparam int unsigned TileW = $clog2(T);
  localparam int unsigned SgW   = $clog2(S);
  localparam int unsigned TsW   = TileW + SgW;
  localparam int unsigned NSG   = (S - 1) * T;
  localparam int unsigned NGS   = (G - 1) * T;   // remote-Group ports of one SubGroup
  localparam int unsigned MstDepth = (RemoteGroupLatency >= 11) ? 2 : 1;
  localparam int unsigned SlvDepth = (RemoteGroupLatency >= 9) ? 1 : 0;

  // SubGroup-to-SubGroup ports, SubGroup s entry p at index s*NSG + p.
  logic       [S*NSG-1:0] sm_req_valid, sm_req_ready, sm_resp_valid, sm_resp_ready;
  tcdm_req_t  [S*NSG-1:0] sm_req;
  tcdm_resp_t [S*NSG-1:0] sm_resp;
  logic       [S*NSG-1:0] ss_req_valid, ss_req_ready, ss_resp_valid, ss_resp_ready;
  tcdm_req_t  [S*NSG-1:0] ss_req;
  tcdm_resp_t [S*NSG-1:0] ss_resp;
  // Remote-Group ports of the SubGroups, SubGroup s entry (j-1)*T + t at s*NGS + ...
  logic       [S*NGS-1:0] gm_req_valid, gm_req_ready, gm_resp_valid, gm_resp_ready;
  tcdm_req_t  [S*NGS-1:0] gm_req;
  tcdm_resp_t [S*NGS-1:0] gm_resp;
  logic       [S*NGS-1:0] gs_req_valid, gs_req_ready, gs_resp_valid, gs_resp_ready;
  tcdm_req_t  [S*NGS-1:0] gs_req;
  tcdm_resp_t [S*NGS-1:0] gs_resp;

  for (genvar s = 0; s < S; s++) begin : g_sg
    subgroup #(
      .NumCores         (NumCores),
      .BanksPerTile     (BanksPerTile),
      .BankWords        (BankWords),
      .TilesPerSubGroup (TilesPerSubGroup),
      .SubGroupsPerGroup(SubGroupsPerGroup),
      .NumGroups        (NumGroups)
    ) i_subgroup (
      .clk_i,
      .rst_ni,
      .sg_id_i            ({group_id_i, SgW'(s)}),
      .core_req_valid_i   (core_req_valid_i [s*T*NumCores +: T*NumCores]),
      .core_req_ready_o   (core_req_ready_o [s*T*NumCores +: T*NumCores]),
      .core_req_i         (core_req_i       [s*T*NumCores +: T*NumCores]),
      .core_resp_valid_o  (core_resp_valid_o[s*T*NumCores +: T*NumCores]),
      .core_resp_ready_i  (core_resp_ready_i[s*T*NumCores +: T*NumCores]),
      .core_resp_o        (core_resp_o      [s*T*NumCores +: T*NumCores]),
      .sg_mst_req_valid_o (sm_req_valid [s*NSG +: NSG]),
      .sg_mst_req_ready_i (sm_req_ready [s*NSG +: NSG]),
      .sg_mst_req_o       (sm_req       [s*NSG +: NSG]),
      .sg_mst_resp_valid_i(sm_resp_valid[s*NSG +: NSG]),
      .sg_mst_resp_ready_o(sm_resp_ready[s*NSG +: NSG]),
      .sg_mst_resp_i      (sm_resp      [s*NSG +: NSG]),
      .sg_slv_req_valid_i (ss_req_valid [s*NSG +: NSG]),
      .sg_slv_req_ready_o (ss_req_ready [s*NSG +: NSG]),
      .sg_slv_req_i       (ss_req       [s*NSG +: NSG]),
      .sg_slv_resp_valid_o(ss_resp_valid[s*NSG +: NSG]),
      .sg_slv_resp_ready_i(ss_resp_ready[s*NSG +: NSG]),
      .sg_slv_resp_o      (ss_resp      [s*NSG +: NSG]),
      .g_mst_req_valid_o  (gm_req_valid [s*NGS +: NGS]),
      .g_mst_req_ready_i  (gm_req_ready [s*NGS +: NGS]),
      .g_mst_req_o        (gm_req       [s*NGS +: NGS]),
      .g_mst_resp_valid_i (gm_resp_valid[s*NGS +: NGS]),
      .g_mst_resp_ready_o (gm_resp_ready[s*NGS +: NGS]),
      .g_mst_resp_i       (gm_resp      [s*NGS +: NGS]),
      .g_slv_req_valid_i  (gs_req_valid [s*NGS +: NGS]),
      .g_slv_req_ready_o  (gs_req_ready [s*NGS +: NGS]),
      .g_slv_req_i        (gs_req       [s*NGS +: NGS]),
      .g_slv_resp_valid_o (gs_resp_valid[s*NGS +: NGS]),
      .g_slv_resp_ready_i (gs_resp_ready[s*NGS +: NGS]),
      .g_slv_resp_o       (gs_resp      [s*NGS +: NGS])
    );
  end

  // SubGroup s, direction j  ->  SubGroup (s+j) mod S, direction j.
  for (genvar s = 0; s < S; s++) begin : g_sg_link
    for (genvar j = 1; j < S; j++) begin : g_dir
      for (genvar t = 0; t < T; t++) begin : g_t
        localparam int unsigned M = s * NSG + (j - 1) * T + t;
        localparam int unsigned D = ((s + j) % S) * NSG + (j - 1) * T + t;
        assign ss_req_valid[D]  = sm_req_valid[M];
        assign ss_req[D]        = sm_req[M];
        assign sm_req_ready[M]  = ss_req_ready[D];
        assign sm_resp_valid[M] = ss_resp_valid[D];
        assign sm_resp[M]       = ss_resp[D];
        assign ss_resp_ready[D] = sm_resp_ready[M];
      end
    end
  end

  // Remote-Group crossbars, one per direction j.
  for (genvar j = 1; j < G; j++) begin : g_rg
    logic       [TS-1:0]          m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
    tcdm_req_t  [TS-1:0]          m_req;
    tcdm_resp_t [TS-1:0]          m_resp;
    logic       [TS-1:0][TsW-1:0] m_sel;
    logic       [TS-1:0]          x_req_valid, x_req_ready, x_resp_valid, x_resp_ready;
    tcdm_req_t  [TS-1:0]          x_req;
    tcdm_resp_t [TS-1:0]          x_resp;
    logic       [TS-1:0][TsW-1:0] x_sel;

    for (genvar s = 0; s < S; s++) begin : g_s
      for (genvar t = 0; t < T; t++) begin : g_t
        localparam int unsigned I = s * T + t;                 // Tile in Group
        localparam int unsigned Q = s * NGS + (j - 1) * T + t; // SubGroup port
        localparam int unsigned P = (j - 1) * TS + I;          // Group port
        // Crossbar inputs: Tile I's master port for direction j.
        assign m_req_valid[I]   = gm_req_valid[Q];
        assign m_req[I]         = gm_req[Q];
        assign m_sel[I]         = gm_req[Q].addr[2 + BankW +: TsW];
        assign gm_req_ready[Q]  = m_req_ready[I];
        assign gm_resp_valid[Q] = m_resp_valid[I];
        assign gm_resp[Q]       = m_resp[I];
        assign m_resp_ready[I]  = gm_resp_ready[Q];
        assign x_sel[I]         = x_resp[I].id[CoreW +: TsW];

        // Crossbar output I leaves toward Tile I of Group (own+j).
        spill_pipe #(.data_t(tcdm_req_t), .Depth(MstDepth)) i_mst_req (
          .clk_i,
          .rst_ni,
          .valid_i(x_req_valid[I]),
          .ready_o(x_req_ready[I]),
          .data_i (x_req[I]),
          .valid_o(g_mst_req_valid_o[P]),
          .ready_i(g_mst_req_ready_i[P]),
          .data_o (g_mst_req_o[P])
        );
        spill_pipe #(.data_t(tcdm_resp_t), .Depth(MstDepth)) i_mst_resp (
          .clk_i,
          .rst_ni,
          .valid_i(g_mst_resp_valid_i[P]),
          .ready_o(g_mst_resp_ready_o[P]),
          .data_i (g_mst_resp_i[P]),
          .valid_o(x_resp_valid[I]),
          .ready_i(x_resp_ready[I]),
          .data_o (x_resp[I])
        );

        // Requests from Group (own-j) enter Tile I's slave port.
        spill_pipe #(.data_t(tcdm_req_t), .Depth(SlvDepth)) i_slv_req (
          .clk_i,
          .rst_ni,
          .valid_i(g_slv_req_valid_i[P]),
          .ready_o(g_slv_req_ready_o[P]),
          .data_i (g_slv_req_i[P]),
          .valid_o(gs_req_valid[Q]),
          .ready_i(gs_req_ready[Q]),
          .data_o (gs_req[Q])
        );
        spill_pipe #(.data_t(tcdm_resp_t), .Depth(SlvDepth)) i_slv_resp (
          .clk_i,
          .rst_ni,
          .valid_i(gs_resp_valid[Q]),
          .ready_o(gs_resp_ready[Q]),
          .data_i (gs_resp[Q]),
          .valid_o(g_slv_resp_valid_o[P]),
          .ready_i(g_slv_resp_ready_i[P]),
          .data_o (g_slv_resp_o[P])
        );
      end
    end

    tcdm_xbar #(
      .NumMst(TS),
      .NumSlv(TS)
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
      .slv_req_valid_o (x_req_valid),
      .slv_req_ready_i (x_req_ready),
      .slv_req_o       (x_req),
      .slv_resp_valid_i(x_resp_valid),
      .slv_resp_ready_o(x_resp_ready),
      .slv_resp_i      (x_resp),
      .resp_sel_i      (x_sel)
    );
  end

  // Only the four latency configurations of the paper are built.
  initial begin
    assert (RemoteGroupLatency inside {5, 7, 9, 11})
      else $error("group: RemoteGroupLatency must be 5, 7, 9 or 11");
  end

endmodule
