// terapool_cluster: the whole shared-L1 cluster, the top of the design.
//
// NumGroups Groups (4 by default, placed 2x2 on the die) are linked all to
// all: for every ordered pair of Groups there are S*T request channels and
// S*T response channels (32 each by default), one per target Tile. Master
// direction j of Group g connects to slave direction j of Group (g+j) mod G.
// With the defaults the cluster has 1024 core ports and 4096 banks of 1 KiB,
// 4 MiB of L1 that every core can address (see tcdm_pkg for the address map).
//
// Latency configuration: RemoteGroupLatency selects the 1-3-5-X variant.
// Zero-load latency is 1 cycle to an own-Tile bank, 3 within the SubGroup,
// 5 within the Group and X to another Group. For X >= 7 one spill register
// is placed each way on every link between Groups here; X = 9 and 11 add
// registers inside the Groups (see group). X = 5 has no register between
// Groups.
//
// Interface: the TCDM ports of all cores, flat, core c of Tile t of
// SubGroup s of Group g at index ((g*S + s)*T + t)*NumCores + c, valid/ready
// on both the request and the response. Requests must keep valid and their
// contents stable until accepted. The cores themselves, their instruction
// caches, the DMA and the AXI system are not part of this module.
//
// From the paper: the hierarchy (8 cores and 32 banks per Tile, 8 Tiles per
// SubGroup, 4 SubGroups per Group, 4 Groups), the crossbar sizes, and the
// latency configurations 1-3-5-{5,7,9,11}. The default, 11, is the
// configuration with the highest clock (924 MHz typical) and peak
// performance (1.89 TOPS).
module terapool_cluster
  import tcdm_pkg::*;
#(
  parameter int unsigned NumCores           = 8,
  parameter int unsigned BanksPerTile       = 32,
  parameter int unsigned BankWords          = 256,
  parameter int unsigned TilesPerSubGroup   = 8,
  parameter int unsigned SubGroupsPerGroup  = 4,
  parameter int unsigned NumGroups          = 4,
  parameter int unsigned RemoteGroupLatency = 11,
  localparam int unsigned NumTotalCores = NumCores * TilesPerSubGroup * SubGroupsPerGroup
                                          * NumGroups
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic       [NumTotalCores-1:0] core_req_valid_i,
  output logic       [NumTotalCores-1:0] core_req_ready_o,
  input  tcdm_req_t  [NumTotalCores-1:0] core_req_i,
  output logic       [NumTotalCores-1:0] core_resp_valid_o,
  input  logic       [NumTotalCores-1:0] core_resp_ready_i,
  output tcdm_resp_t [NumTotalCores-1:0] core_resp_o
);
  localparam int unsigned G    = NumGroups;
  localparam int unsigned TS   = TilesPerSubGroup * SubGroupsPerGroup;
  localparam int unsigned NCG  = NumCores * TS;
  localparam int unsigned NG   = (G - 1) * TS;
  localparam int unsigned GrpW = $clog2(G);
  localparam int unsigned LinkDepth = (RemoteGroupLatency >= 7) ? 1 : 0;

  logic       [G*NG-1:0] m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
  tcdm_req_t  [G*NG-1:0] m_req;
  tcdm_resp_t [G*NG-1:0] m_resp;
  logic       [G*NG-1:0] s_req_valid, s_req_ready, s_resp_valid, s_resp_ready;
  tcdm_req_t  [G*NG-1:0] s_req;
  tcdm_resp_t [G*NG-1:0] s_resp;

  for (genvar g = 0; g < G; g++) begin : g_group
    group #(
      .NumCores          (NumCores),
      .BanksPerTile      (BanksPerTile),
      .BankWords         (BankWords),
      .TilesPerSubGroup  (TilesPerSubGroup),
      .SubGroupsPerGroup (SubGroupsPerGroup),
      .NumGroups         (NumGroups),
      .RemoteGroupLatency(RemoteGroupLatency)
    ) i_group (
      .clk_i,
      .rst_ni,
      .group_id_i        (GrpW'(g)),
      .core_req_valid_i  (core_req_valid_i [g*NCG +: NCG]),
      .core_req_ready_o  (core_req_ready_o [g*NCG +: NCG]),
      .core_req_i        (core_req_i       [g*NCG +: NCG]),
      .core_resp_valid_o (core_resp_valid_o[g*NCG +: NCG]),
      .core_resp_ready_i (core_resp_ready_i[g*NCG +: NCG]),
      .core_resp_o       (core_resp_o      [g*NCG +: NCG]),
      .g_mst_req_valid_o (m_req_valid [g*NG +: NG]),
      .g_mst_req_ready_i (m_req_ready [g*NG +: NG]),
      .g_mst_req_o       (m_req       [g*NG +: NG]),
      .g_mst_resp_valid_i(m_resp_valid[g*NG +: NG]),
      .g_mst_resp_ready_o(m_resp_ready[g*NG +: NG]),
      .g_mst_resp_i      (m_resp      [g*NG +: NG]),
      .g_slv_req_valid_i (s_req_valid [g*NG +: NG]),
      .g_slv_req_ready_o (s_req_ready [g*NG +: NG]),
      .g_slv_req_i       (s_req       [g*NG +: NG]),
      .g_slv_resp_valid_o(s_resp_valid[g*NG +: NG]),
      .g_slv_resp_ready_i(s_resp_ready[g*NG +: NG]),
      .g_slv_resp_o      (s_resp      [g*NG +: NG])
    );
  end

  // Group g, direction j  ->  Group (g+j) mod G, direction j.
  for (genvar g = 0; g < G; g++) begin : g_link
    for (genvar j = 1; j < G; j++) begin : g_dir
      for (genvar i = 0; i < TS; i++) begin : g_tile
        localparam int unsigned M = g * NG + (j - 1) * TS + i;
        localparam int unsigned D = ((g + j) % G) * NG + (j - 1) * TS + i;
        spill_pipe #(.data_t(tcdm_req_t), .Depth(LinkDepth)) i_req (
          .clk_i,
          .rst_ni,
          .valid_i(m_req_valid[M]),
          .ready_o(m_req_ready[M]),
          .data_i (m_req[M]),
          .valid_o(s_req_valid[D]),
          .ready_i(s_req_ready[D]),
          .data_o (s_req[D])
        );
        spill_pipe #(.data_t(tcdm_resp_t), .Depth(LinkDepth)) i_resp (
          .clk_i,
          .rst_ni,
          .valid_i(s_resp_valid[D]),
          .ready_o(s_resp_ready[D]),
          .data_i (s_resp[D]),
          .valid_o(m_resp_valid[M]),
          .ready_i(m_resp_ready[M]),
          .data_o (m_resp[M])
        );
      end
    end
  end

endmodule
