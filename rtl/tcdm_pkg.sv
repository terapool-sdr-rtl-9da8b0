// tcdm_pkg: types shared by every level of the L1 (TCDM) interconnect.
//
// A request carries the byte address, a write flag with byte enables and
// write data, and an identifier. A response carries read data, the same
// identifier and the write flag (a write still gets an acknowledgement
// response). The request and response networks are separate, as in the
// paper; the field widths of `be` and `id` are this design's choice.
//
// Identifier: the low bits of `id` hold the global index of the issuing
// core, laid out {group, subgroup, tile, core-in-tile}. Every response
// network routes on these bits, so no crossbar has to remember where a
// request came from. The bits above the core index are a free tag the core
// can use to tell its outstanding transactions apart.
//
// Address map (this design's choice): word interleaved over all banks.
//   addr[1:0]                     byte in word
//   next log2(BanksPerTile) bits  bank in Tile
//   next log2(TilesPerSubGroup)   Tile in SubGroup
//   next log2(SubGroupsPerGroup)  SubGroup in Group
//   next log2(NumGroups)          Group
//   next log2(BankWords)          row in the bank
// Higher address bits are ignored (the L1 aliases).
package tcdm_pkg;

  localparam int unsigned AddrWidth = 32;
  localparam int unsigned DataWidth = 32;
  localparam int unsigned BeWidth   = DataWidth / 8;
  localparam int unsigned IdWidth   = 16;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [BeWidth-1:0]   be_t;
  typedef logic [IdWidth-1:0]   id_t;

  typedef struct packed {
    addr_t addr;
    logic  wen;
    be_t   be;
    data_t wdata;
    id_t   id;
  } tcdm_req_t;

  typedef struct packed {
    data_t rdata;
    id_t   id;
    logic  wen;
  } tcdm_resp_t;

  // Zero-load latency of a core access, in cycles, for a given hierarchy
  // distance: 0 = own Tile, 1 = own SubGroup, 2 = own Group, 3 = other Group.
  function automatic int unsigned zero_load_latency(int unsigned level,
                                                    int unsigned remote_group_latency);
    case (level)
      0:       return 1;
      1:       return 3;
      2:       return 5;
      default: return remote_group_latency;
    endcase
  endfunction

endpackage
