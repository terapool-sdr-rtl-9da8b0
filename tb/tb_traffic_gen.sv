// tb_traffic_gen: behavioural stand-in for one core's load/store unit.
//
// It replaces a core with a traffic generator, the way the cluster's
// interconnect is evaluated: in every cycle a new request is started with
// probability Rate/65536 (a Bernoulli approximation of a Poisson process),
// as long as fewer than MaxOutstanding (8, as for the real cores) requests
// are in flight. Each request is a read or a write of a random word among
// the words this generator owns inside its scope (Scope 0: own Tile, 1: own
// SubGroup, 2: own Group, 3: whole cluster). Ownership keeps different
// generators from writing the same word, so every read can be checked
// against a shadow copy: with NB banks and NC cores in the scope, word
// (row r, scope bank b) belongs to core (b + 5r) mod NC of the scope; the
// rotation by r spreads a generator's words over the whole scope. Reads of
// never-written words are not checked.
//
// The identifier is {tag, core index}; the tag is the slot of the request.
// The generator holds a request stable until it is accepted and counts
// statistics (requests, per-level counts and latencies, stalls, errors).
// `resp_stall_i` makes it refuse responses, to exercise backpressure.
module tb_traffic_gen
  import tcdm_pkg::*;
#(
  parameter int unsigned CoreIdx        = 0,
  parameter int unsigned NumCores       = 8,
  parameter int unsigned BanksPerTile   = 32,
  parameter int unsigned TilesPerSG     = 8,
  parameter int unsigned SGsPerGroup    = 4,
  parameter int unsigned NumGroups      = 4,
  parameter int unsigned BankWords      = 256,
  parameter int unsigned MaxOutstanding = 8,
  parameter int unsigned Scope          = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        enable_i,
  input  int unsigned rate_i,
  input  logic        resp_stall_i,
  output logic        req_valid_o,
  input  logic        req_ready_i,
  output tcdm_req_t   req_o,
  input  logic        resp_valid_i,
  output logic        resp_ready_o,
  input  tcdm_resp_t  resp_i
);
  localparam int unsigned NumTiles = TilesPerSG * SGsPerGroup * NumGroups;
  localparam int unsigned NumBanks = BanksPerTile * NumTiles;
  localparam int unsigned NumTot   = NumCores * NumTiles;
  localparam int unsigned CoreW    = $clog2(NumTot);
  // Tiles in the scope.
  localparam int unsigned ScTiles  = (Scope == 0) ? 1 : (Scope == 1) ? TilesPerSG :
                                     (Scope == 2) ? TilesPerSG * SGsPerGroup : NumTiles;
  localparam int unsigned NB       = ScTiles * BanksPerTile;
  localparam int unsigned NC       = ScTiles * NumCores;
  localparam int unsigned Q        = NB / NC;
  localparam int unsigned OwnWords = BankWords * Q;
  localparam int unsigned BaseBank = (CoreIdx / NC) * NB;

  // Shadow of the owned words.
  logic [31:0] shadow [OwnWords];
  logic        written [OwnWords];

  // In-flight slots.
  logic        busy   [MaxOutstanding];
  logic        s_read [MaxOutstanding];
  logic [31:0] s_exp  [MaxOutstanding];
  logic        s_chk  [MaxOutstanding];
  int unsigned s_t0   [MaxOutstanding];
  int unsigned s_lvl  [MaxOutstanding];

  // Statistics.
  int unsigned cycle;
  int unsigned n_issued, n_done, n_reads, n_writes, n_checked, n_errors;
  int unsigned n_stall_cycles, n_resp_stalls, n_full;
  int unsigned lvl_count [4];
  int unsigned lvl_min [4];
  longint unsigned lvl_lat_sum [4];
  longint unsigned lat_sum;

  function automatic int unsigned level_of(int unsigned bank);
    int unsigned bt, ct;
    bt = bank / BanksPerTile;
    ct = CoreIdx / NumCores;
    if (bt == ct) return 0;
    if (bt / TilesPerSG == ct / TilesPerSG) return 1;
    if (bt / (TilesPerSG * SGsPerGroup) == ct / (TilesPerSG * SGsPerGroup)) return 2;
    return 3;
  endfunction

  logic pending;
  int unsigned pend_slot, pend_lvl;

  assign resp_ready_o = !resp_stall_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_valid_o <= 1'b0;
      req_o       <= '0;
      pending     <= 1'b0;
      pend_slot   <= 0;
      pend_lvl    <= 0;
      cycle       <= 0;
      n_issued <= 0; n_done <= 0; n_reads <= 0; n_writes <= 0; n_checked <= 0;
      n_errors <= 0; n_stall_cycles <= 0; n_resp_stalls <= 0; n_full <= 0; lat_sum <= 0;
      for (int l = 0; l < 4; l++) begin
        lvl_count[l] <= 0; lvl_lat_sum[l] <= 0; lvl_min[l] <= 32'hffff_ffff;
      end
      for (int i = 0; i < MaxOutstanding; i++) busy[i] <= 1'b0;
      for (int i = 0; i < OwnWords; i++) written[i] <= 1'b0;
    end else begin
      cycle <= cycle + 1;
      // Response side.
      if (resp_valid_i && !resp_ready_o) n_resp_stalls <= n_resp_stalls + 1;
      if (resp_valid_i && resp_ready_o) begin
        int unsigned tag;
        tag = int'(resp_i.id[CoreW +: 3]);
        if (int'(resp_i.id[CoreW-1:0]) != CoreIdx || !busy[tag] ||
            resp_i.wen == s_read[tag]) begin
          n_errors <= n_errors + 1;
          $display("core %0d: unexpected response id=%h", CoreIdx, resp_i.id);
        end else begin
          busy[tag] <= 1'b0;
          n_done    <= n_done + 1;
          lat_sum   <= lat_sum + longint'(cycle - s_t0[tag]);
          lvl_count[s_lvl[tag]]   <= lvl_count[s_lvl[tag]] + 1;
          lvl_lat_sum[s_lvl[tag]] <= lvl_lat_sum[s_lvl[tag]] + longint'(cycle - s_t0[tag]);
          if (cycle - s_t0[tag] < lvl_min[s_lvl[tag]]) lvl_min[s_lvl[tag]] <= cycle - s_t0[tag];
          if (s_read[tag] && s_chk[tag]) begin
            n_checked <= n_checked + 1;
            if (resp_i.rdata != s_exp[tag]) begin
              n_errors <= n_errors + 1;
              $display("core %0d: read data %h, expected %h", CoreIdx, resp_i.rdata, s_exp[tag]);
            end
          end
        end
      end
      // Request side.
      if (req_valid_o && !req_ready_i) n_stall_cycles <= n_stall_cycles + 1;
      if (req_valid_o && req_ready_i) begin
        req_valid_o <= 1'b0;
        s_t0[pend_slot] <= cycle;  // latency counted from the accepting edge
      end
      if ((!req_valid_o || req_ready_i) && enable_i && ($urandom % 65536) < rate_i) begin
        int free;
        free = -1;
        for (int i = 0; i < MaxOutstanding; i++)
          if (!busy[i] && free < 0 && !(req_valid_o && i == pend_slot)) free = i;
        if (free < 0) begin
          n_full <= n_full + 1;
        end else begin
          int unsigned r, q, bank, own, word;
          logic wr;
          logic [31:0] d;
          r    = $urandom % BankWords;
          q    = $urandom % Q;
          bank = BaseBank + ((CoreIdx % NC) + NC * 5 - (r * 5) % NC) % NC + q * NC;
          own  = r * Q + q;
          word = r * NumBanks + bank;
          wr   = ($urandom % 2) == 1;
          d    = $urandom;
          req_valid_o     <= 1'b1;
          req_o.addr      <= 32'(word * 4);
          req_o.wen       <= wr;
          req_o.be        <= '1;
          req_o.wdata     <= wr ? d : '0;
          req_o.id        <= '0;
          req_o.id[CoreW-1:0]   <= CoreW'(CoreIdx);
          req_o.id[CoreW +: 3]  <= 3'(free);
          busy[free]   <= 1'b1;
          s_read[free] <= !wr;
          s_chk[free]  <= written[own];
          s_exp[free]  <= shadow[own];
          s_lvl[free]  <= level_of(bank);
          s_t0[free]   <= cycle;
          pend_slot    <= free;
          n_issued     <= n_issued + 1;
          if (wr) begin
            shadow[own]  <= d;
            written[own] <= 1'b1;
            n_writes     <= n_writes + 1;
          end else begin
            n_reads <= n_reads + 1;
          end
        end
      end
    end
  end


endmodule
