// tcdm_xbar: fully connected TCDM crossbar between NumMst masters and NumSlv
// slaves, with separate request and response networks.
//
// Requests go from master m to slave req_sel_i[m]; responses go from slave s
// back to master resp_sel_i[s]. The caller computes both indices (from the
// request address and from the response's core identifier), which keeps this
// block free of any address map. Both networks are combinational with one
// round-robin arbiter per output, so a beat crosses in the cycle it is
// offered and a zero-load access through the crossbar adds no cycle.
//
// Every crossbar of the cluster is one of these: the Tile's (8+K)x32 local
// crossbar and 8xK remote request/response interconnect, the SubGroup's
// 8x8 crossbars and the Group's 32x32 crossbars. The paper describes them as
// logarithmic (a tree of 2:1 arbiters); this block gives the same routing and
// fairness with a flat arbiter per output.
module tcdm_xbar
  import tcdm_pkg::*;
#(
  parameter int unsigned NumMst = 4,
  parameter int unsigned NumSlv = 4,
  parameter int unsigned SlvSelW = (NumSlv > 1) ? $clog2(NumSlv) : 1,
  parameter int unsigned MstSelW = (NumMst > 1) ? $clog2(NumMst) : 1
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  // Master side.
  input  logic       [NumMst-1:0]           mst_req_valid_i,
  output logic       [NumMst-1:0]           mst_req_ready_o,
  input  tcdm_req_t  [NumMst-1:0]           mst_req_i,
  input  logic       [NumMst-1:0][SlvSelW-1:0] req_sel_i,
  output logic       [NumMst-1:0]           mst_resp_valid_o,
  input  logic       [NumMst-1:0]           mst_resp_ready_i,
  output tcdm_resp_t [NumMst-1:0]           mst_resp_o,
  // Slave side.
  output logic       [NumSlv-1:0]           slv_req_valid_o,
  input  logic       [NumSlv-1:0]           slv_req_ready_i,
  output tcdm_req_t  [NumSlv-1:0]           slv_req_o,
  input  logic       [NumSlv-1:0]           slv_resp_valid_i,
  output logic       [NumSlv-1:0]           slv_resp_ready_o,
  input  tcdm_resp_t [NumSlv-1:0]           slv_resp_i,
  input  logic       [NumSlv-1:0][MstSelW-1:0] resp_sel_i
);

  xbar_half #(
    .NumIn (NumMst),
    .NumOut(NumSlv),
    .data_t(tcdm_req_t),
    .SelW  (SlvSelW)
  ) i_req (
    .clk_i,
    .rst_ni,
    .in_valid_i (mst_req_valid_i),
    .in_ready_o (mst_req_ready_o),
    .in_data_i  (mst_req_i),
    .in_sel_i   (req_sel_i),
    .out_valid_o(slv_req_valid_o),
    .out_ready_i(slv_req_ready_i),
    .out_data_o (slv_req_o)
  );

  xbar_half #(
    .NumIn (NumSlv),
    .NumOut(NumMst),
    .data_t(tcdm_resp_t),
    .SelW  (MstSelW)
  ) i_resp (
    .clk_i,
    .rst_ni,
    .in_valid_i (slv_resp_valid_i),
    .in_ready_o (slv_resp_ready_o),
    .in_data_i  (slv_resp_i),
    .in_sel_i   (resp_sel_i),
    .out_valid_o(mst_resp_valid_o),
    .out_ready_i(mst_resp_ready_i),
    .out_data_o (mst_resp_o)
  );

endmodule
