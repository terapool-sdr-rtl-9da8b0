// xbar_half: one direction of a fully connected crossbar.
//
// NumIn sources each present a beat with a destination index; each of the
// NumOut destinations has its own round-robin arbiter choosing among the
// sources that address it. Routing is purely combinational: a beat crosses
// in the cycle it is offered. A source sees ready only when its beat won
// arbitration and the destination was ready, so backpressure also passes
// straight through. The arbiter pointer only moves on a completed transfer.
//
// The TCDM crossbar uses two of these, one for requests and one for
// responses.
module xbar_half #(
  parameter int unsigned NumIn  = 4,
  parameter int unsigned NumOut = 4,
  parameter type         data_t = logic [31:0],
  // Width of a destination index.
  parameter int unsigned SelW   = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic  [NumIn-1:0]    in_valid_i,
  output logic  [NumIn-1:0]    in_ready_o,
  input  data_t [NumIn-1:0]    in_data_i,
  input  logic  [NumIn-1:0][SelW-1:0] in_sel_i,
  output logic  [NumOut-1:0]   out_valid_o,
  input  logic  [NumOut-1:0]   out_ready_i,
  output data_t [NumOut-1:0]   out_data_o
);
  logic [NumOut-1:0][NumIn-1:0] req, gnt;
  logic [NumOut-1:0]            any;

  always_comb begin
    for (int unsigned o = 0; o < NumOut; o++) begin
      for (int unsigned i = 0; i < NumIn; i++) begin
        req[o][i] = in_valid_i[i] && (int'(in_sel_i[i]) == o);
      end
    end
  end

  for (genvar o = 0; o < NumOut; o++) begin : g_out
    rr_arbiter #(.N(NumIn)) i_arb (
      .clk_i,
      .rst_ni,
      .req_i    (req[o]),
      .advance_i(out_ready_i[o]),
      .gnt_o    (gnt[o]),
      .any_o    (any[o])
    );
  end

  always_comb begin
    out_valid_o = '0;
    out_data_o  = '0;
    in_ready_o  = '0;
    for (int unsigned o = 0; o < NumOut; o++) begin
      out_valid_o[o] = any[o];
      for (int unsigned i = 0; i < NumIn; i++) begin
        if (gnt[o][i]) begin
          out_data_o[o] = in_data_i[i];
          in_ready_o[i] = out_ready_i[o];
        end
      end
    end
  end

  // A source must hold its beat and destination until it is taken.
  for (genvar i = 0; i < NumIn; i++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      in_valid_i[i] && !in_ready_o[i] |=> in_valid_i[i] && $stable(in_sel_i[i]))
      else $error("xbar_half: source %0d dropped or changed a pending beat", i);
  end
  // A stalled output keeps offering the same beat (the arbiter locks).
  for (genvar o = 0; o < NumOut; o++) begin : g_chk_out
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      out_valid_o[o] && !out_ready_i[o] |=> out_valid_o[o] && $stable(out_data_o[o]))
      else $error("xbar_half: output %0d changed a stalled beat", o);
  end

endmodule
