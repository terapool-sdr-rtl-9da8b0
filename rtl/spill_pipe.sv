// spill_pipe: a chain of Depth spill registers (Depth = 0 is a plain wire).
//
// Used where the latency configuration of the cluster decides how many
// register stages sit on a path: each stage adds one cycle of latency and
// keeps the full throughput of one beat per cycle.
module spill_pipe #(
  parameter type         data_t = logic [31:0],
  parameter int unsigned Depth  = 1
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  valid_i,
  output logic  ready_o,
  input  data_t data_i,
  output logic  valid_o,
  input  logic  ready_i,
  output data_t data_o
);
  logic  [Depth:0] valid, ready;
  data_t [Depth:0] data;

  assign valid[0] = valid_i;
  assign data[0]  = data_i;
  assign ready_o  = ready[0];
  assign valid_o  = valid[Depth];
  assign data_o   = data[Depth];
  assign ready[Depth] = ready_i;

  for (genvar d = 0; d < Depth; d++) begin : g_stage
    spill_register #(.data_t(data_t)) i_reg (
      .clk_i,
      .rst_ni,
      .valid_i(valid[d]),
      .ready_o(ready[d]),
      .data_i (data[d]),
      .valid_o(valid[d+1]),
      .ready_i(ready[d+1]),
      .data_o (data[d+1])
    );
  end

endmodule
