// spill_register: elastic pipeline stage with two entries.
//
// It is the register placed on the TCDM interconnect at hierarchy
// boundaries. Every output (valid, data, and the ready going upstream) comes
// straight from a flip-flop, so the stage cuts combinational paths in both
// directions. A beat entering an empty stage leaves one cycle later; with a
// steady stream the stage passes one beat per cycle. If the downstream side
// stalls, the second entry catches the beat already accepted on the cycle
// the stall is seen.
//
// Interface: valid/ready handshake on both sides; a beat moves when valid and
// ready are both high at a clock edge. Reset empties both entries.
// The paper names spill registers and where they go; their inside is the
// usual two-slot construction and is this design's choice.
module spill_register #(
  parameter type data_t = logic [31:0]
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
  // Slot A feeds the output, slot B holds a beat while A is blocked.
  logic  a_full_q, b_full_q;
  data_t a_data_q, b_data_q;

  logic a_fill, a_drain, b_fill, b_drain;

  assign a_drain = a_full_q && ready_i;
  // A takes a new beat from upstream when B is empty and A is free or leaves.
  assign a_fill  = valid_i && ready_o && (!a_full_q || a_drain) && !b_full_q;
  // B takes the upstream beat when A is full and stays full.
  assign b_fill  = valid_i && ready_o && a_full_q && !a_drain;
  // B moves into A as soon as A is free.
  assign b_drain = b_full_q && (!a_full_q || a_drain);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_full_q <= 1'b0;
      b_full_q <= 1'b0;
      a_data_q <= '0;
      b_data_q <= '0;
    end else begin
      if (b_drain) begin
        a_data_q <= b_data_q;
        a_full_q <= 1'b1;
      end else if (a_fill) begin
        a_data_q <= data_i;
        a_full_q <= 1'b1;
      end else if (a_drain) begin
        a_full_q <= 1'b0;
      end
      if (b_fill) begin
        b_data_q <= data_i;
        b_full_q <= 1'b1;
      end else if (b_drain) begin
        b_full_q <= 1'b0;
      end
    end
  end

  assign ready_o = !b_full_q;
  assign valid_o = a_full_q;
  assign data_o  = a_data_q;

endmodule
