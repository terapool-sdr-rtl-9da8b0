// tcdm_bank: one L1 SRAM bank of the shared scratchpad (1 KiB by default,
// 256 words of 32 bits), with a registered response.
//
// A request accepted at a clock edge is answered one cycle later: reads
// return the addressed word, writes update the bytes selected by `be` and
// return an acknowledgement with the request's identifier. The response is
// held in an output register until it is taken; a new request is accepted
// only while that register is empty or being emptied in the same cycle, so
// the bank runs at one access per cycle and never loses a response.
//
// Interface: valid/ready request port, valid/ready response port. The row is
// taken from the address bits above the bank-select bits, starting at bit
// `RowLsb`. The paper gives the bank size and the single-cycle local access;
// the handshake and the write acknowledgement are this design's choice. The
// array is written as a plain memory so a macro can replace it.
module tcdm_bank
  import tcdm_pkg::*;
#(
  parameter int unsigned NumWords = 256,
  parameter int unsigned RowLsb   = 14
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       req_valid_i,
  output logic       req_ready_o,
  input  tcdm_req_t  req_i,
  output logic       resp_valid_o,
  input  logic       resp_ready_i,
  output tcdm_resp_t resp_o
);
  localparam int unsigned RowW = (NumWords > 1) ? $clog2(NumWords) : 1;

  data_t mem_q [NumWords];
  logic  [RowW-1:0] row;
  logic  resp_valid_q;
  tcdm_resp_t resp_q;

  assign row          = req_i.addr[RowLsb +: RowW];
  assign req_ready_o  = !resp_valid_q || resp_ready_i;
  assign resp_valid_o = resp_valid_q;
  assign resp_o       = resp_q;

  // Memory array: no reset, as in an SRAM macro.
  always_ff @(posedge clk_i) begin
    if (req_valid_i && req_ready_o && req_i.wen) begin
      for (int unsigned b = 0; b < BeWidth; b++) begin
        if (req_i.be[b]) mem_q[row][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      resp_valid_q <= 1'b0;
      resp_q       <= '0;
    end else if (req_valid_i && req_ready_o) begin
      resp_valid_q <= 1'b1;
      resp_q.id    <= req_i.id;
      resp_q.wen   <= req_i.wen;
      resp_q.rdata <= req_i.wen ? '0 : mem_q[row];
    end else if (resp_ready_i) begin
      resp_valid_q <= 1'b0;
    end
  end

endmodule
