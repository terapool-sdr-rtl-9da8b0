// tb_tcdm_bank: reads and writes with byte enables against a reference
// array, the one-cycle latency, and the hold of a response that is not
// taken (the bank must then refuse new requests).
module tb_tcdm_bank;
  import tcdm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned Words = 64;
  localparam int unsigned RowLsb = 4;

  logic req_valid = 1'b0, req_ready, resp_valid, resp_ready = 1'b1;
  tcdm_req_t req = '0;
  tcdm_resp_t resp;

  tcdm_bank #(.NumWords(Words), .RowLsb(RowLsb)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .resp_valid_o(resp_valid), .resp_ready_i(resp_ready), .resp_o(resp)
  );

  int checks = 0, failures = 0;
  logic [31:0] model [Words];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One access; checks latency 1 and identifier; returns read data.
  task automatic access(input int row, input logic wen, input logic [3:0] be,
                        input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    req = '0;
    req.addr = 32'(row << RowLsb) | 32'h4;   // bits below RowLsb do not matter
    req.wen = wen; req.be = be; req.wdata = wd; req.id = 16'(row + 7);
    req_valid = 1'b1;
    #1 check(req_ready, "ready when idle");
    @(negedge clk);
    req_valid = 1'b0;
    check(resp_valid && resp.id == 16'(row + 7) && resp.wen == wen, "response after one cycle");
    rd = resp.rdata;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < Words; r++) begin
      model[r] = $urandom;
      access(r, 1'b1, 4'hF, model[r], rd);
    end
    for (int i = 0; i < 400; i++) begin
      int r;
      logic [3:0] be;
      logic [31:0] d;
      r = $urandom % Words; be = 4'($urandom); d = $urandom;
      if ($urandom % 2) begin
        access(r, 1'b1, be, d, rd);
        for (int b = 0; b < 4; b++) if (be[b]) model[r][8*b +: 8] = d[8*b +: 8];
      end else begin
        access(r, 1'b0, 4'h0, 0, rd);
        check(rd == model[r], $sformatf("row %0d read %h expected %h", r, rd, model[r]));
      end
    end
    // Backpressure: response not taken, bank must hold it and stall.
    @(negedge clk);
    resp_ready = 1'b0;
    req = '0; req.addr = 32'(5 << RowLsb); req.id = 16'h55; req_valid = 1'b1;
    @(negedge clk);
    req.addr = 32'(6 << RowLsb); req.id = 16'h66;
    #1 check(!req_ready, "stalled while a response waits");
    repeat (3) @(negedge clk);
    check(resp_valid && resp.id == 16'h55 && resp.rdata == model[5], "held response");
    resp_ready = 1'b1;
    #1 check(req_ready, "ready once the response is taken");
    @(negedge clk);
    req_valid = 1'b0;
    check(resp_valid && resp.id == 16'h66 && resp.rdata == model[6], "next response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
