// tb_spill_register: random valid/ready traffic through one spill register.
//
// Checks that beats leave in order and unchanged, that a beat entering an
// empty register leaves exactly one cycle later, that a continuous stream
// passes at one beat per cycle, and that ready drops only with both entries
// full.
module tb_spill_register;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic valid_i = 1'b0, ready_o, valid_o, ready_i = 1'b0;
  logic [31:0] data_i = '0, data_o;

  spill_register #(.data_t(logic [31:0])) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .valid_i, .ready_o, .data_i, .valid_o, .ready_i, .data_o
  );

  int checks = 0, failures = 0;
  logic [31:0] q [$];
  int unsigned sent = 0, recv = 0, in_flight = 0;
  logic random_mode = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Scoreboard at every edge.
  always @(posedge clk) if (rst_n) begin
    if (!ready_o) check(q.size() == 2, "ready low only when both entries are full");
    if (valid_i && ready_o) begin q.push_back(data_i); sent++; end
    if (valid_o && ready_i) begin
      check(q.size() > 0 && q[0] == data_o, $sformatf("data %h in order", data_o));
      if (q.size() > 0) void'(q.pop_front());
      recv++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // Latency on an empty register.
    @(negedge clk);
    valid_i = 1'b1; data_i = 32'hA5A5_0001; ready_i = 1'b1;
    @(negedge clk);
    valid_i = 1'b0;
    check(valid_o && data_o == 32'hA5A5_0001, "one cycle latency");
    @(negedge clk);
    check(!valid_o, "empty again");
    // Full throughput: 50 beats back to back.
    t = 0;
    for (int i = 0; i < 50; i++) begin
      valid_i = 1'b1; data_i = 32'(i + 100);
      @(negedge clk);
      if (valid_o) t++;
    end
    valid_i = 1'b0;
    check(t == 50, $sformatf("back-to-back stream, %0d of 50 cycles with output", t));
    repeat (3) @(negedge clk);
    // Random stalls on both sides.
    for (int i = 0; i < 3000; i++) begin
      if (!valid_i || ready_o) begin
        valid_i = ($urandom % 3) != 0;
        data_i  = $urandom;
      end
      ready_i = ($urandom % 2) == 0;
      @(negedge clk);
    end
    valid_i = 1'b0; ready_i = 1'b1;
    repeat (5) @(negedge clk);
    check(sent == recv && q.size() == 0, $sformatf("all %0d beats delivered", sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
