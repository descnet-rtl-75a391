// tb_sector_power_switch -- checks the sleep/wake handshake of one sector
// switch: reset state OFF, acknowledge following the request after exactly
// T_WAKE_CYC / T_SLEEP_CYC clock edges, and a reversed request restarting the
// delay without a glitch on the acknowledge.
module tb_sector_power_switch;
  localparam int unsigned TS = 3;
  localparam int unsigned TW = 2;

  logic clk = 1'b0, rst_n = 1'b0, req_n = 1'b0, ack_n;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  sector_power_switch #(.T_SLEEP_CYC(TS), .T_WAKE_CYC(TW)) dut (
    .clk, .rst_n, .sleep_req_n(req_n), .sleep_ack_n(ack_n));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Change the request, then count rising clock edges until the acknowledge
  // equals it.
  task automatic transition(bit to, int unsigned expect_cyc);
    int n = 0;
    @(negedge clk) req_n = to;
    while (ack_n != to && n < 50) begin @(negedge clk); n++; end
    check(n == int'(expect_cyc), $sformatf("req %0b: ack after %0d cycles, expected %0d", to, n, expect_cyc));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    check(ack_n == 1'b0, "sector not OFF in reset");
    rst_n = 1'b1;
    repeat (4) @(negedge clk);
    check(ack_n == 1'b0, "sector woke without request");
    for (int i = 0; i < 4; i++) begin
      transition(1'b1, TW);   // OFF -> ON
      repeat (i + 1) @(negedge clk);
      check(ack_n == 1'b1, "sector did not stay ON");
      transition(1'b0, TS);   // ON -> OFF
      repeat (i + 1) @(negedge clk);
      check(ack_n == 1'b0, "sector did not stay OFF");
    end
    // Request reversed before the acknowledge followed: ack must not move.
    @(negedge clk) req_n = 1'b1;
    @(negedge clk) req_n = 1'b0;
    repeat (6) begin @(negedge clk); check(ack_n == 1'b0, "ack glitched on aborted wake"); end
    transition(1'b1, TW);
    @(negedge clk) req_n = 1'b0;
    @(negedge clk) req_n = 1'b1;
    repeat (6) begin @(negedge clk); check(ack_n == 1'b1, "ack glitched on aborted sleep"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
