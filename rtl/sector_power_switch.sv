// sector_power_switch -- behavioural model of the footer sleep transistor of one
// sector group and of the inverter that reports its state. Not synthesizable
// logic in the real chip: it stands for a transistor and a sense inverter.
//
// The transistor sits between the sectors' virtual ground and ground; its gate
// is driven by the sleep request, which is high while the sector is ON. An
// inverter on the virtual ground returns the sleep acknowledge: high when the
// virtual ground is pulled low, i.e. the sector is powered. A complete cycle
// follows the sleep timing diagram: the request falls, and after t_sleep the
// acknowledge falls (sector OFF); the request rises, and after t_wakeup the
// acknowledge rises (sector ON). Between the two edges the sector is in
// transition and must not be accessed. The delays are given here in clock
// cycles (T_SLEEP_CYC, T_WAKE_CYC, at least 1); the paper reports a wakeup
// latency of 0.072 ns, under one clock period, and no sleep latency. A request
// that reverses before the acknowledge has followed restarts the delay.
// After reset the sector is OFF, which is this model's choice.
module sector_power_switch #(
  parameter int unsigned T_SLEEP_CYC = 1,
  parameter int unsigned T_WAKE_CYC  = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sleep_req_n,   // high: keep the sector ON; low: request sleep
  output logic sleep_ack_n    // high: sector powered; low: sector asleep
);

  localparam int unsigned CNT_W = $clog2((T_SLEEP_CYC > T_WAKE_CYC ? T_SLEEP_CYC : T_WAKE_CYC) + 1);

  logic [CNT_W-1:0] cnt;   // cycles the request has differed from the acknowledge

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sleep_ack_n <= 1'b0;
      cnt         <= '0;
    end else if (sleep_req_n == sleep_ack_n) begin
      cnt <= '0;
    end else if (sleep_req_n && cnt == CNT_W'(T_WAKE_CYC - 1)) begin
      sleep_ack_n <= 1'b1;           // virtual ground has settled: ON
      cnt         <= '0;
    end else if (!sleep_req_n && cnt == CNT_W'(T_SLEEP_CYC - 1)) begin
      sleep_ack_n <= 1'b0;           // sector discharged: OFF
      cnt         <= '0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
