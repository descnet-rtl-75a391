// tb_descnet_pmu -- runs the power manager through an eight-operation
// inference with small memories (16/16/16/32 rows in 2/2/4/2 sectors) and real
// sector switches (wake 3 cycles, sleep 2). For every operation it checks,
// against masks and offsets computed here with ceiling divisions:
//   * the sleep requests and, once settled, the acknowledges equal the
//     sectors the operation needs;
//   * inside the lead window the next operation's sectors are requested too;
//   * the shared-memory overflow offsets and lengths;
//   * spm_ready is high from the first cycle of an operation that followed a
//     full-length one (wakeup hidden), and low for some cycles after an
//     operation that ended early (stall);
//   * prof_err for an operation whose overflow exceeds the shared memory;
//   * done at the end, after which every sector goes to sleep.
module tb_descnet_pmu;
  import descnet_pkg::*;

  localparam int unsigned SZ_S = 256, SC_S = 2, SZ_D = 256, SC_D = 2;
  localparam int unsigned SZ_W = 256, SC_W = 4, SZ_A = 512, SC_A = 2;
  localparam int unsigned LEAD = 6, TW = 3, TS = 2;
  localparam int unsigned RS = 16, RD = 16, RW = 16, RA = 32;
  localparam int NOPS = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            cfg_we = 0;
  logic [OP_W-1:0] cfg_op = '0;
  op_profile_t     cfg_prof = '0;
  logic [OP_W:0]   cfg_num_ops = '0;
  logic            start = 0, op_done = 0;
  logic            busy, done, spm_ready, early_wake, prof_err;
  logic [OP_W-1:0] op_idx;
  addr_t           sh_base [3], sh_len [3];
  logic [SC_S-1:0] rq_s, ak_s;
  logic [SC_D-1:0] rq_d, ak_d;
  logic [SC_W-1:0] rq_w, ak_w;
  logic [SC_A-1:0] rq_a, ak_a;

  descnet_pmu #(.SZ_S(SZ_S), .SC_S(SC_S), .SZ_D(SZ_D), .SC_D(SC_D), .SZ_W(SZ_W), .SC_W(SC_W),
                .SZ_A(SZ_A), .SC_A(SC_A), .WAKE_LEAD(LEAD)) dut (
    .clk, .rst_n, .cfg_we, .cfg_op, .cfg_prof, .cfg_num_ops, .start, .op_done, .busy, .done,
    .op_idx, .spm_ready, .early_wake, .prof_err, .sh_base, .sh_len,
    .sleep_req_n_s(rq_s), .sleep_req_n_d(rq_d), .sleep_req_n_w(rq_w), .sleep_req_n_a(rq_a),
    .sleep_ack_n_s(ak_s), .sleep_ack_n_d(ak_d), .sleep_ack_n_w(ak_w), .sleep_ack_n_a(ak_a));

  for (genvar k = 0; k < SC_S; k++) begin : g_s
    sector_power_switch #(.T_SLEEP_CYC(TS), .T_WAKE_CYC(TW)) u (.clk, .rst_n, .sleep_req_n(rq_s[k]), .sleep_ack_n(ak_s[k]));
  end
  for (genvar k = 0; k < SC_D; k++) begin : g_d
    sector_power_switch #(.T_SLEEP_CYC(TS), .T_WAKE_CYC(TW)) u (.clk, .rst_n, .sleep_req_n(rq_d[k]), .sleep_ack_n(ak_d[k]));
  end
  for (genvar k = 0; k < SC_W; k++) begin : g_w
    sector_power_switch #(.T_SLEEP_CYC(TS), .T_WAKE_CYC(TW)) u (.clk, .rst_n, .sleep_req_n(rq_w[k]), .sleep_ack_n(ak_w[k]));
  end
  for (genvar k = 0; k < SC_A; k++) begin : g_a
    sector_power_switch #(.T_SLEEP_CYC(TS), .T_WAKE_CYC(TW)) u (.clk, .rst_n, .sleep_req_n(rq_a[k]), .sleep_ack_n(ak_a[k]));
  end

  // usage in rows: data, weights, accumulators; cycles; does the op end early
  int unsigned U [NOPS][3] = '{'{16, 2, 20}, '{5, 2, 30}, '{2, 27, 10}, '{20, 5, 40},
                               '{5, 5, 5},   '{16, 16, 32}, '{30, 0, 0}, '{40, 1, 1}};
  int unsigned CYC [NOPS] = '{30, 30, 30, 30, 1000, 30, 30, 30};
  int unsigned RUN [NOPS] = '{30, 30, 30, 30, 10,   30, 30, 30};

  function automatic int unsigned ovf(int unsigned u, int unsigned rows);
    return u > rows ? u - rows : 0;
  endfunction
  function automatic int unsigned mask(int unsigned u, int unsigned sector_rows, int unsigned sc);
    int unsigned n;
    n = (u + sector_rows - 1) / sector_rows;
    if (n > sc) n = sc;
    return (1 << n) - 1;
  endfunction
  // all sleep requests of op i as one vector {s, d, w, a}
  function automatic logic [9:0] need(int i);
    int unsigned sh;
    sh = ovf(U[i][0], RD) + ovf(U[i][1], RW) + ovf(U[i][2], RA);
    return {SC_S'(mask(sh, RS / SC_S, SC_S)), SC_D'(mask(U[i][0], RD / SC_D, SC_D)),
            SC_W'(mask(U[i][1], RW / SC_W, SC_W)), SC_A'(mask(U[i][2], RA / SC_A, SC_A))};
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  logic [9:0] rq, ak;
  assign rq = {rq_s, rq_d, rq_w, rq_a};
  assign ak = {ak_s, ak_d, ak_w, ak_a};

  int unsigned stalls_seen = 0, early_seen = 0, done_seen = 0;
  always @(posedge clk) if (rst_n && done) done_seen++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NOPS; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_op = OP_W'(i);
      cfg_prof = '{d_rows: ADDR_W'(U[i][0]), w_rows: ADDR_W'(U[i][1]), a_rows: ADDR_W'(U[i][2]),
                   cycles: CYC_W'(CYC[i])};
    end
    @(negedge clk) cfg_we = 0; cfg_num_ops = (OP_W+1)'(NOPS);
    check(rq == '0 && ak == '0, "sectors not all asleep before start");
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int i = 0; i < NOPS; i++) begin
      int unsigned stall, t;
      bit lead_checked;
      stall = 0; t = 0; lead_checked = 0;
      check(busy && op_idx == OP_W'(i), $sformatf("op %0d not current", i));
      while (!spm_ready && stall < 100) begin @(negedge clk); stall++; end
      t = stall;
      if (i == 0 || i == 5) begin
        check(stall > 0, $sformatf("op %0d: expected a wake-up stall", i));
        if (i == 5 && stall > 0) stalls_seen++;
      end else begin
        check(stall == 0, $sformatf("op %0d: %0d stall cycles although woken ahead", i, stall));
      end
      // layout of the shared memory
      begin
        int unsigned od, ow, oa;
        od = ovf(U[i][0], RD); ow = ovf(U[i][1], RW); oa = ovf(U[i][2], RA);
        check(sh_base[0] == 0 && sh_base[1] == ADDR_W'(od) && sh_base[2] == ADDR_W'(od + ow),
              $sformatf("op %0d shared bases", i));
        check(sh_len[0] == ADDR_W'(od) && sh_len[1] == ADDR_W'(ow) && sh_len[2] == ADDR_W'(oa),
              $sformatf("op %0d shared lengths", i));
        check(prof_err == (od + ow + oa > RS), $sformatf("op %0d prof_err", i));
      end
      while (t < RUN[i]) begin
        // settled: requests and acks equal this op's needs
        if (t == TS + TW + 2 && RUN[i] > TS + TW + 2) begin
          check(rq == need(i), $sformatf("op %0d sleep requests %b, expected %b", i, rq, need(i)));
          check(ak == need(i), $sformatf("op %0d sector states %b, expected %b", i, ak, need(i)));
        end
        if (early_wake && !lead_checked && i + 1 < NOPS) begin
          @(negedge clk); t++;
          check(rq == (need(i) | need(i + 1)), $sformatf("op %0d lead window requests %b", i, rq));
          lead_checked = 1; early_seen++;
        end else begin
          @(negedge clk); t++;
        end
      end
      if (i + 1 < NOPS && RUN[i] == CYC[i]) check(lead_checked, $sformatf("op %0d: no pre-activation", i));
      op_done = 1;
      @(negedge clk) op_done = 0;
    end
    @(negedge clk);
    check(!busy && done_seen == 1, "done not signalled once");
    repeat (TS + 3) @(negedge clk);
    check(rq == '0 && ak == '0, "sectors not asleep after the last operation");
    check(stalls_seen == 1 && early_seen >= 5, "mechanisms not all exercised");
    $display("stalls %0d, pre-activations %0d", stalls_seen, early_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
