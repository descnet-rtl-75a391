// tb_descnet_top -- end-to-end run of the scratchpad at its default (full)
// size through two consecutive CapsNet/MNIST inferences, nine operations each:
// Conv1, Prim, Class, then three Sum+Squash and three Update(+Softmax) routing
// steps.
//
// The per-operation usage below was read off the bar charts of the memory
// usage analysis (log scale), so it is approximate; what matters is its shape:
// data fills its memory in Conv1, accumulators peak in Prim, the weights of
// Class overflow into the shared memory, and the routing steps are small.
//
// For each operation the testbench acts as accelerator and as off-chip DRAM:
//   fill:  off-chip writes all data and weight rows of the operation (through
//          the merging ports) while the accelerator writes its accumulator rows
//          and, every fourth cycle, reads back a data row already written --
//          which makes the off-chip write wait;
//   drain: the accelerator reads every data, weight and accumulator row and
//          compares it with the pattern written, one cycle after the read.
// The sector states are checked against the masks expected for the operation
// (ceiling of usage over sector size), one read beyond a kind's space must
// raise range_err, and no access may ever hit a sleeping sector (mem_err).
// The operations last the cycle counts of the profile, except the first Prim,
// which ends as soon as its work is done, so the next operation's sectors have
// not been woken in advance and spm_ready stalls the start of Class. In the
// second frame the same sectors are woken ahead (pre-activation), as are the
// sectors Conv1 needs at the end of the first frame.
// Counted mechanisms: wake-up stalls, pre-activation windows, sector wake and
// sleep events, shared-memory accesses, off-chip waits, range errors; each must
// occur at least once.
module tb_descnet_top;
  import descnet_pkg::*;

  localparam int NL   = 9;          // operations of one inference
  localparam int NOPS = 2 * NL;     // two frames back to back
  localparam int unsigned ROWS_D = 1600, ROWS_W = 1600, ROWS_A = 2048, ROWS_S = 2048;
  localparam int unsigned SR_D = 800, SR_W = 400, SR_A = 1024, SR_S = 1024;

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
  spm_req_t        acc_req [NUM_TYPES];
  row_t            acc_rdata [NUM_TYPES];
  logic            ofc_valid [2], ofc_ready [2];
  addr_t           ofc_addr [2];
  row_t            ofc_wdata [2];
  logic [NUM_BANKS-1:0] ofc_be [2];
  logic [1:0]      son_s, son_d, son_a;
  logic [3:0]      son_w;
  logic [2:0]      to_shared, range_err;
  logic [3:0]      mem_err;

  descnet_top dut (
    .clk, .rst_n, .cfg_we, .cfg_op, .cfg_prof, .cfg_num_ops, .start, .op_done, .busy, .done,
    .op_idx, .spm_ready, .early_wake, .acc_req, .acc_rdata, .ofc_valid, .ofc_ready, .ofc_addr,
    .ofc_wdata, .ofc_be, .sector_on_s(son_s), .sector_on_d(son_d), .sector_on_w(son_w),
    .sector_on_a(son_a), .to_shared, .mem_err, .range_err, .prof_err);

  // usage in bytes: data, weights, accumulators
  int unsigned UB [NL][3] = '{'{25600, 1024, 19968}, '{9216, 1024, 28672}, '{1024, 55296, 12800},
                                '{9216, 11264, 12800}, '{9216, 11264, 12800}, '{9216, 11264, 12800},
                                '{9216, 11264, 12800}, '{9216, 11264, 12800}, '{9216, 11264, 12800}};
  // Prim of the first frame is profiled far too long and ends early.
  localparam int PRIM = 1;
  function automatic int unsigned cyc(int i);
    return i == PRIM ? 1000000 : 9000;
  endfunction

  function automatic row_t pat(int op, int t, int unsigned r);
    row_t v;
    for (int b = 0; b < NUM_BANKS; b++) v[b] = 8'(op * 37 + t * 101 + r * 13 + b * 7 + (r >> 8));
    return v;
  endfunction
  function automatic int unsigned ovf(int unsigned u, int unsigned rows);
    return u > rows ? u - rows : 0;
  endfunction
  function automatic int unsigned msk(int unsigned u, int unsigned sr, int unsigned sc);
    int unsigned n;
    n = (u + sr - 1) / sr;
    if (n > sc) n = sc;
    return (1 << n) - 1;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------- event counters
  int unsigned n_stall = 0, n_early = 0, n_wake = 0, n_sleep = 0, n_shared = 0;
  int unsigned n_ofc_wait = 0, n_range = 0, n_done = 0, n_preact = 0;
  logic [9:0] on_q;
  logic [9:0] on_now;
  assign on_now = {son_s, son_d, son_w, son_a};
  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < 10; k++) begin
        if (on_now[k] && !on_q[k]) begin n_wake++; if (early_wake) n_preact++; end
        if (!on_now[k] && on_q[k]) n_sleep++;
      end
      if (early_wake) n_early++;
      n_shared += $countones(to_shared);
      for (int i = 0; i < 2; i++) if (ofc_valid[i] && !ofc_ready[i]) n_ofc_wait++;
      if (done) n_done++;
      if (mem_err != '0) begin
        checks++; failures++;
        $display("FAIL: access to a sleeping sector or outside a memory (%b) at op %0d", mem_err, op_idx);
      end
      if (prof_err) begin checks++; failures++; $display("FAIL: prof_err"); end
    end
    on_q <= on_now;
  end

  // ------------------------------------------------------------ read checker
  bit   pend [3];
  row_t pexp [3];
  int unsigned n_reads = 0;

  task automatic check_reads();
    for (int t = 0; t < 3; t++)
      if (pend[t]) begin
        check(acc_rdata[t] == pexp[t], $sformatf("op %0d type %0d read data", op_idx, t));
        n_reads++;
      end
  endtask

  task automatic idle_ports();
    for (int t = 0; t < 3; t++) begin acc_req[t] = '0; pend[t] = 0; end
    for (int i = 0; i < 2; i++) begin
      ofc_valid[i] = 0; ofc_addr[i] = '0; ofc_wdata[i] = '0; ofc_be[i] = '0;
    end
  endtask

  function automatic spm_req_t rd(int unsigned r);
    return '{en: 1'b1, we: 1'b0, addr: ADDR_W'(r), be: '0, wdata: '0};
  endfunction

  initial begin
    idle_ports();
    on_q = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NOPS; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_op = OP_W'(i);
      cfg_prof = '{d_rows: ADDR_W'(UB[i % NL][0] / 16), w_rows: ADDR_W'(UB[i % NL][1] / 16),
                   a_rows: ADDR_W'(UB[i % NL][2] / 16), cycles: CYC_W'(cyc(i))};
    end
    @(negedge clk) cfg_we = 0; cfg_num_ops = (OP_W+1)'(NOPS);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;

    for (int i = 0; i < NOPS; i++) begin
      int unsigned nd, nw, na, t, stall, wd, ww, wa, rdd, rdw, rda;
      nd = UB[i % NL][0] / 16; nw = UB[i % NL][1] / 16; na = UB[i % NL][2] / 16;
      t = 0; stall = 0;
      check(busy && op_idx == OP_W'(i), $sformatf("op %0d not current", i));
      while (!spm_ready && stall < 1000) begin @(negedge clk); stall++; end
      t = stall;
      n_stall += stall;
      if (i == PRIM + 1) check(stall > 0, "Class: expected a stall after the early end of Prim");
      else if (i > 0)    check(stall == 0, $sformatf("op %0d: %0d stall cycles although woken ahead", i, stall));

      // fill: off-chip data + weights, accelerator accumulators and data reads
      wd = 0; ww = 0; wa = 0;
      while (wd < nd || ww < nw || wa < na) begin
        acc_req[MT_DATA] = '0; pend[MT_DATA] = 0;
        if (wd > 0 && (t % 4) == 0) begin
          int unsigned r;
          r = $urandom_range(wd - 1, 0);
          acc_req[MT_DATA] = rd(r); pend[MT_DATA] = 1; pexp[MT_DATA] = pat(i, MT_DATA, r);
        end
        ofc_valid[0] = wd < nd; ofc_addr[0] = ADDR_W'(wd); ofc_wdata[0] = pat(i, MT_DATA, wd); ofc_be[0] = '1;
        ofc_valid[1] = ww < nw; ofc_addr[1] = ADDR_W'(ww); ofc_wdata[1] = pat(i, MT_WEIGHT, ww); ofc_be[1] = '1;
        acc_req[MT_ACC] = '0;
        if (wa < na) acc_req[MT_ACC] = '{en: 1'b1, we: 1'b1, addr: ADDR_W'(wa), be: '1, wdata: pat(i, MT_ACC, wa)};
        #1;
        check(range_err == '0, $sformatf("op %0d fill: unexpected range error", i));
        if (ofc_valid[0] && ofc_ready[0]) wd++;
        if (ofc_valid[1] && ofc_ready[1]) ww++;
        if (wa < na) wa++;
        @(negedge clk); t++;
        check_reads();
      end
      idle_ports();

      // sector states of this operation
      begin
        int unsigned sh;
        logic [9:0] exp_on;
        sh = ovf(nd, ROWS_D) + ovf(nw, ROWS_W) + ovf(na, ROWS_A);
        exp_on = {2'(msk(sh, SR_S, 2)), 2'(msk(nd, SR_D, 2)), 4'(msk(nw, SR_W, 4)), 2'(msk(na, SR_A, 2))};
        check(on_now == exp_on, $sformatf("op %0d sectors on %b, expected %b", i, on_now, exp_on));
      end

      // drain: read everything back
      rdd = 0; rdw = 0; rda = 0;
      while (rdd < nd || rdw < nw || rda < na) begin
        for (int k = 0; k < 3; k++) begin acc_req[k] = '0; pend[k] = 0; end
        if (rdd < nd) begin acc_req[MT_DATA]   = rd(rdd); pend[MT_DATA]   = 1; pexp[MT_DATA]   = pat(i, MT_DATA, rdd);   rdd++; end
        if (rdw < nw) begin acc_req[MT_WEIGHT] = rd(rdw); pend[MT_WEIGHT] = 1; pexp[MT_WEIGHT] = pat(i, MT_WEIGHT, rdw); rdw++; end
        if (rda < na) begin acc_req[MT_ACC]    = rd(rda); pend[MT_ACC]    = 1; pexp[MT_ACC]    = pat(i, MT_ACC, rda);    rda++; end
        @(negedge clk); t++;
        check_reads();
      end
      idle_ports();

      // a read beyond the data space of this operation
      if (i == 3) begin
        acc_req[MT_DATA] = rd(ROWS_D + ovf(nd, ROWS_D));
        #1;
        check(range_err[MT_DATA], "read beyond the data space not flagged");
        if (range_err[MT_DATA]) n_range++;
        @(negedge clk); t++;
        idle_ports();
      end

      // the operation lasts its profiled length (Prim ends early)
      if (i != PRIM) while (t < cyc(i)) begin @(negedge clk); t++; end
      check(spm_ready, $sformatf("op %0d lost spm_ready", i));
      op_done = 1;
      @(negedge clk) op_done = 0;
    end
    @(negedge clk);
    check(!busy && n_done == 1, "done not signalled once");
    repeat (4) @(negedge clk);
    check(on_now == '0, "sectors not asleep after the inference");

    $display("reads checked %0d, stall cycles %0d, pre-activation cycles %0d, sectors woken ahead %0d",
             n_reads, n_stall, n_early, n_preact);
    $display("sector wakes %0d, sector sleeps %0d, shared accesses %0d, off-chip waits %0d, range errors %0d",
             n_wake, n_sleep, n_shared, n_ofc_wait, n_range);
    check(n_stall > 0, "no wake-up stall happened");
    check(n_early > 0 && n_preact > 0, "no sector was pre-activated");
    check(n_wake > 0 && n_sleep > 0, "no sector slept or woke");
    check(n_shared > 0, "the shared memory was never used");
    check(n_ofc_wait > 0, "no off-chip write had to wait");
    check(n_range == 1, "range error not seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
