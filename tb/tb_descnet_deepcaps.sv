// tb_descnet_deepcaps -- one DeepCaps/CIFAR10 inference (30 operations) on the
// scratchpad built with the sizes selected for DeepCaps: a 128 kiB shared
// memory with 2 sectors, 128 kiB data memory with 8, 64 kiB weight memory with
// 8 and an 8 MiB accumulator memory with 16 sectors. The operations are the
// first convolution, fifteen 2D capsule convolutions, the 3D capsule
// convolution with its three routing iterations (Sum+Squash, Update) and the
// class capsules with theirs.
//
// The usage of each operation was read off the log-scale usage chart of the
// DeepCaps analysis, so it is approximate. Its shape is what is exercised: the
// data of the first two operations (about 225 kiB) overflow the data memory
// into the shared memory, the weights of the class layer (about 122 kiB)
// overflow the weight memory, and the accumulators grow to about 5.7 MiB in the
// first 2D capsule convolutions and shrink layer by layer.
//
// Each operation runs as in the end-to-end CapsNet test: off-chip writes every
// data and weight row through the merging ports while the accelerator writes
// every accumulator row and reads back data rows (so off-chip writes wait),
// then every row is read back and compared, one cycle after the read. The
// profiled length of an operation is the time its traffic takes plus a margin,
// so the next operation's sectors are always woken ahead and no operation after
// the first may stall. Sector states are checked against the expected masks
// (ceiling of usage over sector size), no access may reach a sleeping sector,
// and pre-activation, sector wake/sleep, shared-memory use (for data and for
// weights) and off-chip waits are counted and must each happen.
module tb_descnet_deepcaps;
  import descnet_pkg::*;

  localparam int NOPS = 30;         // operations of one inference
  localparam int unsigned SZ_S = 131072, SC_S = 2, SZ_D = 131072, SC_D = 8;
  localparam int unsigned SZ_W = 65536, SC_W = 8, SZ_A = 8388608, SC_A = 16;
  localparam int unsigned ROWS_D = SZ_D / 16, ROWS_W = SZ_W / 16, ROWS_A = SZ_A / 16, ROWS_S = SZ_S / 16;
  localparam int unsigned SR_D = ROWS_D / SC_D, SR_W = ROWS_W / SC_W, SR_A = ROWS_A / SC_A, SR_S = ROWS_S / SC_S;
  localparam int NSEC = SC_S + SC_D + SC_W + SC_A;

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
  logic [SC_S-1:0] son_s;
  logic [SC_D-1:0] son_d;
  logic [SC_W-1:0] son_w;
  logic [SC_A-1:0] son_a;
  logic [2:0]      to_shared, range_err;
  logic [3:0]      mem_err;

  descnet_top #(.SZ_S(SZ_S), .SC_S(SC_S), .SZ_D(SZ_D), .SC_D(SC_D),
                .SZ_W(SZ_W), .SC_W(SC_W), .SZ_A(SZ_A), .SC_A(SC_A)) dut (
    .clk, .rst_n, .cfg_we, .cfg_op, .cfg_prof, .cfg_num_ops, .start, .op_done, .busy, .done,
    .op_idx, .spm_ready, .early_wake, .acc_req, .acc_rdata, .ofc_valid, .ofc_ready, .ofc_addr,
    .ofc_wdata, .ofc_be, .sector_on_s(son_s), .sector_on_d(son_d), .sector_on_w(son_w),
    .sector_on_a(son_a), .to_shared, .mem_err, .range_err, .prof_err);

  // usage in bytes: data, weights, accumulators
  int unsigned UB [NOPS][3] = '{
    '{230400, 1024, 563200},                           // Conv
    '{230400, 1024, 5939200},                          // ConvCaps2D 1
    '{56320, 1024, 5529600}, '{56320, 1024, 5529600},  // ConvCaps2D 2..5
    '{56320, 1024, 5529600}, '{56320, 1024, 5529600},
    '{12800, 1024, 2508800}, '{12800, 1024, 2508800},  // ConvCaps2D 6..9
    '{12800, 1024, 2508800}, '{12800, 1024, 2508800},
    '{2304, 1024, 450560}, '{2304, 1024, 450560},      // ConvCaps2D 10..13
    '{2304, 1024, 450560}, '{2304, 1024, 450560},
    '{256, 1024, 50176}, '{256, 1024, 50176},          // ConvCaps2D 14, 15
    '{256, 1024, 50176},                               // ConvCaps3D
    '{8192, 8192, 12544}, '{8192, 8192, 12544},        // ConvCaps3D routing: 3 x (Sum+Sq, Up)
    '{8192, 8192, 12544}, '{8192, 8192, 12544},
    '{8192, 8192, 12544}, '{8192, 8192, 12544},
    '{1024, 124928, 1048576},                          // Class
    '{20480, 25600, 1048576}, '{20480, 25600, 1048576}, // Class routing: 3 x (Sum+Sq, Up)
    '{20480, 25600, 1048576}, '{20480, 25600, 1048576},
    '{20480, 25600, 1048576}, '{20480, 25600, 1048576}};
  // profiled length: the fill (data writes wait one cycle in four) and the
  // drain of the operation, plus a margin
  function automatic int unsigned cyc(int i);
    int unsigned nd, nw, na, f, d;
    nd = UB[i][0] / 16; nw = UB[i][1] / 16; na = UB[i][2] / 16;
    f = nd * 4 / 3 + 4;
    if (nw > f) f = nw;
    if (na > f) f = na;
    d = nd;
    if (nw > d) d = nw;
    if (na > d) d = na;
    return f + d + 64;
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
  int unsigned n_ofc_wait = 0, n_done = 0, n_preact = 0, n_sh_d = 0, n_sh_w = 0;
  logic [NSEC-1:0] on_q;
  logic [NSEC-1:0] on_now;
  assign on_now = {son_s, son_d, son_w, son_a};
  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < NSEC; k++) begin
        if (on_now[k] && !on_q[k]) begin n_wake++; if (early_wake) n_preact++; end
        if (!on_now[k] && on_q[k]) n_sleep++;
      end
      if (early_wake) n_early++;
      n_shared += $countones(to_shared);
      if (to_shared[MT_DATA]) n_sh_d++;
      if (to_shared[MT_WEIGHT]) n_sh_w++;
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
      cfg_prof = '{d_rows: ADDR_W'(UB[i][0] / 16), w_rows: ADDR_W'(UB[i][1] / 16),
                   a_rows: ADDR_W'(UB[i][2] / 16), cycles: CYC_W'(cyc(i))};
    end
    @(negedge clk) cfg_we = 0; cfg_num_ops = (OP_W+1)'(NOPS);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;

    for (int i = 0; i < NOPS; i++) begin
      int unsigned nd, nw, na, t, stall, wd, ww, wa, rdd, rdw, rda;
      nd = UB[i][0] / 16; nw = UB[i][1] / 16; na = UB[i][2] / 16;
      t = 0; stall = 0;
      check(busy && op_idx == OP_W'(i), $sformatf("op %0d not current", i));
      while (!spm_ready && stall < 1000) begin @(negedge clk); stall++; end
      t = stall;
      n_stall += stall;
      if (i > 0) check(stall == 0, $sformatf("op %0d: %0d stall cycles although woken ahead", i, stall));

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
        logic [NSEC-1:0] exp_on;
        sh = ovf(nd, ROWS_D) + ovf(nw, ROWS_W) + ovf(na, ROWS_A);
        exp_on = {SC_S'(msk(sh, SR_S, SC_S)), SC_D'(msk(nd, SR_D, SC_D)), SC_W'(msk(nw, SR_W, SC_W)),
                  SC_A'(msk(na, SR_A, SC_A))};
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

      // the operation lasts its profiled length
      while (t < cyc(i)) begin @(negedge clk); t++; end
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
    $display("sector wakes %0d, sector sleeps %0d, shared accesses %0d (data %0d, weights %0d), off-chip waits %0d",
             n_wake, n_sleep, n_shared, n_sh_d, n_sh_w, n_ofc_wait);
    check(n_early > 0 && n_preact > 0, "no sector was pre-activated");
    check(n_wake > 0 && n_sleep > 0, "no sector slept or woke");
    check(n_sh_d > 0, "data never overflowed into the shared memory");
    check(n_sh_w > 0, "weights never overflowed into the shared memory");
    check(n_ofc_wait > 0, "no off-chip write had to wait");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
