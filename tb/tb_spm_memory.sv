// tb_spm_memory -- random test of the banked, sector-gated memory against a
// behavioural array. A 3-port instance (the shared-memory shape, shrunk to 128
// rows in 4 sectors) gets random lane-masked writes and reads on all ports
// while the sector power pattern changes; reads must return the model's row
// one cycle later, or zero with err when the sector is OFF or the row is out
// of range. A second instance at the default size (25 kiB, 2 sectors, one
// port) is checked at the sector boundary and the last row.
module tb_spm_memory;
  import descnet_pkg::*;

  localparam int unsigned SZ = 2048, SC = 4, NP = 3;
  localparam int unsigned ROWS = SZ / NUM_BANKS, SR = ROWS / SC;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  spm_req_t          req [NP];
  row_t              rdata [NP];
  logic [SC-1:0]     on;
  logic [NP-1:0]     err;

  spm_memory #(.SZ_BYTES(SZ), .NUM_SECTORS(SC), .NUM_PORTS(NP)) dut (
    .clk, .rst_n, .req, .rdata, .sector_on(on), .err);

  spm_req_t req1 [1];
  row_t     rdata1 [1];
  logic [1:0] on1;
  logic [0:0] err1;
  spm_memory dut_full (.clk, .rst_n, .req(req1), .rdata(rdata1), .sector_on(on1), .err(err1));

  row_t model [ROWS];
  row_t exp_rd [NP];
  bit   exp_err [NP];
  bit   was_rd [NP];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic row_t rnd_row();
    row_t r;
    for (int b = 0; b < NUM_BANKS; b++) r[b] = 8'($urandom);
    return r;
  endfunction

  initial begin
    for (int p = 0; p < NP; p++) req[p] = '0;
    req1[0] = '0; on1 = '0; on = '0;
    for (int r = 0; r < ROWS; r++) model[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Fill every row with all sectors on.
    on = '1;
    for (int r = 0; r < ROWS; r += NP) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        req[p] = '0;
        if (r + p < ROWS) begin
          req[p].en = 1; req[p].we = 1; req[p].addr = ADDR_W'(r + p); req[p].be = '1;
          req[p].wdata = rnd_row(); model[r + p] = req[p].wdata;
        end
      end
    end
    // Random traffic.
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      // Check the reads issued in the previous cycle.
      for (int p = 0; p < NP; p++) begin
        if (was_rd[p]) check(rdata[p] == exp_rd[p], $sformatf("port %0d read data", p));
        check(err[p] == exp_err[p], $sformatf("port %0d err flag", p));
      end
      if (it % 50 == 0) on = SC'($urandom);
      for (int p = 0; p < NP; p++) begin
        int unsigned a;
        bit ok;
        a = $urandom_range(ROWS + 8, 0);
        if (p == 1) a = (a + SR) % (ROWS + 9);
        if (p == 2) a = (a + 2 * SR) % (ROWS + 9);
        req[p].en    = $urandom_range(3, 0) != 0;
        req[p].we    = $urandom_range(1, 0);
        req[p].addr  = ADDR_W'(a);
        req[p].be    = NUM_BANKS'($urandom);
        req[p].wdata = rnd_row();
        // no two ports write the same row in one cycle
        for (int q = 0; q < p; q++)
          if (req[q].en && req[q].we && req[q].addr == req[p].addr) req[p].we = 0;
        ok = (a < ROWS) && on[a / SR];
        exp_err[p] = req[p].en && !ok;
        was_rd[p]  = req[p].en && !req[p].we;
        if (was_rd[p]) exp_rd[p] = ok ? model[a] : '0;
      end
      for (int p = 0; p < NP; p++)
        if (req[p].en && req[p].we && req[p].addr < ROWS && on[req[p].addr / SR])
          for (int b = 0; b < NUM_BANKS; b++)
            if (req[p].be[b]) model[req[p].addr][b] = req[p].wdata[b];
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) req[p] = '0;

    // Default-size instance: rows 799/800 straddle the two sectors.
    begin
      row_t v [4];
      int unsigned rows4 [4] = '{0, 799, 800, 1599};
      on1 = 2'b11;
      for (int i = 0; i < 4; i++) begin
        @(negedge clk);
        v[i] = rnd_row();
        req1[0] = '{en: 1, we: 1, addr: ADDR_W'(rows4[i]), be: '1, wdata: v[i]};
      end
      @(negedge clk) on1 = 2'b01;   // upper sector off
      for (int i = 0; i < 4; i++) begin
        req1[0] = '{en: 1, we: 0, addr: ADDR_W'(rows4[i]), be: '0, wdata: '0};
        @(negedge clk);
        check(rdata1[0] == (rows4[i] < 800 ? v[i] : '0), $sformatf("full-size read row %0d", rows4[i]));
        check(err1[0] == (rows4[i] >= 800), $sformatf("full-size err row %0d", rows4[i]));
      end
      req1[0] = '{en: 1, we: 0, addr: ADDR_W'(1600), be: '0, wdata: '0};
      @(negedge clk);
      check(err1[0] == 1'b1, "full-size out-of-range row 1600 not flagged");
      req1[0] = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
