// tb_hy_router -- checks the hybrid steering with small memories (16, 8 and 32
// rows separate, 64 rows shared). For random rows of each kind it works out
// independently where the row must go (separate memory, shared memory at
// base + offset, or nowhere with range_err) and compares the forwarded
// requests; for reads it checks that the multiplexer returns, one cycle later,
// the read data of the memory that was addressed.
module tb_hy_router;
  import descnet_pkg::*;

  localparam int unsigned RD = 16, RW = 8, RA = 32, RS = 64;
  localparam int unsigned SEP [3] = '{RD, RW, RA};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  spm_req_t acc_req [3], sep_req [3], sh_req [3];
  row_t     acc_rdata [3], sep_rdata [3], sh_rdata [3];
  addr_t    sh_base [3], sh_len [3];
  logic [2:0] range_err, to_shared;

  hy_router #(.ROWS_D(RD), .ROWS_W(RW), .ROWS_A(RA), .ROWS_S(RS)) dut (
    .clk, .rst_n, .acc_req, .acc_rdata, .sh_base, .sh_len, .sep_req, .sep_rdata,
    .sh_req, .sh_rdata, .range_err, .to_shared);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  bit   exp_sh_rd [3], exp_rd [3];
  int unsigned n_sh = 0, n_sep = 0, n_err = 0;

  initial begin
    for (int t = 0; t < 3; t++) begin acc_req[t] = '0; sep_rdata[t] = '0; sh_rdata[t] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // previous cycle's reads
      for (int t = 0; t < 3; t++)
        if (exp_rd[t])
          check(acc_rdata[t] == (exp_sh_rd[t] ? sh_rdata[t] : sep_rdata[t]),
                $sformatf("type %0d read mux", t));
      if (it % 40 == 0) begin
        // a new operation layout: overflow lengths stacked in the shared memory
        int unsigned l [3];
        for (int t = 0; t < 3; t++) l[t] = $urandom_range(24, 0);
        sh_base[0] = 0; sh_base[1] = ADDR_W'(l[0]); sh_base[2] = ADDR_W'(l[0] + l[1]);
        for (int t = 0; t < 3; t++) sh_len[t] = ADDR_W'(l[t]);
      end
      for (int t = 0; t < 3; t++) begin
        int unsigned a;
        bit in_sep, in_sh;
        a = $urandom_range(SEP[t] + 30, 0);
        acc_req[t].en    = $urandom_range(3, 0) != 0;
        acc_req[t].we    = $urandom_range(1, 0);
        acc_req[t].addr  = ADDR_W'(a);
        acc_req[t].be    = NUM_BANKS'($urandom);
        acc_req[t].wdata = {4{$urandom}};
        sep_rdata[t]     = {4{$urandom}};
        sh_rdata[t]      = {4{$urandom}};
        in_sep = a < SEP[t];
        in_sh  = !in_sep && (a - SEP[t]) < sh_len[t] && (sh_base[t] + a - SEP[t]) < RS;
        #1;
        check(sep_req[t].en == (acc_req[t].en && in_sep), $sformatf("type %0d sep enable", t));
        check(sh_req[t].en == (acc_req[t].en && in_sh), $sformatf("type %0d shared enable", t));
        check(range_err[t] == (acc_req[t].en && !in_sep && !in_sh), $sformatf("type %0d range_err", t));
        check(to_shared[t] == (acc_req[t].en && in_sh), $sformatf("type %0d to_shared", t));
        if (in_sep) check(sep_req[t].addr == ADDR_W'(a) && sep_req[t].we == acc_req[t].we
                          && sep_req[t].wdata == acc_req[t].wdata && sep_req[t].be == acc_req[t].be,
                          $sformatf("type %0d sep payload", t));
        if (in_sh)  check(sh_req[t].addr == sh_base[t] + ADDR_W'(a - SEP[t])
                          && sh_req[t].wdata == acc_req[t].wdata && sh_req[t].be == acc_req[t].be,
                          $sformatf("type %0d shared address", t));
        if (acc_req[t].en) begin
          if (in_sep) n_sep++; else if (in_sh) n_sh++; else n_err++;
        end
        exp_rd[t]    = acc_req[t].en && !acc_req[t].we;
        exp_sh_rd[t] = !in_sep;
      end
      // the memories answer in the next cycle: keep fresh data there
      @(posedge clk);
      #1;
      for (int t = 0; t < 3; t++) begin sep_rdata[t] = {4{$urandom}}; sh_rdata[t] = {4{$urandom}}; end
    end
    check(n_sep > 100 && n_sh > 100 && n_err > 50, "traffic did not reach all three outcomes");
    $display("separate %0d, shared %0d, out of range %0d", n_sep, n_sh, n_err);
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
