// tb_spm_wr_arbiter -- random accelerator requests against a stream of
// off-chip writes. Checks that the accelerator always owns the port when it
// asks, that each off-chip write appears on the port exactly once, in order,
// with its payload, and that ready is low exactly when the accelerator is
// active.
module tb_spm_wr_arbiter;
  import descnet_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  spm_req_t             acc_req, out_req;
  logic                 ofc_valid, ofc_ready;
  addr_t                ofc_addr;
  row_t                 ofc_wdata;
  logic [NUM_BANKS-1:0] ofc_be;

  spm_wr_arbiter dut (.clk, .rst_n, .acc_req, .ofc_valid, .ofc_ready, .ofc_addr,
                      .ofc_wdata, .ofc_be, .out_req);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  int unsigned sent = 0, seen = 0, waits = 0;

  initial begin
    acc_req = '0; ofc_valid = 0; ofc_addr = '0; ofc_wdata = '0; ofc_be = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // new off-chip write when the previous one was taken
      if (!ofc_valid || ofc_ready) begin
        if (ofc_valid) sent++;
        ofc_valid = $urandom_range(3, 0) != 0;
        ofc_addr  = ADDR_W'(sent);
        for (int b = 0; b < NUM_BANKS; b++) ofc_wdata[b] = 8'(sent + b);
        ofc_be    = NUM_BANKS'(sent * 7);
      end
      acc_req.en    = $urandom_range(1, 0);
      acc_req.we    = $urandom_range(1, 0);
      acc_req.addr  = ADDR_W'($urandom_range(100000, 50000));
      acc_req.be    = NUM_BANKS'($urandom);
      acc_req.wdata = '1;
      #1;
      check(ofc_ready == !acc_req.en, "ready");
      if (acc_req.en) begin
        check(out_req == acc_req, "accelerator request not forwarded");
        if (ofc_valid) waits++;
      end else if (ofc_valid) begin
        check(out_req.en && out_req.we && out_req.addr == ADDR_W'(seen) && out_req.be == ofc_be
              && out_req.wdata == ofc_wdata, $sformatf("off-chip write %0d", seen));
        seen++;
      end else begin
        check(!out_req.en, "idle port active");
      end
    end
    check(seen > 100 && waits > 100, "traffic mix too thin");
    $display("off-chip writes %0d, waits %0d", seen, waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
