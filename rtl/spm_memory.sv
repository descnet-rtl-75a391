// spm_memory -- one multi-banked, sector-gated scratchpad memory.
//
// The memory holds SZ_BYTES bytes in NUM_BANKS banks of one byte per row. All
// banks are read or written at the same row address, so one access moves a row
// of NUM_BANKS bytes; lane enables mask the bytes of a write. The row range is
// split into NUM_SECTORS equal sectors, sector k holding rows
// [k*SECTOR_ROWS, (k+1)*SECTOR_ROWS). The sectors with the same index in all
// banks form one power domain, switched by one sleep transistor, so the memory
// has NUM_SECTORS power inputs (sector_on, the sleep acknowledge of each
// domain). Banks, equal sectors and the common sleep signal per sector index
// follow the paper; byte lanes and the port format are this design's choice.
//
// NUM_PORTS = 1 gives the single-port separate memories; NUM_PORTS = 3 gives
// the shared multi-port memory with one port each for data, weights and
// accumulators. Each port does a read or a write per cycle.
//
// Timing: a write takes effect at the clock edge of the request; read data
// appears on rdata one cycle after the request and holds until the next read.
// A request to a row beyond the memory or in a sector that is not powered is
// dropped (a read returns zero) and raises err for one cycle. The real sectors
// are non-retentive when OFF; this model keeps the array contents, and the
// power manager never turns off a sector whose data is still needed.
module spm_memory
  import descnet_pkg::*;
#(
  parameter int unsigned SZ_BYTES    = 25600,
  parameter int unsigned NUM_SECTORS = 2,
  parameter int unsigned NUM_PORTS   = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  spm_req_t               req       [NUM_PORTS],
  output row_t                   rdata     [NUM_PORTS],
  input  logic [NUM_SECTORS-1:0] sector_on,
  output logic [NUM_PORTS-1:0]   err
);

  localparam int unsigned ROWS        = SZ_BYTES / NUM_BANKS;
  localparam int unsigned SECTOR_ROWS = ROWS / NUM_SECTORS;
  localparam int unsigned RA_W        = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned SEC_W       = (NUM_SECTORS > 1) ? $clog2(NUM_SECTORS) : 1;

  initial begin
    assert (SZ_BYTES % NUM_BANKS == 0) else $error("SZ_BYTES must be a multiple of NUM_BANKS");
    assert (ROWS % NUM_SECTORS == 0) else $error("rows must split evenly into sectors");
  end

  // Which sector a row belongs to, and whether the request may proceed.
  logic [NUM_PORTS-1:0] ok;
  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      logic [SEC_W-1:0] sec;
      sec   = SEC_W'(req[p].addr / ADDR_W'(SECTOR_ROWS));
      ok[p] = (req[p].addr < ADDR_W'(ROWS)) && sector_on[sec];
    end
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic [LANE_W-1:0] mem [ROWS];

    always_ff @(posedge clk) begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (req[p].en && req[p].we && req[p].be[b] && ok[p])
          mem[RA_W'(req[p].addr)] <= req[p].wdata[b];
      end
    end

    for (genvar p = 0; p < NUM_PORTS; p++) begin : g_rd
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)
          rdata[p][b] <= '0;
        else if (req[p].en && !req[p].we)
          rdata[p][b] <= ok[p] ? mem[RA_W'(req[p].addr)] : '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= '0;
    else for (int p = 0; p < NUM_PORTS; p++) err[p] <= req[p].en && !ok[p];
  end

  // Two ports must not write the same row in the same cycle.
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_chk
    for (genvar q = p + 1; q < NUM_PORTS; q++) begin : g_pair
      assert property (@(posedge clk) disable iff (!rst_n)
        !(req[p].en && req[p].we && req[q].en && req[q].we && req[p].addr == req[q].addr
          && |(req[p].be & req[q].be)))
        else $error("ports %0d and %0d write row %0d in the same cycle", p, q, req[p].addr);
    end
  end

endmodule
