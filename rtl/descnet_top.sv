// descnet_top -- the DESCNet hybrid, power-gated scratchpad (HY-PG) that sits
// between a capsule-network accelerator and off-chip DRAM.
//
// Contents, with the default sizes of the lowest-energy organisation chosen for
// the CapsNet/MNIST inference:
//   * a shared 3-port memory (32 kiB, 2 sectors), one port per kind of value;
//   * a separate data memory (25 kiB, 2 sectors), weight memory (25 kiB,
//     4 sectors) and accumulator memory (32 kiB, 2 sectors), single-ported;
//   * every memory made of 16 banks, with one sleep transistor per sector
//     index (sector_power_switch) and a Sleep Req / Sleep Ack handshake;
//   * the power manager (descnet_pmu) that sequences the inference's
//     operations, keeps only the needed sectors ON and wakes the next
//     operation's sectors ahead of time;
//   * the hybrid router (hy_router) that places each kind's rows in its
//     separate memory first and its overflow in the shared memory, with the
//     read multiplexers back to the accelerator;
//   * two write mergers (spm_wr_arbiter) that let off-chip prefetch writes into
//     the data and weight memories in cycles the accelerator leaves free.
// The accelerator and the DRAM are outside; their signals are ports.
//
// Accelerator interface: acc_req[t] for t = data, weight, accumulator (see
// descnet_pkg::mem_type_e), a row request per cycle per kind; acc_rdata[t] one
// cycle after a read. Requests are only served while spm_ready is high. The
// accelerator pulses op_done at the end of each operation after start has
// begun the inference; done pulses after the last operation. Off-chip
// interface: ofc_*[0] writes data rows, ofc_*[1] weight rows, by logical row,
// with a valid/ready handshake. Errors: mem_err (access to an OFF sector or out
// of a memory), range_err (row beyond a kind's space in this operation),
// prof_err (loaded profile does not fit).
module descnet_top
  import descnet_pkg::*;
#(
  parameter int unsigned SZ_S        = 32768,
  parameter int unsigned SC_S        = 2,
  parameter int unsigned SZ_D        = 25600,
  parameter int unsigned SC_D        = 2,
  parameter int unsigned SZ_W        = 25600,
  parameter int unsigned SC_W        = 4,
  parameter int unsigned SZ_A        = 32768,
  parameter int unsigned SC_A        = 2,
  parameter int unsigned WAKE_LEAD   = 8,
  parameter int unsigned T_SLEEP_CYC = 1,
  parameter int unsigned T_WAKE_CYC  = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // profile table
  input  logic                 cfg_we,
  input  logic [OP_W-1:0]      cfg_op,
  input  op_profile_t          cfg_prof,
  input  logic [OP_W:0]        cfg_num_ops,
  // operation sequencing
  input  logic                 start,
  input  logic                 op_done,
  output logic                 busy,
  output logic                 done,
  output logic [OP_W-1:0]      op_idx,
  output logic                 spm_ready,
  output logic                 early_wake,
  // accelerator ports
  input  spm_req_t             acc_req   [NUM_TYPES],
  output row_t                 acc_rdata [NUM_TYPES],
  // off-chip writes: [0] data, [1] weights
  input  logic                 ofc_valid [2],
  output logic                 ofc_ready [2],
  input  addr_t                ofc_addr  [2],
  input  row_t                 ofc_wdata [2],
  input  logic [NUM_BANKS-1:0] ofc_be    [2],
  // status
  output logic [SC_S-1:0]      sector_on_s,
  output logic [SC_D-1:0]      sector_on_d,
  output logic [SC_W-1:0]      sector_on_w,
  output logic [SC_A-1:0]      sector_on_a,
  output logic [NUM_TYPES-1:0] to_shared,
  output logic [3:0]           mem_err,
  output logic [NUM_TYPES-1:0] range_err,
  output logic                 prof_err
);

  localparam int unsigned ROWS_S = SZ_S / NUM_BANKS;
  localparam int unsigned ROWS_D = SZ_D / NUM_BANKS;
  localparam int unsigned ROWS_W = SZ_W / NUM_BANKS;
  localparam int unsigned ROWS_A = SZ_A / NUM_BANKS;

  // ---------------------------------------------------------------- power
  logic [SC_S-1:0] req_n_s;
  logic [SC_D-1:0] req_n_d;
  logic [SC_W-1:0] req_n_w;
  logic [SC_A-1:0] req_n_a;
  addr_t           sh_base [NUM_TYPES];
  addr_t           sh_len  [NUM_TYPES];

  descnet_pmu #(
    .SZ_S(SZ_S), .SC_S(SC_S), .SZ_D(SZ_D), .SC_D(SC_D),
    .SZ_W(SZ_W), .SC_W(SC_W), .SZ_A(SZ_A), .SC_A(SC_A), .WAKE_LEAD(WAKE_LEAD)
  ) u_pmu (
    .clk, .rst_n, .cfg_we, .cfg_op, .cfg_prof, .cfg_num_ops,
    .start, .op_done, .busy, .done, .op_idx, .spm_ready, .early_wake, .prof_err,
    .sh_base, .sh_len,
    .sleep_req_n_s(req_n_s), .sleep_req_n_d(req_n_d),
    .sleep_req_n_w(req_n_w), .sleep_req_n_a(req_n_a),
    .sleep_ack_n_s(sector_on_s), .sleep_ack_n_d(sector_on_d),
    .sleep_ack_n_w(sector_on_w), .sleep_ack_n_a(sector_on_a)
  );

  for (genvar k = 0; k < SC_S; k++) begin : g_sw_s
    sector_power_switch #(.T_SLEEP_CYC(T_SLEEP_CYC), .T_WAKE_CYC(T_WAKE_CYC))
      u_sw (.clk, .rst_n, .sleep_req_n(req_n_s[k]), .sleep_ack_n(sector_on_s[k]));
  end
  for (genvar k = 0; k < SC_D; k++) begin : g_sw_d
    sector_power_switch #(.T_SLEEP_CYC(T_SLEEP_CYC), .T_WAKE_CYC(T_WAKE_CYC))
      u_sw (.clk, .rst_n, .sleep_req_n(req_n_d[k]), .sleep_ack_n(sector_on_d[k]));
  end
  for (genvar k = 0; k < SC_W; k++) begin : g_sw_w
    sector_power_switch #(.T_SLEEP_CYC(T_SLEEP_CYC), .T_WAKE_CYC(T_WAKE_CYC))
      u_sw (.clk, .rst_n, .sleep_req_n(req_n_w[k]), .sleep_ack_n(sector_on_w[k]));
  end
  for (genvar k = 0; k < SC_A; k++) begin : g_sw_a
    sector_power_switch #(.T_SLEEP_CYC(T_SLEEP_CYC), .T_WAKE_CYC(T_WAKE_CYC))
      u_sw (.clk, .rst_n, .sleep_req_n(req_n_a[k]), .sleep_ack_n(sector_on_a[k]));
  end

  // ------------------------------------------------- off-chip write merging
  spm_req_t merged [NUM_TYPES];

  for (genvar i = 0; i < 2; i++) begin : g_arb
    spm_wr_arbiter u_arb (
      .clk, .rst_n, .acc_req(acc_req[i]),
      .ofc_valid(ofc_valid[i]), .ofc_ready(ofc_ready[i]), .ofc_addr(ofc_addr[i]),
      .ofc_wdata(ofc_wdata[i]), .ofc_be(ofc_be[i]), .out_req(merged[i])
    );
  end
  assign merged[MT_ACC] = acc_req[MT_ACC];   // accumulators: accelerator only

  // ------------------------------------------------------------ routing
  spm_req_t sep_req   [NUM_TYPES];
  row_t     sep_rdata [NUM_TYPES];
  spm_req_t sh_req    [NUM_TYPES];
  row_t     sh_rdata  [NUM_TYPES];

  hy_router #(.ROWS_D(ROWS_D), .ROWS_W(ROWS_W), .ROWS_A(ROWS_A), .ROWS_S(ROWS_S)) u_router (
    .clk, .rst_n, .acc_req(merged), .acc_rdata, .sh_base, .sh_len,
    .sep_req, .sep_rdata, .sh_req, .sh_rdata, .range_err, .to_shared
  );

  // ------------------------------------------------------------ memories
  logic [NUM_TYPES-1:0] err_s;
  logic                 err_d, err_w, err_a;
  spm_req_t             req_d [1], req_w [1], req_a [1];
  row_t                 rd_d [1], rd_w [1], rd_a [1];

  assign req_d[0] = sep_req[MT_DATA];
  assign req_w[0] = sep_req[MT_WEIGHT];
  assign req_a[0] = sep_req[MT_ACC];
  assign sep_rdata[MT_DATA]   = rd_d[0];
  assign sep_rdata[MT_WEIGHT] = rd_w[0];
  assign sep_rdata[MT_ACC]    = rd_a[0];

  spm_memory #(.SZ_BYTES(SZ_S), .NUM_SECTORS(SC_S), .NUM_PORTS(NUM_TYPES)) u_shared (
    .clk, .rst_n, .req(sh_req), .rdata(sh_rdata), .sector_on(sector_on_s), .err(err_s)
  );
  spm_memory #(.SZ_BYTES(SZ_D), .NUM_SECTORS(SC_D), .NUM_PORTS(1)) u_data (
    .clk, .rst_n, .req(req_d), .rdata(rd_d),
    .sector_on(sector_on_d), .err(err_d)
  );
  spm_memory #(.SZ_BYTES(SZ_W), .NUM_SECTORS(SC_W), .NUM_PORTS(1)) u_weight (
    .clk, .rst_n, .req(req_w), .rdata(rd_w),
    .sector_on(sector_on_w), .err(err_w)
  );
  spm_memory #(.SZ_BYTES(SZ_A), .NUM_SECTORS(SC_A), .NUM_PORTS(1)) u_acc (
    .clk, .rst_n, .req(req_a), .rdata(rd_a),
    .sector_on(sector_on_a), .err(err_a)
  );

  assign mem_err = {|err_s, err_a, err_w, err_d};

endmodule
