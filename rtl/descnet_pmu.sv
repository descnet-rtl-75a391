// descnet_pmu -- application-driven power management unit of the scratchpad.
//
// The unit knows, for every operation of the inference (convolution, primary
// capsules, class capsules, the routing iterations...), how many rows of data,
// weights and accumulator values it keeps on chip. This profile is worked out
// offline and loaded through the cfg_* port, one entry per operation, together
// with the operation's expected length in cycles.
//
// From the profile of an operation the unit derives, as in the hybrid (HY)
// organisation:
//   * each separate memory holds the first ROWS_X rows of its type; the rest,
//     ov_X = max(0, usage_X - ROWS_X), overflows into the shared memory, where
//     the three overflow regions are stacked: data at 0, weights at ov_D,
//     accumulators at ov_D + ov_W (sh_base, sh_len);
//   * sector k of a memory is needed when its usage exceeds k sectors, so the
//     lowest sectors are used first and the others can sleep.
// A sector is kept ON (sleep_req_n high) while the current operation needs it.
// WAKE_LEAD cycles before the current operation is expected to end, the
// sectors of the next operation are requested as well, so that they are awake
// when it starts and the wakeup latency is hidden. When the accelerator signals
// op_done the unit moves to the next operation and releases every sector that
// operation does not need (the OFF state is non-retentive: values of an
// operation are not reused by the next). spm_ready is high while every sector
// the current operation needs has acknowledged ON; if the accelerator finishes
// an operation early, before the next one's sectors are awake, spm_ready stays
// low until they are (a stall). prof_err flags an operation whose profile does
// not fit in the memories.
//
// Sector-level gating of each memory, the req/ack handshake, pre-activation of
// the next operation's sectors and the hybrid overflow into the shared memory
// follow the paper. The profile table format, the cycle-count based lead time,
// the op_done/start interface and the stacking order in the shared memory are
// this design's choices. Sleep requests are registered: they change one cycle
// after the operation index or the lead window.
module descnet_pmu
  import descnet_pkg::*;
#(
  parameter int unsigned SZ_S      = 32768,
  parameter int unsigned SC_S      = 2,
  parameter int unsigned SZ_D      = 25600,
  parameter int unsigned SC_D      = 2,
  parameter int unsigned SZ_W      = 25600,
  parameter int unsigned SC_W      = 4,
  parameter int unsigned SZ_A      = 32768,
  parameter int unsigned SC_A      = 2,
  parameter int unsigned WAKE_LEAD = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // profile table
  input  logic            cfg_we,
  input  logic [OP_W-1:0] cfg_op,
  input  op_profile_t     cfg_prof,
  input  logic [OP_W:0]   cfg_num_ops,
  // operation sequencing
  input  logic            start,
  input  logic            op_done,
  output logic            busy,
  output logic            done,
  output logic [OP_W-1:0] op_idx,
  output logic            spm_ready,
  output logic            early_wake,
  output logic            prof_err,
  // hybrid-memory layout of the current operation
  output addr_t           sh_base [NUM_TYPES],
  output addr_t           sh_len  [NUM_TYPES],
  // sleep handshake, one pair per sector index of each memory
  output logic [SC_S-1:0] sleep_req_n_s,
  output logic [SC_D-1:0] sleep_req_n_d,
  output logic [SC_W-1:0] sleep_req_n_w,
  output logic [SC_A-1:0] sleep_req_n_a,
  input  logic [SC_S-1:0] sleep_ack_n_s,
  input  logic [SC_D-1:0] sleep_ack_n_d,
  input  logic [SC_W-1:0] sleep_ack_n_w,
  input  logic [SC_A-1:0] sleep_ack_n_a
);

  localparam int unsigned ROWS_S = SZ_S / NUM_BANKS;
  localparam int unsigned ROWS_D = SZ_D / NUM_BANKS;
  localparam int unsigned ROWS_W = SZ_W / NUM_BANKS;
  localparam int unsigned ROWS_A = SZ_A / NUM_BANKS;
  localparam int unsigned SR_S   = ROWS_S / SC_S;
  localparam int unsigned SR_D   = ROWS_D / SC_D;
  localparam int unsigned SR_W   = ROWS_W / SC_W;
  localparam int unsigned SR_A   = ROWS_A / SC_A;
  localparam int unsigned NSEC   = SC_S + SC_D + SC_W + SC_A;

  typedef struct packed {
    logic [SC_S-1:0] s;
    logic [SC_D-1:0] d;
    logic [SC_W-1:0] w;
    logic [SC_A-1:0] a;
  } sec_mask_t;

  function automatic addr_t overflow(addr_t used, addr_t rows);
    return (used > rows) ? used - rows : '0;
  endfunction

  // Shared-memory rows an operation needs (one bit wider, cannot wrap).
  function automatic logic [ADDR_W:0] shared_rows(op_profile_t p);
    return {1'b0, overflow(p.d_rows, ADDR_W'(ROWS_D))} + {1'b0, overflow(p.w_rows, ADDR_W'(ROWS_W))}
         + {1'b0, overflow(p.a_rows, ADDR_W'(ROWS_A))};
  endfunction

  // Sectors an operation needs in each memory: sector k is needed when the
  // usage goes beyond k sectors.
  function automatic sec_mask_t need(op_profile_t p);
    sec_mask_t m;
    logic [ADDR_W:0] sh;
    sh = shared_rows(p);
    for (int k = 0; k < SC_S; k++) m.s[k] = sh > (ADDR_W+1)'(k * SR_S);
    for (int k = 0; k < SC_D; k++) m.d[k] = p.d_rows > ADDR_W'(k * SR_D);
    for (int k = 0; k < SC_W; k++) m.w[k] = p.w_rows > ADDR_W'(k * SR_W);
    for (int k = 0; k < SC_A; k++) m.a[k] = p.a_rows > ADDR_W'(k * SR_A);
    return m;
  endfunction

  op_profile_t      prof [MAX_OPS];
  logic [OP_W:0]    num_ops;
  logic [CYC_W-1:0] cyc_left;

  always_ff @(posedge clk) begin
    if (cfg_we) prof[cfg_op] <= cfg_prof;
  end

  op_profile_t cur, nxt;
  logic        has_next;
  assign cur      = prof[op_idx];
  assign nxt      = prof[op_idx + 1'b1];
  assign has_next = ({1'b0, op_idx} + 1'b1) < num_ops;

  // Sequencing of the operations.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      op_idx   <= '0;
      num_ops  <= '0;
      cyc_left <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && cfg_num_ops != '0) begin
          busy     <= 1'b1;
          op_idx   <= '0;
          num_ops  <= cfg_num_ops;
          cyc_left <= prof[0].cycles;
        end
      end else if (op_done) begin
        if (has_next) begin
          op_idx   <= op_idx + 1'b1;
          cyc_left <= nxt.cycles;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (cyc_left != '0) begin
        cyc_left <= cyc_left - 1'b1;
      end
    end
  end

  // Sleep requests: the current operation's sectors, plus the next
  // operation's sectors inside the lead window.
  sec_mask_t need_cur, need_nxt, want, acked;
  assign need_cur   = busy ? need(cur) : '0;
  assign need_nxt   = need(nxt);
  assign early_wake = busy && has_next && cyc_left <= CYC_W'(WAKE_LEAD);
  assign want       = need_cur | (early_wake ? need_nxt : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {sleep_req_n_s, sleep_req_n_d, sleep_req_n_w, sleep_req_n_a} <= '0;
    else        {sleep_req_n_s, sleep_req_n_d, sleep_req_n_w, sleep_req_n_a} <= want;
  end

  assign acked     = {sleep_ack_n_s, sleep_ack_n_d, sleep_ack_n_w, sleep_ack_n_a};
  assign spm_ready = busy && ((need_cur & ~acked) == '0);

  // Layout of the overflow regions in the shared memory.
  addr_t ov_d, ov_w, ov_a;
  assign ov_d = overflow(cur.d_rows, ADDR_W'(ROWS_D));
  assign ov_w = overflow(cur.w_rows, ADDR_W'(ROWS_W));
  assign ov_a = overflow(cur.a_rows, ADDR_W'(ROWS_A));
  assign sh_base[MT_DATA]   = '0;
  assign sh_base[MT_WEIGHT] = ov_d;
  assign sh_base[MT_ACC]    = ov_d + ov_w;
  assign sh_len[MT_DATA]    = ov_d;
  assign sh_len[MT_WEIGHT]  = ov_w;
  assign sh_len[MT_ACC]     = ov_a;

  assign prof_err = busy && (shared_rows(cur) > (ADDR_W+1)'(ROWS_S));

  // The handshake of Fig. 20: an acknowledge only rises (sector ON) after
  // its request has been raised.
  sec_mask_t req_all;
  assign req_all = {sleep_req_n_s, sleep_req_n_d, sleep_req_n_w, sleep_req_n_a};
  assert property (@(posedge clk) disable iff (!rst_n)
    (acked & ~$past(acked) & ~$past(req_all)) == '0)
    else $error("a sector woke up without a request");

  initial begin
    assert (NSEC > 0);
    assert (ROWS_S % SC_S == 0 && ROWS_D % SC_D == 0 && ROWS_W % SC_W == 0 && ROWS_A % SC_A == 0)
      else $error("sector counts must divide the row counts");
  end

endmodule
