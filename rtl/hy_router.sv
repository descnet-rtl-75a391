// hy_router -- steering of the hybrid (HY) scratchpad and its output
// multiplexers.
//
// The accelerator addresses each kind of value (data, weights, accumulators)
// with a logical row number starting at 0. In the hybrid organisation the
// first ROWS_X rows of a kind live in its separate memory; rows beyond that
// overflow into that kind's port of the shared multi-port memory, at
// sh_base[X] + (row - ROWS_X). The power manager sets sh_base and sh_len for
// the running operation. A row beyond ROWS_X + sh_len[X] is not forwarded and
// raises range_err. Separate memories for each kind, one shared-memory port
// per kind and a multiplexer per kind choosing which memory answers follow the
// paper's hybrid diagram; the address split is this design's choice (the
// paper gives the sizes, not the mapping).
//
// Only the row address and the enable are changed on the way: the write
// data, lane enables and write flag reach whichever memory is chosen as they
// came from the accelerator.
//
// Timing: requests are forwarded combinationally. The multiplexer select is
// registered with a read, so acc_rdata follows the memories' one-cycle read
// latency and is valid one cycle after the read request.
module hy_router
  import descnet_pkg::*;
#(
  parameter int unsigned ROWS_D = 1600,
  parameter int unsigned ROWS_W = 1600,
  parameter int unsigned ROWS_A = 2048,
  parameter int unsigned ROWS_S = 2048
) (
  input  logic     clk,
  input  logic     rst_n,
  input  spm_req_t acc_req   [NUM_TYPES],
  output row_t     acc_rdata [NUM_TYPES],
  input  addr_t    sh_base   [NUM_TYPES],
  input  addr_t    sh_len    [NUM_TYPES],
  output spm_req_t sep_req   [NUM_TYPES],
  input  row_t     sep_rdata [NUM_TYPES],
  output spm_req_t sh_req    [NUM_TYPES],
  input  row_t     sh_rdata  [NUM_TYPES],
  output logic [NUM_TYPES-1:0] range_err,
  output logic [NUM_TYPES-1:0] to_shared   // this cycle's request goes to the shared memory
);

  localparam int unsigned SEP_ROWS [NUM_TYPES] = '{ROWS_D, ROWS_W, ROWS_A};

  logic [NUM_TYPES-1:0] sel_sh_q;

  for (genvar t = 0; t < NUM_TYPES; t++) begin : g_type
    logic  in_sep, in_sh;
    addr_t off;

    assign in_sep = acc_req[t].addr < ADDR_W'(SEP_ROWS[t]);
    assign off    = acc_req[t].addr - ADDR_W'(SEP_ROWS[t]);
    assign in_sh  = !in_sep && off < sh_len[t] && (sh_base[t] + off) < ADDR_W'(ROWS_S);

    always_comb begin
      sep_req[t]      = acc_req[t];
      sep_req[t].en   = acc_req[t].en && in_sep;
      sh_req[t]       = acc_req[t];
      sh_req[t].en    = acc_req[t].en && in_sh;
      sh_req[t].addr  = sh_base[t] + off;
    end

    assign range_err[t] = acc_req[t].en && !in_sep && !in_sh;
    assign to_shared[t] = acc_req[t].en && in_sh;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                               sel_sh_q[t] <= 1'b0;
      else if (acc_req[t].en && !acc_req[t].we) sel_sh_q[t] <= !in_sep;
    end

    assign acc_rdata[t] = sel_sh_q[t] ? sh_rdata[t] : sep_rdata[t];
  end

endmodule
