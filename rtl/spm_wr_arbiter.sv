// spm_wr_arbiter -- merges accelerator requests and off-chip prefetch writes
// onto one data or weight memory port.
//
// Both the accelerator and the off-chip memory write into the data and weight
// memories (the prefetch of the next operation's values runs while the
// current operation computes). This block gives the port to the accelerator
// whenever it has a request and lets an off-chip write through in the other
// cycles. The off-chip side uses a valid/ready handshake: a write is taken in
// a cycle with ofc_valid and ofc_ready both high, and it must hold its payload
// while it waits. The two sources sharing one input follow the paper's
// figures; the fixed priority and the handshake are this design's choice.
// Purely combinational; no added latency.
module spm_wr_arbiter
  import descnet_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  spm_req_t             acc_req,
  input  logic                 ofc_valid,
  output logic                 ofc_ready,
  input  addr_t                ofc_addr,
  input  row_t                 ofc_wdata,
  input  logic [NUM_BANKS-1:0] ofc_be,
  output spm_req_t             out_req
);

  assign ofc_ready = !acc_req.en;

  always_comb begin
    if (acc_req.en) begin
      out_req = acc_req;
    end else begin
      out_req.en    = ofc_valid;
      out_req.we    = 1'b1;
      out_req.addr  = ofc_addr;
      out_req.be    = ofc_be;
      out_req.wdata = ofc_wdata;
    end
  end

  // A waiting off-chip write keeps its payload.
  assert property (@(posedge clk) disable iff (!rst_n)
    (ofc_valid && !ofc_ready) |=> (ofc_valid && $stable(ofc_addr) && $stable(ofc_wdata) && $stable(ofc_be)))
    else $error("off-chip write changed while waiting");

endmodule
