// descnet_pkg -- types and constants shared by the DESCNet scratchpad blocks.
//
// Every memory of the scratchpad (shared, data, weight, accumulator) is built
// from NUM_BANKS banks that are accessed together at one row address, one
// LANE_W-bit lane per bank. The bank count of 16 follows the 16x16 processing
// array the memory feeds; the 8-bit lane, the row-address width and the
// operation-profile format are choices of this implementation.
package descnet_pkg;

  localparam int unsigned NUM_BANKS = 16;   // B = 16 for every memory
  localparam int unsigned LANE_W    = 8;    // one byte per bank and access
  localparam int unsigned ADDR_W    = 20;   // row address (covers 8 MiB / 16 banks)
  localparam int unsigned MAX_OPS   = 32;   // entries of the operation profile table
  localparam int unsigned OP_W      = $clog2(MAX_OPS);
  localparam int unsigned CYC_W     = 32;

  // The three kinds of values the accelerator keeps in the scratchpad.
  typedef enum logic [1:0] {
    MT_DATA   = 2'd0,
    MT_WEIGHT = 2'd1,
    MT_ACC    = 2'd2
  } mem_type_e;
  localparam int unsigned NUM_TYPES = 3;

  typedef logic [NUM_BANKS-1:0][LANE_W-1:0] row_t;
  typedef logic [ADDR_W-1:0]                addr_t;

  // One request on a memory port: a read (we = 0) or a lane-masked write.
  typedef struct packed {
    logic                 en;
    logic                 we;
    addr_t                addr;
    logic [NUM_BANKS-1:0] be;
    row_t                 wdata;
  } spm_req_t;

  // Memory usage of one operation of the inference, in rows of NUM_BANKS
  // bytes, and its expected length in clock cycles (used to wake the next
  // operation's sectors ahead of time).
  typedef struct packed {
    addr_t              d_rows;
    addr_t              w_rows;
    addr_t              a_rows;
    logic [CYC_W-1:0]   cycles;
  } op_profile_t;

endpackage
