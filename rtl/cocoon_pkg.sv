// cocoon_pkg: types and constants shared by the Cocoon-NMP device blocks.
//
// The device sits behind a CXL endpoint. Commands arrive on the CXL.io side
// as cmd_t records; bulk data (the noise-history matrix, the GEMV result,
// and normally the mixing vector) moves through CXL.mem into DDR4
// channels, as in the paper. The paper does not give any bit width, number
// format or command encoding: everything in this package is a choice of
// this design and is listed as such in the README.
//
//  * Data are 32-bit signed fixed point with 16 fraction bits (Q16.16).
//  * Each memory channel moves one 512-bit word (64 bytes, one DDR4 x64
//    burst of 8) per access. Host CXL.mem accesses are 64-byte lines.
//  * Physical addresses are 40-bit byte addresses (1 TiB).
package cocoon_pkg;

  localparam int unsigned DATA_W     = 32;  // noise / mixing-vector element
  localparam int unsigned FRAC_W     = 16;  // fraction bits of DATA_W
  localparam int unsigned PROD_W     = 2 * DATA_W;
  localparam int unsigned ACC_W      = PROD_W + 8;  // room for 256 products
  localparam int unsigned CH_DATA_W  = 512; // one channel word
  localparam int unsigned PA_W       = 40;  // physical byte address
  localparam int unsigned MAT_ID_W   = 4;   // matrix id (offset-table index)
  localparam int unsigned ROWS_W     = 9;   // up to 256 rows / vector index
  localparam int unsigned BEATS_W    = 32;  // row length / stride in beats
  localparam int unsigned TAG_W      = 4;   // job tag returned on completion
  localparam int unsigned HTAG_W     = 4;   // host CXL.mem request tag
  // Channel-local word address: a physical address with the 64-byte offset
  // and at least one interleave bit removed.
  localparam int unsigned CH_ADDR_W  = PA_W - 7;

  typedef logic signed [DATA_W-1:0] data_t;

  // CXL.io command opcodes.
  typedef enum logic [2:0] {
    OP_SET_OFFSET = 3'd0,  // offset table[src_id] <= value
    OP_WRITE_VEC  = 3'd1,  // mixing vector[rows] <= value[DATA_W-1:0]
    OP_GEMV       = 3'd2,  // dst = vector x src, see gemv fields
    OP_NOP        = 3'd3,  // completes immediately (fence / ping)
    OP_LOAD_VEC   = 3'd4   // mixing vector[0..rows-1] <= matrix src_id
  } opcode_e;

  // One host command. For OP_GEMV: src_id is the noise-history matrix,
  // dst_id the result row, rows = number of history rows (b-1), beats = row
  // length in engine beats, stride = distance between rows in beats.
  // For OP_LOAD_VEC: src_id is a matrix holding the mixing vector (elements
  // packed from its base, as written by the host over CXL.mem) and rows the
  // number of elements to load.
  typedef struct packed {
    opcode_e               op;
    logic [TAG_W-1:0]      tag;
    logic [MAT_ID_W-1:0]   src_id;
    logic [MAT_ID_W-1:0]   dst_id;
    logic [ROWS_W-1:0]     rows;
    logic [BEATS_W-1:0]    beats;
    logic [BEATS_W-1:0]    stride;
    logic [PA_W-1:0]       value;
  } cmd_t;

  // Completion returned to the host for every command.
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    opcode_e          op;
    logic             err;   // matrix with no offset set, or rows too large
  } cpl_t;

  // Source of a channel request, echoed in the response.
  typedef enum logic { SRC_HOST = 1'b0, SRC_ENGINE = 1'b1 } src_e;

  // Request to one memory channel (the memory controller's front end).
  typedef struct packed {
    logic                  we;
    logic [CH_ADDR_W-1:0]  addr;   // channel word address
    logic [CH_DATA_W-1:0]  wdata;
    src_e                  src;
    logic [HTAG_W-1:0]     htag;
  } mem_req_t;

  // Read response of one channel; responses come back in request order.
  typedef struct packed {
    logic [CH_DATA_W-1:0]  rdata;
    src_e                  src;
    logic [HTAG_W-1:0]     htag;
  } mem_rsp_t;

  // Host CXL.mem request (64-byte line).
  typedef struct packed {
    logic                  we;
    logic [PA_W-1:0]       addr;   // byte address, 64-byte aligned
    logic [CH_DATA_W-1:0]  wdata;
    logic [HTAG_W-1:0]     htag;
  } host_req_t;

  typedef struct packed {
    logic [CH_DATA_W-1:0]  rdata;
    logic [HTAG_W-1:0]     htag;
  } host_rsp_t;

endpackage
