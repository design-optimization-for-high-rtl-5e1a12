// tcu_pkg: constants and types shared by the tensor compute unit.
//
// The accelerator is a weight-stationary systolic-array engine configured
// for a ZCU104-class device: a 32x32 array of 16-bit fixed-point
// multiply-accumulate cells, a 48K-vector local memory held in UltraRAM and
// a 20K-vector accumulator memory held in Block RAM. One "vector" is one
// row of the array: 32 lanes x 16 bits = 512 bits, which is also the width
// of the accelerator's memory ports. Toward the processing system those
// ports are 128 bits wide and run in a second, faster clock domain.
//
// The array size, data width, memory depths and port widths follow the
// published configuration. The binary point position, the instruction word
// layout and the opcode values are this design's own choices.
package tcu_pkg;

  // ---- configuration ----------------------------------------------------
  parameter int ARRAY_SIZE  = 32;          // systolic array is ARRAY_SIZE x ARRAY_SIZE
  parameter int DATA_W      = 16;          // 16-bit fixed point
  parameter int FRAC_W      = 8;           // fractional bits of the fixed-point format
  parameter int VEC_W       = ARRAY_SIZE * DATA_W;  // one vector: 512 bits
  parameter int AXI_W       = 128;         // processing-system port width
  parameter int LOCAL_DEPTH = 48 * 1024;   // 48 KV local memory (UltraRAM)
  parameter int ACC_DEPTH   = 20 * 1024;   // 20 KV accumulators (Block RAM)
  parameter int INSTR_W     = 64;          // instruction word width
  parameter int DRAM_ADDR_W = 24;          // DRAM address, in vectors

  // ---- instruction word ---------------------------------------------------
  // [63:60] opcode, [59:56] flags, [55:40] size (vectors - 1),
  // [39:24] local-memory address, [23:0] accumulator or DRAM address.
  typedef enum logic [3:0] {
    OP_NOP          = 4'h0,
    OP_MATMUL       = 4'h1,  // local -> array -> accumulators
    OP_DATAMOVE     = 4'h2,  // flags select source and destination
    OP_LOADWEIGHTS  = 4'h3   // local -> array weight registers
  } opcode_e;

  // Flags of OP_DATAMOVE.
  typedef enum logic [3:0] {
    DM_DRAM0_TO_LOCAL = 4'h0,
    DM_LOCAL_TO_DRAM0 = 4'h1,
    DM_DRAM1_TO_LOCAL = 4'h2,
    DM_LOCAL_TO_DRAM1 = 4'h3,
    DM_ACC_TO_LOCAL   = 4'hC,
    DM_LOCAL_TO_ACC   = 4'hD,
    DM_LOCAL_ADD_ACC  = 4'hF   // accumulate into the accumulators
  } dm_kind_e;

  // Flag bit 0 of OP_MATMUL: add the product to the accumulators instead of
  // overwriting them.
  parameter int FLAG_ACCUMULATE = 0;

  typedef struct packed {
    opcode_e     op;
    logic [3:0]  flags;
    logic [15:0] size;        // number of vectors minus one
    logic [15:0] local_addr;
    logic [23:0] addr;        // accumulator address or DRAM address
  } instr_t;

  // Request on a DRAM port, in the accelerator's clock domain.
  typedef struct packed {
    logic                   write;  // 1: vectors flow to DRAM
    logic [DRAM_ADDR_W-1:0] addr;   // first vector
    logic [16:0]            len;    // number of vectors
  } dram_req_t;

  // Saturate a wide signed value to DATA_W bits.
  function automatic logic signed [DATA_W-1:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[DATA_W-1:0];
  endfunction

endpackage
