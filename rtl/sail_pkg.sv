// sail_pkg -- types and constants shared by the SAIL LUT-GEMV fabric.
//
// Holds the lutmm_1k instruction layout (bit fields as printed in the ISA
// figure: loc[31:27] sc[26:25] rw[24:20] ri[19:15] ql[14:12] rd[11:7]
// opcode[6:0]), the geometry defaults of a C-SRAM array (256 rows x 512
// bitlines, 512-bit cache block), the GEMV tile size (1024), and the command
// set that the data feeding module (DFM) sends to a C-SRAM's control unit.
//
// Paper numbers: 256x512 array, 512-bit block, 1024 tile, 32-entry PRT with a
// 32-bit hash, n <= 25 for the integer-to-float conversion, batch 8, NBW 2.
// Own choices: the opcode value (custom-0), the ql encoding (bits = ql + 1),
// 8-bit weight containers in memory, 8-bit unsigned activations and a 25-bit
// accumulator.
package sail_pkg;

  // ---------------- geometry (paper numbers) ----------------
  localparam int unsigned CS_ROWS   = 256;   // C-SRAM rows (Table I: 256x512 bits)
  localparam int unsigned CS_COLS   = 512;   // C-SRAM bitlines
  localparam int unsigned BLK_W     = 512;   // cache block / slice port width (Fig. 7: 512b)
  localparam int unsigned VEC_LEN   = 1024;  // lutmm_1k tile dimension
  localparam int unsigned NBW_DEF   = 2;     // number of basis weights
  localparam int unsigned BATCH_DEF = 8;     // batch size found optimal for the pipeline
  localparam int unsigned PRT_ENTRIES = 32;  // pattern reuse table entries
  localparam int unsigned PRT_KEY_W   = 32;  // hash width
  localparam int unsigned CONV_N      = 25;  // max integer width of Algorithm 1

  // ---------------- own choices ----------------
  localparam int unsigned CONT_W    = 8;     // memory container per weight (low ql bits used)
  localparam int unsigned WMAX      = 8;     // widest supported weight precision
  localparam int unsigned ACT_BITS  = 8;     // activation precision (unsigned)
  localparam int unsigned ACC_W     = 25;    // accumulator width per output and batch element (= CONV_N)
  localparam int unsigned OUT_LANES = 8;     // FP32 results per output beat (32B NoC flit)
  localparam int unsigned ADDR_W    = 32;

  localparam logic [6:0] OPC_LUTMM = 7'b0001011;  // RISC-V custom-0

  typedef struct packed {
    logic [4:0] loc;     // [31:27] tile position in the full GEMV
    logic [1:0] sc;      // [26:25] matrix width = 1024 << sc
    logic [4:0] rw;      // [24:20] register holding the weight base address
    logic [4:0] ri;      // [19:15] register holding the input base address
    logic [2:0] ql;      // [14:12] quantization level
    logic [4:0] rd;      // [11:7]  register holding the result base address
    logic [6:0] opcode;  // [6:0]
  } lutmm_instr_t;

  // Operations of the bitline-computing SRAM, one per cycle.
  typedef enum logic [2:0] {
    BC_NOP   = 3'd0,
    BC_WRITE = 3'd1,   // masked row write through the write drivers
    BC_READ  = 3'd2,   // single-row read, registered on the next edge
    BC_ADD   = 3'd3,   // dual-wordline activation, sum written to row wa, carry latched
    BC_CCLR  = 3'd4    // clear the per-column carry latches
  } bc_op_e;

  // Commands from the DFM to a C-SRAM's reconfigurable control unit.
  typedef enum logic [2:0] {
    RCU_LOADW = 3'd0,  // transpose one 512-bit weight block into a single-weight LUT entry
    RCU_BUILD = 3'd1,  // build all multi-weight LUT entries by bitline addition
    RCU_CLEAR = 3'd2,  // zero every accumulator
    RCU_ACCUM = 3'd3,  // acc[batch] += LUT[pattern] << shift
    RCU_READ  = 3'd4   // read accumulator of one batch element out to the columns
  } rcu_cmd_e;

  // One command to a C-SRAM. The 512-bit weight block of RCU_LOADW travels
  // on a separate data bus.
  typedef struct packed {
    rcu_cmd_e   op;
    logic [7:0] entry;     // LOADW: LUT entry (one-hot pattern of a single weight)
    logic [7:0] blk;       // LOADW: which 64-column group of the array
    logic [3:0] w_bits;    // LOADW: weight precision
    logic [7:0] batch;     // ACCUM/READ: batch element
    logic [7:0] pattern;   // ACCUM: NBW-bit activation pattern
    logic [7:0] shift;     // ACCUM: activation bit position
  } rcu_cmd_t;

  // ql field to weight precision in bits.
  function automatic logic [3:0] ql_to_bits(input logic [2:0] ql);
    return {1'b0, ql} + 4'd1;
  endfunction

endpackage
