// cdpim_pkg: types and constants shared by the CD-PIM die model.
//
// The numbers follow the design: 16 banks per LPDDR5 die, 32-byte (256-bit)
// global sense-amplifier words per Pbank, INT8 inputs and weights, a 64-byte
// CU input buffer and a 128-byte CU output buffer (64 partial sums of 16 bit).
// The command encoding (cmd_t) is this model's own: the design only names
// the three PIM instructions PIM_MAC_FM, MACT_LDB and MACB_LDT and the SEL0 /
// SEL1 values each one sets. Address fields are sized for the full LPDDR5
// bank (16-bit Pbank row, 5-bit 32-byte column); modules use the low bits
// their array size needs.
package cdpim_pkg;

  localparam int unsigned NUM_BANKS   = 16;   // banks per die
  localparam int unsigned SA_W        = 256;  // one global SA word, 32 B
  localparam int unsigned LANES       = 32;   // INT8 lanes per SA word
  localparam int unsigned IBUF_BYTES  = 64;   // CU input buffer, 64 B
  localparam int unsigned PSUM_N      = 64;   // partial sums per CU
  localparam int unsigned PSUM_W      = 16;   // 128 B / 64 sums
  localparam int unsigned ROW_AW      = 16;
  localparam int unsigned COL_AW      = 5;
  localparam int unsigned BANK_AW     = 4;

  // Instruction slot. The first three are the design's PIM instructions.
  typedef enum logic [2:0] {
    PIM_NOP      = 3'd0,
    PIM_MAC_FM   = 3'd1,  // SEL0=1 SEL1=1: both CUs MAC, four Pbanks
    PIM_MACT_LDB = 3'd2,  // SEL0=0 SEL1=1: top CU MACs, bottom half free
    PIM_MACB_LDT = 3'd3,  // SEL0=1 SEL1=0: bottom CU MACs, top half free
    PIM_LDIN     = 3'd4,  // write 32 B of input vector into CU input buffers
    PIM_CLR      = 3'd5,  // clear partial sums, set outer/inner product
    PIM_EXIT     = 3'd6   // SEL0=0 SEL1=0: plain memory
  } pim_op_e;

  // Memory-access slot (ordinary DRAM traffic of the processor).
  typedef enum logic [2:0] {
    MEM_NOP = 3'd0,
    MEM_ACT = 3'd1,
    MEM_PRE = 3'd2,
    MEM_RD  = 3'd3,
    MEM_WR  = 3'd4
  } mem_op_e;

  typedef struct packed {
    pim_op_e              pim;
    mem_op_e              mem;
    logic [BANK_AW-1:0]   bank;       // target bank of mem, LDIN
    logic                 all_banks;  // ACT/PRE/LDIN to every bank
    logic                 half;       // 0 top Pbanks, 1 bottom Pbanks
    logic                 side;       // RD/WR: 0 left Pbank, 1 right Pbank
    logic [ROW_AW-1:0]    row;        // ACT row
    logic [COL_AW-1:0]    col;        // RD/WR column; psum chunk when SEL=1
    logic [COL_AW-1:0]    pim_col;    // column the MAC instructions read
    logic                 inner;      // PIM_CLR: 1 inner product (V), 0 outer (K)
    logic                 chunk;      // PIM_LDIN: which 32 B of the 64 B buffer
  } cmd_t;

  // SEL pair of Table "Command Selection": {sel1 (top), sel0 (bottom)}.
  typedef struct packed {
    logic sel1;
    logic sel0;
  } sel_t;

endpackage
