// dpu_pkg -- constants and types shared by the LOAD path of the DPU core.
//
// The on-chip buffer of the B4096 configuration has 34 banks of 2048 lines,
// each line 16 bytes wide. Banks 0..15 hold feature maps, banks 16..32 hold
// weights and bank 33 holds biases; this assignment is fixed. A load
// instruction brings in up to 64 consecutive lines from shared memory. These
// numbers follow the accelerator as it is described for B4096. The encoding
// of a load instruction (field widths, a line-count field), the 32-bit
// shared-memory address and the layout of a trojan target entry are this
// design's own choices: the accelerator's real instruction format is not
// public.
package dpu_pkg;

  // ---- on-chip memory geometry --------------------------------------------
  localparam int unsigned LINE_BYTES    = 16;
  localparam int unsigned LINE_W        = LINE_BYTES * 8;       // 128 bits
  localparam int unsigned NUM_BANKS     = 34;
  localparam int unsigned BANK_LINES    = 2048;
  localparam int unsigned FMAP_BANKS    = 16;
  localparam int unsigned WEIGHT_BANKS  = 17;
  localparam int unsigned BIAS_BANKS    = 1;
  localparam int unsigned FIRST_WEIGHT_BANK = FMAP_BANKS;                 // 16
  localparam int unsigned FIRST_BIAS_BANK   = FMAP_BANKS + WEIGHT_BANKS;  // 33

  // ---- load instructions ----------------------------------------------------
  localparam int unsigned MAX_LOAD_LINES = 64;   // lines per load instruction
  localparam int unsigned DDR_ADDR_W     = 32;   // byte address in shared memory
  localparam int unsigned BANK_ID_W      = 6;    // 0..33
  localparam int unsigned BANK_ADDR_W    = 11;   // 0..2047
  localparam int unsigned LEN_W          = 7;    // 1..64 lines
  localparam int unsigned ROM_PTR_W      = 16;   // width of a trojan ROM line index

  typedef logic [LINE_W-1:0]      line_t;
  typedef logic [DDR_ADDR_W-1:0]  ddr_addr_t;
  typedef logic [BANK_ID_W-1:0]   bank_id_t;
  typedef logic [BANK_ADDR_W-1:0] bank_addr_t;

  // One load instruction: source start address in shared memory, destination
  // start line in the on-chip RAM, number of 16-byte lines. Both start
  // addresses advance by one line per data transfer.
  typedef struct packed {
    ddr_addr_t        ddr_addr;
    bank_id_t         bank_id;
    bank_addr_t       bank_addr;
    logic [LEN_W-1:0] lines;
  } load_instr_t;

  // One memory-line write, memory reader -> write controller.
  typedef struct packed {
    logic       valid;
    bank_id_t   bank_id;
    bank_addr_t bank_addr;
    line_t      data;
  } line_wr_t;

  // One trojan target: the shared-memory start address of a load instruction
  // to manipulate, a mask with a 1 for every line of that load to exchange
  // (bit 0 = first line), and the trojan ROM line that holds the first
  // replacement line. Replacement lines of one target are stored back to back.
  typedef struct packed {
    logic                       valid;
    ddr_addr_t                  ddr_addr;
    logic [MAX_LOAD_LINES-1:0]  line_mask;
    logic [ROM_PTR_W-1:0]       rom_base;
  } target_t;

  // Memory reader states (five abstract states of the reader).
  typedef enum logic [2:0] {
    RD_IDLE  = 3'd0,
    RD_CFG   = 3'd1,
    RD_PARSE = 3'd2,
    RD_SEND  = 3'd3,
    RD_DONE  = 3'd4
  } rd_state_e;

endpackage
