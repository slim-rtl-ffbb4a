// slim_pkg: types and constants shared by the SLIM accelerator RTL.
//
// SLIM splits sparse LLM decoding between a processing-in-memory DRAM
// (attention, QKVO and the low-rank sparsity predictor) and near-storage
// processing engines inside an SSD (the FFN / MoE weights). This package
// holds the data types of that datapath and the hardware sizes the design
// is built around. Numbers taken from the paper's hardware table are
// marked as such; the rest are this design's own choices.
package slim_pkg;

  // All model weights and activations are 8-bit quantized (paper: "All
  // models in our experiments use 8b quantization").
  typedef logic signed [7:0]  act_t;
  typedef logic signed [31:0] psum_t;
  // Bit-serial accumulator output and softmax words are 16 bit (paper
  // Fig. 9(a) prints 16 on both).
  typedef logic signed [15:0] score_t;
  typedef logic        [15:0] prob_t;

  // DRAM organisation (paper hardware table): 16384 x 8192 bit arrays per
  // bank, 4 bank groups x 4 banks, 32 chips, 64-bit internal column path.
  localparam int unsigned DRAM_ROWS      = 16384;
  localparam int unsigned DRAM_ROW_BITS  = 8192;
  localparam int unsigned DRAM_COL_BITS  = 64;
  localparam int unsigned DRAM_COLS      = DRAM_ROW_BITS / DRAM_COL_BITS; // 128
  localparam int unsigned DRAM_BANKS     = 16;
  localparam int unsigned DRAM_CHIPS     = 32;
  localparam int unsigned DQ_BITS        = 8;

  // DDR4-2400 timing (paper hardware table), in DRAM clock cycles.
  localparam int unsigned T_RCD = 18;
  localparam int unsigned T_RAS = 39;
  localparam int unsigned T_RP  = 18;
  localparam int unsigned T_CL  = 18;
  localparam int unsigned T_WR  = 18;
  localparam int unsigned T_CCD = 4;

  // SSD organisation (paper hardware table, low-latency SLC device).
  localparam int unsigned SSD_CHANNELS   = 16;
  localparam int unsigned SSD_CHIPS      = 4;   // chips per channel, 1 die each
  localparam int unsigned NAND_PAGE_B    = 4096;

  // Die-level PE (paper hardware table): 16 MACs, 64 KB SRAM.
  localparam int unsigned PE_MACS        = 16;
  localparam int unsigned PE_SRAM_BYTES  = 65536;

  // One page-read transaction sent to a NAND die: which die, which page,
  // and which byte range of the page holds the fused vector.
  typedef struct packed {
    logic [15:0] die;
    logic [31:0] page;
    logic [15:0] npages;   // consecutive pages holding the vector
    logic [15:0] offset;   // byte offset of the vector inside its first page
    logic [15:0] neuron;   // FFN neuron (column of Wg/Wu, row of Wd)
  } nand_txn_t;

  // Engine ids used by the DRAM/SSD pipeline scheduler.
  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,
    PH_DRAM = 2'd1,
    PH_SSD  = 2'd2
  } phase_e;

  // Commands of the near-bank unit.
  typedef enum logic [1:0] {
    NB_LAYOUT = 2'd0,   // buffer -> transpose -> bank, bit-serial layout
    NB_ACCUM  = 2'd1,   // bank bit-planes -> adder tree -> score
    NB_SMBASE = 2'd2    // set where softmax results go in the buffer
  } nb_op_e;

  typedef struct packed {
    nb_op_e      op;
    logic        ew16;      // 16-bit elements (else 8-bit)
    logic        sgn;       // two's-complement elements
    logic [14:0] buf_addr;  // buffer word address
    logic [13:0] row;       // first bank row (bit 0 of the elements)
    logic [6:0]  col;       // first 64-bit bank column
    logic [7:0]  count;     // 64-element column groups
    logic [4:0]  oshift;    // score scaling of the adder tree
    logic        to_sm;     // also send the score to the softmax unit
    logic        sm_last;   // it is the last score of the sequence
  } nb_cmd_t;

endpackage
