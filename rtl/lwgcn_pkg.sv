// lwgcn_pkg: sizes, the PCOO packet layout and the instruction format shared by
// every LW-GCN module.
//
// The defaults are the main configuration of the accelerator: 32 PEs of 16
// multiply-accumulators each, 512-column tiles, the dense data memory split
// into 32 row groups of depth 16 and replicated 4 times (one replica per PE
// group). Sparse values are SINT4, dense data and layer outputs SINT16,
// accumulators SINT32. A PCOO packet is {SOR, EOR, VLD, column-in-tile, value}:
// 3 + log2(512) + 4 = 16 bits. The external memory word (512 bits) carries one
// packet per PE, so one word feeds the whole array for one cycle.
//
// The instruction set, its 64-bit encoding, the buffer depths and the
// quantisation step (arithmetic shift, optional ReLU, saturation) are this
// design's own choices; the paper only says that instructions exist.
package lwgcn_pkg;

  // ---- array geometry (paper values) ----
  localparam int unsigned NUM_PE   = 32;   // PEs in the array
  localparam int unsigned LANES    = 16;   // MACs per PE (GCN hidden size)
  localparam int unsigned TILE     = 512;  // columns of X / rows of W per tile
  localparam int unsigned GROUPS   = 32;   // DDM row groups, TILE = 16 * GROUPS
  localparam int unsigned REPLICAS = 4;    // DDM replicas = PE groups
  localparam int unsigned GDEPTH   = TILE / GROUPS; // rows per row-group bank (16)

  // ---- number formats ----
  localparam int unsigned VAL_W  = 4;   // sparse value, SINT4
  localparam int unsigned DW     = 16;  // dense data / layer output, SINT16
  localparam int unsigned ACC_W  = 32;  // accumulator, SINT32
  localparam int unsigned COL_W  = $clog2(TILE);
  localparam int unsigned PKT_W  = 3 + COL_W + VAL_W;   // 16
  localparam int unsigned ROW_W  = LANES * DW;          // one dense row, 256 bits
  localparam int unsigned WORD_W = NUM_PE * PKT_W;      // external word, 512 bits

  // ---- buffer depths (own choice, sized for PubMed: 19717 nodes) ----
  localparam int unsigned ROWS_PER_PE = 640;                  // output-buffer rows per PE
  localparam int unsigned MAX_NODES   = NUM_PE * ROWS_PER_PE; // 20480 OMMB rows
  localparam int unsigned EWM_DEPTH   = ROWS_PER_PE * LANES;  // 10240 words
  localparam int unsigned HDR_DEPTH   = 64;                   // shared DMM header entries
  localparam int unsigned IRAM_DEPTH  = 256;                  // instructions
  localparam int unsigned EXT_AW      = 24;                   // external word address

  typedef struct packed {
    logic             sor;
    logic             eor;
    logic             vld;
    logic [COL_W-1:0] col;
    logic [VAL_W-1:0] val;
  } pcoo_t;

  // ---- instructions ----
  typedef enum logic [3:0] {
    OP_END       = 4'd0,  // stop, raise done
    OP_LOAD_DDM  = 4'd1,  // ext -> DDM rows 0..count-1 (two rows per word)
    OP_LOAD_HDR  = 4'd2,  // ext -> DMM header table (32 entries per word)
    OP_LOAD_BIAS = 4'd3,  // ext -> bias vector (one word, 16 x SINT32)
    OP_COMPUTE   = 4'd4,  // stream count EWM words through the PE array
    OP_MOVE      = 4'd5,  // output buffers -> quantize -> OMMB (and EWM)
    OP_COPY_DDM  = 4'd6,  // OMMB rows aux..aux+count-1 -> DDM rows 0..count-1
    OP_STORE     = 4'd7   // OMMB rows 0..count-1 -> ext (two rows per word)
  } opcode_e;

  typedef struct packed {
    opcode_e           op;        // 63:60
    logic              sparse;    // 59  COMPUTE: 1 SDMM (values from PCOO), 0 DMM
    logic              bias;      // 58  COMPUTE: SOR starts from bias instead of buffer
    logic              binary;    // 57  COMPUTE: VLD packets carry implicit value 1
    logic              flag;      // 56  MOVE: also write EWM; COMPUTE: stream from ext
    logic [EXT_AW-1:0] addr;      // 55:32 external word address
    logic [15:0]       count;     // 31:16 words / rows
    logic [15:0]       aux;       // 15:0  MOVE: {relu, shift[4:0]}; COMPUTE: DMM columns;
                                  //       COPY_DDM: first OMMB row
  } instr_t;

  // DMA destinations / sources
  typedef enum logic [2:0] {
    DMA_IRAM = 3'd0, DMA_DDM = 3'd1, DMA_HDR = 3'd2, DMA_BIAS = 3'd3,
    DMA_EWM  = 3'd4, DMA_STORE = 3'd5
  } dma_kind_e;

endpackage
