// halo_cat_pkg -- shared geometry, memory sizes and the instruction word of
// the HALO-CAT hidden-network processor.
//
// A CIM core is 8 groups (tile columns W) x 8 macros (activation bit planes
// P) x 128 clusters (channels C) x 16 SRAM rows (tile rows H). These numbers,
// the 7-bit macro ADC, the three cores and the memory sizes (MMEM 32KB,
// TMEM 24KB, IMEM 32KB) follow the paper. The 128-bit instruction word and
// its opcodes are this design's own: the paper names the instruction memory
// and the top control but does not describe an instruction set.
package halo_cat_pkg;

  // Core geometry
  localparam int unsigned NGROUP   = 8;    // CIM groups per core = tile width W
  localparam int unsigned NMACRO   = 8;    // macros per group = activation bits P
  localparam int unsigned NCLUSTER = 128;  // clusters per macro = channels C
  localparam int unsigned NROW     = 16;   // SRAM rows per cluster = tile height H
  localparam int unsigned ADC_BITS = 7;    // per-macro ADC resolution
  localparam int unsigned NCORE    = 3;    // CIM cores (iCIM, oCIM, residual)

  // Width of one group's compressed MAC result: sum_p code_p << p
  localparam int unsigned MAC_BITS = ADC_BITS + NMACRO;  // 15
  // NMP accumulator width
  localparam int unsigned ACC_BITS = 24;

  // Memories (words x bits): MMEM 32KB, TMEM 24KB, IMEM 32KB
  localparam int unsigned MMEM_DEPTH = 2048;  // x 128 bit
  localparam int unsigned TMEM_DEPTH = 3072;  // x 64 bit
  localparam int unsigned IMEM_DEPTH = 2048;  // x 128 bit

  localparam int unsigned WORD_BITS = NGROUP * NMACRO;  // core digital word, 64

  typedef logic [NCLUSTER-1:0]  wvec_t;   // one weight bit per cluster
  typedef logic [WORD_BITS-1:0] cword_t;  // 8 pixels x 8 bit

  typedef enum logic [3:0] {
    OP_END   = 4'd0,   // stop, raise done
    OP_CONV  = 4'd1,   // K x K convolution iCIM -> NMP -> oCIM
    OP_TSAVE = 4'd2,   // copy rows of a core into TMEM
    OP_TLOAD = 4'd3    // copy TMEM into a core, shifted by groups/rows (tile concatenation)
  } opcode_e;

  // Instruction word, 128 bits
  typedef struct packed {
    opcode_e            op;          // [127:124]
    logic [1:0]         in_core;     // iCIM (CONV) / source core (TSAVE)
    logic [1:0]         out_core;    // oCIM (CONV) / destination core (TLOAD)
    logic [1:0]         res_core;    // core holding the shortcut operand
    logic               res_en;      // add shortcut in the NMP depth-sum stage
    logic [2:0]         ksize;       // kernel size K (odd, 1..7)
    logic [1:0]         stride;      // 1 or 2
    logic [3:0]         tile_w;      // input tile width, 1..8
    logic [4:0]         tile_h;      // input tile height, 1..16
    logic [4:0]         cin_chunks;  // input channels / 128 (rounded up), 1..16
    logic [11:0]        cout;        // output channels, 1..2048
    logic [7:0]         scale;       // NMP scale
    logic [4:0]         shift;       // NMP right shift
    logic signed [15:0] bias;        // NMP bias
    logic [10:0]        mask_base;   // first MMEM word of this layer
    logic [11:0]        seed;        // WGEN layer seed
    logic [2:0]         in_lg;       // log2 clusters per input pixel slot (7: whole rows)
    logic [2:0]         out_lg;      // log2 clusters per output pixel slot (7: whole rows)
    logic [11:0]        tm_base;     // TMEM base word (TSAVE/TLOAD)
    logic [4:0]         t_rows;      // core rows to copy (TSAVE/TLOAD)
    logic [4:0]         t_rowoff;    // destination row offset (TLOAD)
    logic [2:0]         t_gshift;    // destination group offset (TLOAD)
    logic [2:0]         pad;         // unused
  } instr_t;

endpackage
