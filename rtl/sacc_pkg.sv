// Shared types and constants of the structured-sparse CNN accelerator.
//
// The accelerator runs one layer tile per start pulse. The layer is described by
// layer_cfg_t, the decoded form of a layer instruction. The enums name the operations
// the main controller issues to the vector generator (vgm_op_e) and to the
// post-processing stage of each processing unit (pp_op_e).
// The word widths follow the 16-bit fixed-point datapath of the design: 16-bit
// activations and weights, 32-bit partial sums, 4-bit step index and row pointer,
// 16-bit channel offset. The field layout of layer_cfg_t is this design's own choice.
package sacc_pkg;

  // Operations of the vector generator module (VGM)
  typedef enum logic [2:0] {
    VGM_NOP     = 3'd0,  // hold
    VGM_LOAD1   = 3'd1,  // REG1 <= next ABin row segment
    VGM_ROW     = 3'd2,  // first weight of a kernel row: REG0 <= REG1 shifted by index
    VGM_STEP    = 3'd3,  // next weight of the row: REG0 shifted by index+1
    VGM_FC_LOAD = 3'd4,  // FC: REG0 <= REG1, REG1 <= next chunk, pointer cleared
    VGM_FC_STEP = 3'd5   // FC: advance pointer by the decoded jump, select one activation
  } vgm_op_e;

  // Operations of the post-processing stage, applied to the data on the PSB read port
  typedef enum logic [1:0] {
    PP_NONE       = 2'd0,
    PP_POOL_FIRST = 2'd1,  // first row of a 2x2 pooling pair: keep it
    PP_FINAL      = 2'd2   // produce the output word
  } pp_op_e;

  typedef enum logic {
    MODE_CONV = 1'b0,
    MODE_FC   = 1'b1
  } layer_mode_e;

  // Decoded layer instruction (one tile of a layer, one group of N output channels)
  typedef struct packed {
    layer_mode_e  mode;
    logic         int8;       // two 8-bit activations per 16-bit lane, 8-bit weights
    logic         relu;       // apply the activation function
    logic         pool;       // 2x2 max pooling on the way out
    logic [4:0]   shift;      // fixed-point rescale (arithmetic right shift)
    logic [3:0]   r;          // kernel size R
    logic [2:0]   s;          // stride
    logic [11:0]  c;          // input channels C (CONV)
    logic [9:0]   ut;         // output rows in this tile, U_t
    logic [9:0]   g;          // column groups of M outputs, ceil(V/M)
    logic [15:0]  fc_chunks;  // FC: number of ABin chunks holding the input vector
    logic [9:0]   off_base;   // WIB Offset part: word address of this layer's Offset[0]
    logic [12:0]  rp_base;    // WIB R_pointer part: nibble address of R_pointer[0]
    logic [13:0]  idx_base;   // WIB Index part: nibble address of Index[0]
    logic [15:0]  wb_base;    // WB address of the first nonzero weight of this tile
  } layer_cfg_t;

  // Event counters of one run
  typedef struct packed {
    logic [31:0] cycles;        // busy cycles
    logic [31:0] mac_cycles;    // cycles that issued a nonzero weight to the PE array
    logic [31:0] skip_rows;     // kernel rows with no nonzero weight (R_pointer == 0)
    logic [31:0] stall_abin;    // cycles waiting for ABin data
    logic [31:0] stall_about;   // cycles waiting for ABout space
    logic [31:0] out_words;     // words written to ABout
  } perf_t;

endpackage
