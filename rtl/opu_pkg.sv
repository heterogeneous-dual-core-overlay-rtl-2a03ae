// opu_pkg: types and constants shared by the dual-core overlay processor.
//
// Holds the off-chip memory request/response structs, the 128-bit
// instruction word and its per-opcode field layouts. The memory beat is
// 512 bits (64 bytes per cycle, the bandwidth of a 64-bit DDR3-1600
// channel seen from a 200 MHz fabric clock); the instruction encoding is
// this design's own, the paper only states that the cores are instruction
// driven.
package opu_pkg;

  localparam int MEM_DW    = 512;          // bits per memory beat
  localparam int MEM_AW    = 32;           // beat (word) address
  localparam int MEM_BYTES = MEM_DW / 8;
  localparam int INSTR_W   = 128;
  localparam int INSTR_PER_BEAT = MEM_DW / INSTR_W;
  localparam int ACC_W     = 32;           // partial-sum width in the output buffer

  typedef struct packed {
    logic                 valid;
    logic                 we;
    logic [MEM_AW-1:0]    addr;
    logic [MEM_DW-1:0]    wdata;
    logic [MEM_BYTES-1:0] wstrb;
  } mem_req_t;

  typedef struct packed {
    logic              valid;
    logic [MEM_DW-1:0] rdata;
  } mem_rsp_t;

  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_LOAD    = 4'd1,   // off-chip memory -> input buffer
    OP_COMPUTE = 4'd2,   // input buffers -> PE array -> output buffer
    OP_POST    = 4'd3,   // output buffer -> post-processing -> off-chip memory
    OP_SIGNAL  = 4'd4,   // give one token to the other core
    OP_WAIT    = 4'd5,   // take one token from the other core (blocks)
    OP_END     = 4'd6    // wait for all engines idle, raise done
  } opcode_e;

  typedef enum logic [1:0] {
    DST_FM   = 2'd0,
    DST_W    = 2'd1,
    DST_BIAS = 2'd2,
    DST_RES  = 2'd3
  } load_dst_e;

  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1,
    ACT_RELU6 = 2'd2     // clamp to [0, relu6_max]
  } act_e;

  localparam int BODY_W = INSTR_W - 5;

  typedef struct packed {
    logic [BODY_W-68:0] pad;
    load_dst_e          dst;
    logic               bank;
    logic [31:0]        mem_addr;
    logic [15:0]        buf_addr;
    logic [15:0]        words;      // buffer words to fill
  } load_body_t;

  typedef struct packed {
    logic [BODY_W-88:0] pad;
    logic               fm_bank;
    logic               w_bank;
    logic [15:0]        fm_addr;
    logic [15:0]        w_addr;
    logic [15:0]        ob_addr;
    logic [15:0]        count;      // feature-map words streamed
    logic [2:0]         group_log2; // PEs summed per result = 2**group_log2
    logic               window;     // p-core: use the line buffer (depthwise 3x3)
    logic               accumulate; // add to the output buffer instead of overwrite
    logic [15:0]        row_w;      // window mode: tile row width in pixels
  } compute_body_t;

  typedef struct packed {
    logic [BODY_W-116:0] pad;
    logic [15:0]        ob_addr;
    logic [15:0]        count;      // output words produced
    logic [7:0]         pool_n;     // output-buffer words per pooling window (>=1)
    logic               pool_avg;   // 0: max pooling, 1: sum >> avg_shift
    logic [3:0]         avg_shift;
    logic [4:0]         shift;      // requantisation right shift
    logic               res_en;
    logic [15:0]        res_addr;
    logic               res_bank;
    act_e               act;
    logic [7:0]         relu6_max;
    logic               bias_bank;
    logic [3:0]         bias_addr;
    logic [31:0]        mem_addr;
  } post_body_t;

  typedef struct packed {
    opcode_e           op;
    logic              barrier;     // wait until every engine is idle before issue
    logic [BODY_W-1:0] body;
  } instr_t;

endpackage
