// haru_pkg: types and constants shared by the sDTW accelerator.
//
// Reference and query samples are 16-bit signed fixed-point numbers. The host
// scales its z-score normalised signals by 2^5 before sending them, so a sample
// carries 5 fractional bits (the RTL never needs to know this: it only
// subtracts and compares). Costs accumulated along a warp path are 32-bit
// unsigned. Both widths and the scale follow the paper; the largest cost value
// is reserved as "infinity" for cells outside the matrix, which is this
// design's own encoding.
//
// The AXI4-Lite register map at the end is this design's own choice; the paper
// only says that control registers are written and status registers are read
// over AXI4-Lite.
package haru_pkg;

  localparam int unsigned SAMPLE_W  = 16;  // fixed-point sample width
  localparam int unsigned FRAC_BITS = 5;   // scaling factor 2^5 applied by the host
  localparam int unsigned COST_W    = 32;  // accumulated-cost width

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic        [COST_W-1:0]   cost_t;

  // Cost of a cell that does not exist (column 0 of the matrix, or a PE that
  // holds no reference sample this cycle).
  localparam cost_t COST_INF = '1;

  // Default sizes of the accelerator.
  localparam int unsigned QUERY_LEN  = 250;     // events per query = PEs in the chain
  localparam int unsigned REF_DEPTH  = 295000;  // reference samples held on chip
  localparam int unsigned FIFO_DEPTH = 16;      // result words buffered for the output stream

  // AXI4-Lite register map (byte addresses).
  localparam int unsigned AXIL_AW = 6;
  typedef logic [AXIL_AW-1:0] reg_addr_t;
  localparam reg_addr_t REG_CTRL     = 6'h00;  // W: bit0 START (self-clearing), bit1 REF_MODE; R: REF_MODE
  localparam reg_addr_t REG_STATUS   = 6'h04;  // R: see status_t
  localparam reg_addr_t REG_REF_LEN  = 6'h08;  // R: reference samples loaded (N)
  localparam reg_addr_t REG_POSITION = 6'h0C;  // R: position of the last finished search
  localparam reg_addr_t REG_SCORE    = 6'h10;  // R: score of the last finished search
  localparam reg_addr_t REG_QCOUNT   = 6'h14;  // R: query samples loaded (saturates at M)
  localparam reg_addr_t REG_CONFIG   = 6'h18;  // R: M (PE count) of this build

  localparam int unsigned CTRL_START    = 0;
  localparam int unsigned CTRL_REF_MODE = 1;

  // Fields of REG_STATUS, bit 0 first.
  typedef struct packed {
    logic [25:0] reserved;
    logic        fifo_full;     // bit 5: result FIFO full
    logic        fifo_empty;    // bit 4: no result waiting in the FIFO
    logic        ref_overflow;  // bit 3: reference packet longer than the memory
    logic        query_full;    // bit 2: M query samples are loaded
    logic        done;          // bit 1: a search finished since the last START
    logic        busy;          // bit 0: a search is running
  } status_t;

  // States of the search sequencer.
  typedef enum logic [2:0] {
    ST_IDLE,
    ST_CLEAR,
    ST_RUN,
    ST_PUSH_POS,
    ST_PUSH_SCORE
  } ctrl_state_t;

endpackage
