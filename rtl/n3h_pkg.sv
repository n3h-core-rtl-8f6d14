// n3h_pkg: types and constants shared by the heterogeneous accelerator.
//
// Every instruction is one 128-bit word. The top two bits give its kind
// (Fetch, Execute, Result, Sync); the rest is laid out by kind:
//   Fetch / Result : on-chip buffer base address (16 b), stage control (3 b),
//                    buffer read/write bit (1 b), DDR base address (32 b),
//                    DDR offset (24 b) and DDR read/write range (16 b).
//   Execute        : activation and weight buffer addresses, chunk count and
//                    the bit-serial controls (shift, negate, clear, commit).
//   Sync           : current state (1 b), next state (2 b), token flag (3 b).
// The field widths of Fetch/Result and Sync are the published ones; the bit
// positions, the two-bit kind code and the meaning given here to each field
// are this design's own choice. DDR addresses count 64-bit beats.
// Lint: the package's constants are reported unused when it is checked on
// its own; every module of the design uses them.
package n3h_pkg;

  localparam int unsigned INSTR_W = 128;
  localparam int unsigned DDR_DW  = 64;   // DDR data beat
  localparam int unsigned DDR_AW  = 32;
  localparam int unsigned ACC_W   = 32;   // accumulator / result width
  localparam int unsigned TOK_W   = 3;    // synchronisation token flag

  typedef enum logic [1:0] {
    OP_FETCH  = 2'd0,
    OP_EXEC   = 2'd1,
    OP_RESULT = 2'd2,
    OP_SYNC   = 2'd3
  } op_e;

  // Engine identifiers, used as the Sync "next state" field to name the peer.
  typedef enum logic [1:0] {
    ENG_FETCH  = 2'd0,
    ENG_EXEC   = 2'd1,
    ENG_RESULT = 2'd2
  } eng_e;

  // Engine activity, as in the published timeline: wait, signal, run.
  typedef enum logic [1:0] {
    ES_IDLE   = 2'd0,
    ES_RUN    = 2'd1,
    ES_SIGNAL = 2'd2,
    ES_WAIT   = 2'd3
  } eng_state_e;

  // Fetch and Result instructions.
  // stage[0] selects the buffer of a Fetch: 0 activation, 1 weight.
  // buf_rw is 1 when the on-chip buffer is written (Fetch), 0 when read (Result).
  // ddr_range : buffer words per bank (Fetch) or beats per result row (Result).
  // ddr_offset: DDR distance in beats between banks (Fetch) or rows (Result).
  typedef struct packed {
    op_e          op;
    logic [33:0]  rsvd;
    logic [15:0]  buf_base;
    logic [2:0]   stage;
    logic         buf_rw;
    logic [31:0]  ddr_base;
    logic [23:0]  ddr_offset;
    logic [15:0]  ddr_range;
  } mem_instr_t;

  // Execute instruction: one pass over `chunks` buffer words.
  typedef struct packed {
    op_e          op;
    logic [69:0]  rsvd;
    logic [15:0]  lhs_addr;   // activation buffer start address
    logic [15:0]  rhs_addr;   // weight buffer start address
    logic [15:0]  chunks;     // number of buffer words to consume
    logic [4:0]   shift;      // bit significance i+j of the planes (LUT-core)
    logic         negate;     // subtract instead of add (sign plane)
    logic         clear;      // clear accumulators first
    logic         commit;     // copy accumulators to the result buffer at the end
  } exec_instr_t;

  // Sync instruction. cur_state: 1 signal (send a token), 0 wait (take one).
  // next_state: the peer engine. flag: value carried by the token.
  typedef struct packed {
    op_e          op;
    logic [119:0] rsvd;
    logic         cur_state;
    eng_e         next_state;
    logic [2:0]   flag;
  } sync_instr_t;

  // One layer as handed to the accelerator.
  typedef struct packed {
    logic         lut_en;      // LUT-core has filters in this layer
    logic         dsp_en;      // DSP-core has filters in this layer
    logic [3:0]   lut_ba;      // activation bits on the LUT-core (1..8)
    logic [3:0]   lut_bw;      // weight bits on the LUT-core (1..8)
    logic         a_signed;    // activation planes are two's complement
    logic         w_signed;    // LUT weight planes are two's complement
    logic [15:0]  lut_chunks;  // inner dimension / K
    logic [15:0]  dsp_chunks;  // inner dimension / 16
  } layer_desc_t;

  // Per-core programme for the instruction generator (from the address generator).
  typedef struct packed {
    logic [3:0]   ba;
    logic [3:0]   bw;
    logic         a_signed;
    logic         w_signed;
    logic [15:0]  chunks;
    logic [15:0]  a_words;          // buffer words per bank per activation plane
    logic [15:0]  w_words;          // buffer words per bank per weight plane
    logic [31:0]  act_base;
    logic [31:0]  act_plane_stride;
    logic [23:0]  act_bank_stride;
    logic [31:0]  w_base;
    logic [31:0]  w_plane_stride;
    logic [23:0]  w_bank_stride;
    logic [31:0]  res_base;
    logic [23:0]  res_row_stride;
    logic [15:0]  res_beats;
  } gen_cfg_t;

endpackage
