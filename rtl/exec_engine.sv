// exec_engine: runs the Execute instruction queue of one core.
// An Execute instruction is handed to the computing core (LUT-core or
// DSP-core) with a one-cycle `core_start`; the engine is in the run state until
// the core reports `core_done`. A Sync instruction signals or waits on one of
// two token queues, chosen by its next_state field: towards/from the fetch
// engine (data fetched / weight buffer released) or towards/from the result
// engine (tile finished / result written). The roles follow the published
// instruction scheduling; encodings and handshakes are this design's. An
// instruction is accepted in the cycle it is seen in idle.
// Lint: only the peer and direction of a Sync word are decoded, so its other
// bits are reported unused; `rst_n` is also used by the assertions.
module exec_engine
  import n3h_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               instr_valid,
  output logic               instr_ready,
  input  logic [INSTR_W-1:0] instr,
  // tokens to / from the fetch engine
  output logic               tf_out_valid,
  input  logic               tf_out_ready,
  input  logic               tf_in_valid,
  output logic               tf_in_ready,
  // tokens to / from the result engine
  output logic               tr_out_valid,
  input  logic               tr_out_ready,
  input  logic               tr_in_valid,
  output logic               tr_in_ready,
  output logic [TOK_W-1:0]   tok_out_data,
  // computing core
  output logic               core_start,
  output exec_instr_t        core_instr,
  input  logic               core_done,
  output eng_state_e         state
);
  sync_instr_t si;
  logic        take, peer_result;
  logic [TOK_W-1:0] flag_q;

  assign si          = sync_instr_t'(instr);
  assign core_instr  = exec_instr_t'(instr);
  assign instr_ready = (state == ES_IDLE);
  assign take        = instr_valid && instr_ready;
  assign core_start  = take && (core_instr.op == OP_EXEC);

  assign tf_out_valid = (state == ES_SIGNAL) && !peer_result;
  assign tr_out_valid = (state == ES_SIGNAL) &&  peer_result;
  assign tf_in_ready  = (state == ES_WAIT)   && !peer_result;
  assign tr_in_ready  = (state == ES_WAIT)   &&  peer_result;
  assign tok_out_data = flag_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ES_IDLE;
      peer_result <= 1'b0;
      flag_q      <= '0;
    end else begin
      case (state)
        ES_IDLE: if (take) begin
          if (core_instr.op == OP_EXEC) state <= ES_RUN;
          else if (si.op == OP_SYNC) begin
            peer_result <= (si.next_state == ENG_RESULT);
            flag_q      <= si.flag;
            state       <= si.cur_state ? ES_SIGNAL : ES_WAIT;
          end
        end
        ES_RUN:    if (core_done) state <= ES_IDLE;
        ES_SIGNAL: if (peer_result ? tr_out_ready : tf_out_ready) state <= ES_IDLE;
        ES_WAIT:   if (peer_result ? tr_in_valid  : tf_in_valid)  state <= ES_IDLE;
        default:   state <= ES_IDLE;
      endcase
    end
  end

  a_known_op: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (core_instr.op == OP_EXEC || si.op == OP_SYNC));
  a_sync_peer: assert property (@(posedge clk) disable iff (!rst_n)
    (take && si.op == OP_SYNC) |-> si.next_state != ENG_EXEC);
endmodule
