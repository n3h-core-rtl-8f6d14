// result_engine: runs the Result instruction queue of one core.
// A Result instruction starts the write DMA, which copies the core's result
// buffer to DDR (base, row offset and beats per row from the instruction);
// the engine is in the run state until the DMA is done. Sync instructions
// signal or wait on the token queues to/from the execute engine: the result
// engine waits until the execute engine has committed a tile, and signals it
// back once the tile is in DDR. Roles follow the published scheduling; the
// encodings are this design's. An instruction is accepted when seen in idle.
// Lint: the buffer-side fields of a Result word are not needed (the whole
// tile is written) and are reported unused; `rst_n` is also used by the
// assertions.
module result_engine
  import n3h_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      instr_valid,
  output logic                      instr_ready,
  input  logic [INSTR_W-1:0]        instr,
  output logic                      tok_out_valid,
  input  logic                      tok_out_ready,
  output logic [TOK_W-1:0]          tok_out_data,
  input  logic                      tok_in_valid,
  output logic                      tok_in_ready,
  output logic                      rb_rd_en,
  output logic [$clog2(ROWS)-1:0]   rb_rd_row,
  output logic [$clog2(COLS/2)-1:0] rb_rd_beat,
  input  logic [DDR_DW-1:0]         rb_rd_data,
  output logic                      wr_valid,
  output logic [DDR_AW-1:0]         wr_addr,
  output logic [DDR_DW-1:0]         wr_data,
  input  logic                      wr_ready,
  output eng_state_e                state
);
  mem_instr_t  mi;
  sync_instr_t si;
  logic        take, dma_start, dma_busy, dma_done;
  logic [TOK_W-1:0] flag_q;

  assign mi          = mem_instr_t'(instr);
  assign si          = sync_instr_t'(instr);
  assign instr_ready = (state == ES_IDLE);
  assign take        = instr_valid && instr_ready;
  assign dma_start   = take && (mi.op == OP_RESULT);

  assign tok_out_valid = (state == ES_SIGNAL);
  assign tok_out_data  = flag_q;
  assign tok_in_ready  = (state == ES_WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ES_IDLE;
      flag_q <= '0;
    end else begin
      case (state)
        ES_IDLE: if (take) begin
          if (mi.op == OP_RESULT) state <= ES_RUN;
          else if (si.op == OP_SYNC) begin
            flag_q <= si.flag;
            state  <= si.cur_state ? ES_SIGNAL : ES_WAIT;
          end
        end
        ES_RUN:    if (dma_done)      state <= ES_IDLE;
        ES_SIGNAL: if (tok_out_ready) state <= ES_IDLE;
        ES_WAIT:   if (tok_in_valid)  state <= ES_IDLE;
        default:   state <= ES_IDLE;
      endcase
    end
  end

  dma_wr #(.ROWS(ROWS), .COLS(COLS)) u_dma (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (dma_start),
    .ddr_base   (mi.ddr_base),
    .row_stride (mi.ddr_offset),
    .beats      (mi.ddr_range),
    .busy       (dma_busy),
    .done       (dma_done),
    .rb_rd_en   (rb_rd_en),
    .rb_rd_row  (rb_rd_row),
    .rb_rd_beat (rb_rd_beat),
    .rb_rd_data (rb_rd_data),
    .wr_valid   (wr_valid),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .wr_ready   (wr_ready)
  );

  a_known_op: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (mi.op == OP_RESULT || si.op == OP_SYNC));
  a_sync_peer: assert property (@(posedge clk) disable iff (!rst_n)
    (take && si.op == OP_SYNC) |-> si.next_state == ENG_EXEC);
  a_dma_idle: assert property (@(posedge clk) disable iff (!rst_n)
    dma_start |-> !dma_busy);
endmodule
