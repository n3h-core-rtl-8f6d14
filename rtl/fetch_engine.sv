// fetch_engine: runs the Fetch instruction queue of one core.
// It takes one instruction at a time. A Fetch instruction starts the read DMA,
// which fills the activation buffers (stage[0] = 0) or the weight buffers
// (stage[0] = 1) of its core; the engine is in the run state until the DMA is
// done. A Sync instruction with cur_state = 1 pushes a token (its flag) into
// the queue towards the execute engine (signal state); with cur_state = 0 it
// waits for a token from the execute engine and consumes it (wait state).
// This is how Fetch and Execute are kept in step: the execute engine only
// starts on data that has been fetched, and the fetch engine only overwrites
// weights the execute engine has released. The engine roles and the token
// handshake follow the published instruction scheduling; the encodings are
// this design's. An instruction is accepted in the cycle it is seen in idle.
// Lint: unused instruction bits (reserved, buffer read/write, upper stage
// bits) and the DMA word-address bits above the buffer depth are reported;
// `rst_n` is also used by the assertions.
module fetch_engine
  import n3h_pkg::*;
#(
  parameter int unsigned BUFW    = 128,
  parameter int unsigned NB_A    = 8,
  parameter int unsigned NB_W    = 16,
  parameter int unsigned DEPTH_A = 1024,
  parameter int unsigned DEPTH_W = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       instr_valid,
  output logic                       instr_ready,
  input  logic [INSTR_W-1:0]         instr,
  output logic                       tok_out_valid,
  input  logic                       tok_out_ready,
  output logic [TOK_W-1:0]           tok_out_data,
  input  logic                       tok_in_valid,
  output logic                       tok_in_ready,
  output logic                       rd_req_valid,
  output logic [DDR_AW-1:0]          rd_req_addr,
  input  logic                       rd_req_ready,
  input  logic                       rd_resp_valid,
  input  logic [DDR_DW-1:0]          rd_resp_data,
  output logic                       act_wr_en,
  output logic [$clog2(NB_A)-1:0]    act_wr_bank,
  output logic [$clog2(DEPTH_A)-1:0] act_wr_addr,
  output logic                       w_wr_en,
  output logic [$clog2(NB_W)-1:0]    w_wr_bank,
  output logic [$clog2(DEPTH_W)-1:0] w_wr_addr,
  output logic [BUFW-1:0]            wr_data,
  output eng_state_e                 state
);
  localparam int unsigned NBMAX = (NB_A > NB_W) ? NB_A : NB_W;

  mem_instr_t  mi;
  sync_instr_t si;
  logic        take, dma_start, dma_busy, dma_done, target_w;
  logic [TOK_W-1:0] flag_q;
  logic        dwr_en;
  logic [$clog2(NBMAX)-1:0] dwr_bank;
  logic [15:0] dwr_addr;

  assign mi          = mem_instr_t'(instr);
  assign si          = sync_instr_t'(instr);
  assign instr_ready = (state == ES_IDLE);
  assign take        = instr_valid && instr_ready;
  assign dma_start   = take && (mi.op == OP_FETCH);

  assign tok_out_valid = (state == ES_SIGNAL);
  assign tok_out_data  = flag_q;
  assign tok_in_ready  = (state == ES_WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ES_IDLE;
      target_w <= 1'b0;
      flag_q   <= '0;
    end else begin
      case (state)
        ES_IDLE: if (take) begin
          if (mi.op == OP_FETCH) begin
            target_w <= mi.stage[0];
            state    <= ES_RUN;
          end else if (si.op == OP_SYNC) begin
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

  dma_rd #(.BUFW(BUFW), .NBMAX(NBMAX)) u_dma (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (dma_start),
    .ddr_base     (mi.ddr_base),
    .bank_stride  (mi.ddr_offset),
    .words        (mi.ddr_range),
    .nbanks       (mi.stage[0] ? ($clog2(NBMAX+1))'(NB_W) : ($clog2(NBMAX+1))'(NB_A)),
    .buf_base     (mi.buf_base),
    .busy         (dma_busy),
    .done         (dma_done),
    .rd_req_valid (rd_req_valid),
    .rd_req_addr  (rd_req_addr),
    .rd_req_ready (rd_req_ready),
    .rd_resp_valid(rd_resp_valid),
    .rd_resp_data (rd_resp_data),
    .wr_en        (dwr_en),
    .wr_bank      (dwr_bank),
    .wr_addr      (dwr_addr),
    .wr_data      (wr_data)
  );

  assign act_wr_en   = dwr_en && !target_w;
  assign w_wr_en     = dwr_en &&  target_w;
  assign act_wr_bank = $clog2(NB_A)'(dwr_bank);
  assign w_wr_bank   = $clog2(NB_W)'(dwr_bank);
  assign act_wr_addr = $clog2(DEPTH_A)'(dwr_addr);
  assign w_wr_addr   = $clog2(DEPTH_W)'(dwr_addr);

  a_known_op: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (mi.op == OP_FETCH || mi.op == OP_SYNC));
  a_sync_peer: assert property (@(posedge clk) disable iff (!rst_n)
    (take && si.op == OP_SYNC) |-> si.next_state == ENG_EXEC);
  a_dma_idle: assert property (@(posedge clk) disable iff (!rst_n)
    dma_start |-> !dma_busy);
endmodule
