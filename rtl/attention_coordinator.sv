// attention_coordinator -- base-die sequencer for PIM attention.
//
// Runs the two decode-step attention phases over the compute-layer banks
// without any cross-bank reduction:
//   * SCORE  : the host first broadcasts q (OP_Q_WRITE, D elements, one per
//              cycle, written to every bank's q registers at once). OP_SCORE
//              with len = L starts all banks; each bank computes its
//              ceil(L/B) token-major dot products. When no bank is busy the
//              coordinator gathers s_n for n = 0..L-1 from bank n mod B,
//              result register n div B, one per cycle, and returns them in
//              order: S is the plain concatenation.
//   * CONTEXT: OP_CONTEXT with len = L starts all banks in context mode; the
//              host then sends L OP_A_DATA elements, each broadcast to all
//              banks once every bank signals a_ready. After the last one the
//              coordinator gathers o_j for j = 0..D-1 from bank j mod B,
//              register j div B.
// Softmax between the phases is left to the host, which receives S.
//
// Timing: q broadcast 1 cycle per element; SCORE takes ceil(L/B)*D cycles
// of compute plus 2 cycles of start/finish, then L gather cycles at one score
// per cycle when rsp_ready stays high. CONTEXT consumes one a_n per cycle when
// each bank owns at most one Value column (B >= D). Which ops it owns and the
// gather order follow the paper; command encoding and handshakes are this
// design's own (valid/ready on both sides).
module attention_coordinator
  import ts_fp16_pkg::*;
  import ts_pkg::*;
#(
  parameter int D     = ts_pkg::D_HEAD,
  parameter int B     = ts_pkg::B_PIM,
  parameter int L_MAX = ts_pkg::L_MAX,
  localparam int TW   = $clog2(L_MAX + 1),
  localparam int DW   = (D > 1) ? $clog2(D) : 1,
  localparam int BW   = (B > 1) ? $clog2(B) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // host side
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  host_op_e      cmd_op,
  input  logic [15:0]   cmd_idx,
  input  fp16_t         cmd_data,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output host_rsp_t     rsp,
  output logic          active,       // an attention operation is in flight
  // bank side
  output logic          q_we,
  output logic [DW-1:0] q_idx,
  output fp16_t         q_data,
  output logic          op_start,
  output logic          op_ctx,
  output logic [TW-1:0] op_len,
  output logic          a_valid,
  output logic          a_take,
  output fp16_t         a_data,
  output logic [TW-1:0] res_idx,
  input  logic [B-1:0]  bank_busy,
  input  logic [B-1:0]  bank_a_ready,
  input  fp16_t         bank_res [B]
);

  typedef enum logic [2:0] {C_IDLE, C_START, C_WAIT, C_STREAM, C_GATHER} cstate_e;
  cstate_e       st;
  logic          ctx;        // current op is CONTEXT
  logic [TW-1:0] len, cnt;   // length, element counter
  logic [BW-1:0] gbank;      // gather bank = cnt mod B
  logic [TW-1:0] gidx;       // gather index = cnt div B

  logic is_q, is_start;
  always_comb begin
    is_q     = (cmd_op == OP_Q_WRITE);
    is_start = (cmd_op == OP_SCORE) || (cmd_op == OP_CONTEXT);
  end

  // q broadcast is combinational from the command
  assign q_we    = (st == C_IDLE) && cmd_valid && is_q;
  assign q_idx   = cmd_idx[DW-1:0];
  assign q_data  = cmd_data;
  assign op_start = (st == C_START);
  assign op_ctx   = ctx;
  assign op_len   = len;
  assign a_valid  = (st == C_STREAM) && cmd_valid && (cmd_op == OP_A_DATA);
  assign a_take   = a_valid && (&bank_a_ready);
  assign a_data   = cmd_data;
  assign res_idx  = gidx;
  assign active   = (st != C_IDLE);

  always_comb begin
    cmd_ready = 1'b0;
    case (st)
      C_IDLE:   cmd_ready = is_q || is_start;
      C_STREAM: cmd_ready = (cmd_op == OP_A_DATA) && (&bank_a_ready);
      default:  cmd_ready = 1'b0;
    endcase
  end

  assign rsp_valid = (st == C_GATHER);
  always_comb begin
    rsp.kind = ctx ? RSP_OUT : RSP_SCORE;
    rsp.idx  = 16'(cnt);
    rsp.data = {48'd0, bank_res[gbank]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= C_IDLE;
      ctx   <= 1'b0;
      len   <= '0;
      cnt   <= '0;
      gbank <= '0;
      gidx  <= '0;
    end else begin
      case (st)
        C_IDLE: if (cmd_valid && is_start) begin
          ctx <= (cmd_op == OP_CONTEXT);
          len <= TW'(cmd_idx);
          st  <= C_START;
        end
        C_START: begin
          cnt <= '0;
          st  <= ctx ? C_STREAM : C_WAIT;
        end
        C_STREAM: if (a_take) begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == len) st <= C_WAIT;
        end
        C_WAIT: if (bank_busy == '0) begin
          cnt   <= '0;
          gbank <= '0;
          gidx  <= '0;
          st    <= ((ctx ? TW'(D) : len) == 0) ? C_IDLE : C_GATHER;
        end
        C_GATHER: if (rsp_ready) begin
          cnt <= cnt + 1'b1;
          if (gbank == BW'(B - 1) || B == 1) begin
            gbank <= '0;
            gidx  <= gidx + 1'b1;
          end else begin
            gbank <= gbank + 1'b1;
          end
          if (cnt + 1'b1 == (ctx ? TW'(D) : len)) st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // a broadcast element is only taken while every bank is ready
  assert property (@(posedge clk) disable iff (!rst_n) a_take |-> a_valid && (&bank_a_ready));

endmodule
