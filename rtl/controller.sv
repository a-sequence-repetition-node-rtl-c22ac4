// controller -- instruction-driven decoder controller.
//
// Executes the instruction list of one codeword from the instruction FIFO and
// activates the SCU, the NPU, the PSU (with Us and pointer memories) and the
// CRC unit, following the schedule SCU ... NPU, PSU, SCU ... of the paper:
//   OP_SCU   one cycle per chunk (scu_chunks(stage, nst) cycles); the SCU
//            result is written into the internal LLR memory every cycle.
//   OP_NODE  starts the NPU in the cycle the instruction is at the head of
//            the FIFO; in the cycle the NPU reports 'done' the PSUM, Us,
//            pointer and PM memories are updated (the "+1 CC" per node).
//   OP_END   starts the CRC unit; when it is done 'dec_valid' is pulsed.
// An empty FIFO stalls the decoder (counted by 'stall').  'start' (with the
// root stage n_root) initialises the list and clears the PSUM and Us
// memories.  'chan_free' rises once the g-function has been applied at the
// root: from then on the channel LLR memory may be overwritten with the next
// codeword, as the paper allows.  Instruction format and encoding are this
// design's choice; the paper only says that instructions carry the operation
// and the size and type of a node.
module controller
  import srl_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [3:0] n_root,
  // instruction FIFO
  input  logic       head_valid,
  input  instr_t     head,
  output logic       pop,
  // SCU step
  output logic       scu_en,
  output logic [3:0] rd_s,
  output logic [1:0] rd_nst,
  output logic [4:0] rd_c,
  // NPU and memory update
  output logic       npu_start,
  input  logic       npu_done,
  output logic       upd,
  output instr_t     cur,
  // codeword control
  output logic       init,
  output logic       crc_start,
  input  logic       crc_done,
  output logic       busy,
  output logic       stall,
  output logic       chan_free,
  output logic       dec_valid
);
  typedef enum logic [2:0] {C_IDLE, C_RUN, C_NODE, C_CRC} cstate_e;
  cstate_e state;
  logic [4:0] chunk;
  logic       last_chunk;

  assign last_chunk = (int'(chunk) == scu_chunks(int'(head.stage), int'(head.nst)) - 1);

  always_comb begin
    pop       = 1'b0;
    scu_en    = 1'b0;
    npu_start = 1'b0;
    crc_start = 1'b0;
    stall     = 1'b0;
    rd_s      = (state == C_RUN) ? head.stage : cur.stage;
    rd_nst    = head.nst;
    rd_c      = chunk;
    init      = (state == C_IDLE) && start;
    upd       = (state == C_NODE) && npu_done;
    if (state == C_RUN) begin
      if (!head_valid) stall = 1'b1;
      else begin
        case (head.op)
          OP_SCU: begin
            scu_en = 1'b1;
            pop    = last_chunk;
          end
          OP_NODE: begin
            npu_start = 1'b1;
            pop       = 1'b1;
          end
          default: begin
            crc_start = 1'b1;
            pop       = 1'b1;
          end
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      chunk     <= '0;
      cur       <= '0;
      chan_free <= 1'b1;
      dec_valid <= 1'b0;
    end else begin
      dec_valid <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          state     <= C_RUN;
          chunk     <= '0;
          chan_free <= 1'b0;
        end
        C_RUN: if (head_valid) begin
          case (head.op)
            OP_SCU: begin
              chunk <= last_chunk ? '0 : chunk + 5'd1;
              if (last_chunk && head.stage == n_root && head.fg[0]) chan_free <= 1'b1;
            end
            OP_NODE: begin
              cur   <= head;
              state <= C_NODE;
            end
            default: state <= C_CRC;
          endcase
        end
        C_NODE: if (npu_done) state <= C_RUN;
        C_CRC: if (crc_done) begin
          state     <= C_IDLE;
          dec_valid <= 1'b1;
          chan_free <= 1'b1;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);
endmodule
