// instr_fifo -- instruction FIFO in front of the controller.
//
// First-word-fall-through FIFO of instr_t words, DEPTH entries.  The host (or
// an on-chip instruction generator) pushes with a valid/ready handshake; the
// controller sees the head word on 'head' while 'head_valid' is high and
// removes it with 'pop'.  Simultaneous push and pop are allowed.  The paper
// names the FIFO; depth and handshake are this design's choice.
module instr_fifo
  import srl_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  output logic   push_ready,
  input  instr_t push_data,
  output logic   head_valid,
  output instr_t head,
  input  logic   pop
);
  localparam int AW = $clog2(DEPTH);

  instr_t          mem [DEPTH];
  logic [AW-1:0]   wp, rp;
  logic [AW:0]     cnt;
  logic            do_push, do_pop;

  assign push_ready = (cnt != (AW+1)'(DEPTH));
  assign head_valid = (cnt != '0);
  assign head       = mem[rp];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop && head_valid;

  always_ff @(posedge clk) if (do_push) mem[wp] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + AW'(1);
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + AW'(1);
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);
endmodule
