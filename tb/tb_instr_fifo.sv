// tb_instr_fifo -- random push/pop test of the first-word-fall-through
// instruction FIFO (depth reduced to 8) against a queue model: the head shows
// the oldest entry, push_ready is low exactly when the FIFO is full, and
// head_valid is low exactly when it is empty.
module tb_instr_fifo;
  import srl_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, push_valid = 0, push_ready, head_valid, pop = 0;
  instr_t push_data, head;
  instr_t q [$];
  int checks = 0, failures = 0, fulls = 0;
  always #5 clk = ~clk;

  instr_fifo #(.DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .push_valid(push_valid), .push_ready(push_ready),
    .push_data(push_data), .head_valid(head_valid), .head(head), .pop(pop));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_data = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      int bias;
      @(negedge clk);
      bias = (it / 500) % 2;    // alternate filling and draining phases
      checks += 2;
      if (push_ready != (q.size() < D)) failures++;
      if (head_valid != (q.size() > 0)) failures++;
      if (q.size() > 0) begin
        checks++;
        if (head != q[0]) failures++;
      end
      if (q.size() == D) fulls++;
      push_valid = ($urandom % 4) < (bias ? 3 : 1);
      push_data  = instr_t'($urandom);
      pop        = head_valid && (($urandom % 4) < (bias ? 1 : 3));
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push_valid && push_ready) q.push_back(push_data);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
