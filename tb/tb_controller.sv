// tb_controller -- test of the instruction-driven controller with behavioural
// stand-ins for the FIFO (a queue whose head is sometimes withheld), the NPU
// (done a random 1..6 cycles after its start) and the CRC unit (done 9
// cycles after its start).  Random programs of SCU, node and end
// instructions are run.  Checked: each SCU instruction produces exactly
// scu_chunks(stage, nst) cycles of scu_en with chunk numbers 0, 1, ... and
// the instruction's stage; each node instruction one npu_start and one upd
// (in the NPU's done cycle) with 'cur' holding the instruction; the end
// instruction one crc_start and dec_valid in the cycle after the CRC is done;
// stall is high exactly in running cycles without an instruction; the total
// cycle count equals the sum of all of these; chan_free falls at start and
// rises after the last chunk of a g-step at the root.
module tb_controller;
  import srl_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] n_root = 9;
  logic head_valid, pop, scu_en, npu_start, npu_done = 0, upd, init, crc_start, crc_done = 0;
  logic busy, stall, chan_free, dec_valid;
  instr_t head, cur;
  logic [3:0] rd_s;
  logic [1:0] rd_nst;
  logic [4:0] rd_c;
  instr_t q [$];
  bit hold = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  assign head_valid = (q.size() > 0) && !hold;
  assign head       = (q.size() > 0) ? q[0] : '0;

  controller dut (.clk(clk), .rst_n(rst_n), .start(start), .n_root(n_root), .head_valid(head_valid),
    .head(head), .pop(pop), .scu_en(scu_en), .rd_s(rd_s), .rd_nst(rd_nst), .rd_c(rd_c),
    .npu_start(npu_start), .npu_done(npu_done), .upd(upd), .cur(cur), .init(init),
    .crc_start(crc_start), .crc_done(crc_done), .busy(busy), .stall(stall),
    .chan_free(chan_free), .dec_valid(dec_valid));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural NPU and CRC
  int npu_cnt = -1, crc_cnt = -1;
  always @(posedge clk) begin
    npu_done <= 1'b0;
    crc_done <= 1'b0;
    if (npu_start) npu_cnt <= 1 + $urandom % 6;
    else if (npu_cnt > 1) npu_cnt <= npu_cnt - 1;
    else if (npu_cnt == 1) begin npu_done <= 1'b1; npu_cnt <= -1; end
    if (crc_start) crc_cnt <= 9;
    else if (crc_cnt > 1) crc_cnt <= crc_cnt - 1;
    else if (crc_cnt == 1) begin crc_done <= 1'b1; crc_cnt <= -1; end
  end

  // observed events
  int ev_scu_chunk = 0, ev_cycles = 0, ev_stall = 0, ev_npu = 0, ev_crc = 0, exp_stall = 0;
  int node_start_cyc, npu_lat_sum = 0;
  instr_t last_node;
  always @(posedge clk) if (rst_n) begin
    if (busy) ev_cycles++;
    if (stall) ev_stall++;
    if (busy && !head_valid && dut.state == 1) exp_stall++;
    if (npu_start) begin ev_npu++; last_node = head; node_start_cyc = ev_cycles; end
    if (upd) begin
      checks += 2;
      if (cur != last_node) failures++;
      if (!npu_done) failures++;
      npu_lat_sum += ev_cycles - node_start_cyc + 1;
    end
    if (crc_start) ev_crc++;
    if (scu_en) begin
      checks += 3;
      if (rd_c != 5'(ev_scu_chunk)) failures++;
      if (rd_s != head.stage || rd_nst != head.nst) failures++;
      if (head.op != OP_SCU) failures++;
      ev_scu_chunk = pop ? 0 : ev_scu_chunk + 1;
    end
    if (pop) void'(q.pop_front());
  end

  always @(negedge clk) hold = ($urandom % 8) == 0;

  initial begin
    #12 rst_n = 1;
    for (int prog = 0; prog < 40; prog++) begin
      int n_ins, exp_scu, n_nodes, t0, t1, chf_rise;
      bit root_g;
      n_ins = 5 + $urandom % 30;
      exp_scu = 0; n_nodes = 0; root_g = 0;
      ev_npu = 0; ev_crc = 0; ev_stall = 0; exp_stall = 0; npu_lat_sum = 0;
      for (int i = 0; i < n_ins; i++) begin
        instr_t ins;
        ins = '0;
        if ($urandom % 2) begin
          ins.op = OP_SCU;
          ins.nst = 2'(1 + $urandom % 2);
          ins.stage = 4'(ins.nst + $urandom % (10 - ins.nst));
          ins.fg = 2'($urandom);
          exp_scu += scu_chunks(int'(ins.stage), int'(ins.nst));
          if (ins.stage == 9 && ins.fg[0]) root_g = 1;
        end else begin
          ins.op = OP_NODE;
          ins.ntype = node_e'($urandom % 6);
          ins.stage = 4'($urandom % 6);
          ins.base = 11'($urandom % 512);
          n_nodes++;
        end
        q.push_back(ins);
      end
      begin
        instr_t e;
        e = '0;
        e.op = OP_END;
        q.push_back(e);
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (chan_free) failures++;
      ev_cycles = 1;
      chf_rise = 0;
      t0 = ev_cycles;
      while (!dec_valid) begin
        @(negedge clk);
        if (chan_free && !dec_valid) chf_rise = 1;
      end
      checks += 6;
      if (ev_npu != n_nodes) failures++;
      if (ev_crc != 1) failures++;
      if (ev_stall != exp_stall) failures++;
      // SCU chunks + node cycles + end instruction + CRC wait (9 cycles of the
      // stand-in plus the cycle in which its done is taken) + stalls
      if (ev_cycles - 1 != exp_scu + npu_lat_sum + 1 + 10 + ev_stall) begin
        failures++;
        $display("cycles %0d expected %0d", ev_cycles - 1, exp_scu + npu_lat_sum + 11 + ev_stall);
      end
      if (chf_rise != root_g) failures++;
      if (q.size() != 0) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
