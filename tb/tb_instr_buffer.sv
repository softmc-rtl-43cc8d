// tb_instr_buffer: self-checking test of instr_buffer.
//
// Pushes instruction words (with and without END) and checks against a
// reference queue kept in the testbench: FIFO order of the head word,
// prog_ready only once an END is stored (or the buffer is full), in_ready
// low when full, and prog_ready dropping again when the END is popped.
// Uses DEPTH = 8 to reach the full condition quickly.
module tb_instr_buffer;
  import softmc_pkg::*;
  localparam int unsigned DEPTH = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, head_valid, pop = 0, prog_ready;
  instr_t in_instr, head_instr;
  logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;
  instr_t model[$];

  instr_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic instr_t mk(input opcode_e op, input int n);
    instr_t i = '0;
    i.op = op; i.bank = BANK_W'(n); i.addr = ADDR_W'(n * 7); i.cycles = WAIT_W'(n);
    return i;
  endfunction

  // All stimulus changes 1 time unit after a rising edge.
  task automatic push(input instr_t i);
    in_valid = 1; in_instr = i;
    while (!in_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    model.push_back(i);
    in_valid = 0;
  endtask

  task automatic pop_check();
    instr_t exp;
    check(head_valid, "head valid when not empty");
    exp = model.pop_front();
    check(head_instr == exp, $sformatf("head order: got %h exp %h", head_instr, exp));
    pop = 1; @(posedge clk); #1; pop = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nend;
  opcode_e op;
  initial begin
    in_instr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(!head_valid && !prog_ready && in_ready, "empty after reset");
    // A program without END: not ready to run.
    push(mk(OP_ACT, 1)); push(mk(OP_WAIT, 6)); push(mk(OP_WR, 2));
    check(!prog_ready, "no END stored -> not ready");
    check(level == 4'd3, "level counts words");
    push(mk(OP_END, 0));
    check(prog_ready, "END stored -> ready");
    // Drain, checking order; ready falls once the END is popped.
    repeat (3) begin pop_check(); check(prog_ready, "ready until END popped"); end
    pop_check();
    check(!prog_ready && !head_valid, "END popped -> not ready, empty");
    // Fill to full without END: streaming start.
    for (int k = 0; k < DEPTH; k++) push(mk(OP_RD, k));
    check(!in_ready, "full -> in_ready low");
    check(prog_ready, "full buffer -> ready (streamed program)");
    // Extra push attempt is not accepted while full.
    in_valid = 1; in_instr = mk(OP_PRE, 99);
    @(posedge clk); #1; check(level == 4'(DEPTH), "no push when full");
    pop_check();
    // The held word enters once space appears.
    in_valid = 1;
    @(posedge clk); #1 in_valid = 0;
    model.push_back(mk(OP_PRE, 99));
    check(level == 4'(DEPTH), "held word accepted after pop");
    // Random traffic with two ENDs.
    while (model.size() > 0) pop_check();
    nend = 0;
    for (int k = 0; k < 40; k++) begin
      op = opcode_e'($urandom_range(0, 7));
      if (model.size() >= DEPTH - 1) begin
        while (model.size() > 0) pop_check();
        nend = 0;
      end
      push(mk(op, k));
      if (op == OP_END) nend++;
      check(prog_ready == (nend > 0 || model.size() == DEPTH), "prog_ready tracks END count");
    end
    while (model.size() > 0) pop_check();
    check(!prog_ready, "drained -> not ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
