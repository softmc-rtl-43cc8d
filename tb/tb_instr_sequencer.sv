// tb_instr_sequencer: self-checking test of instr_sequencer.
//
// The testbench plays the instruction buffer (a queue with a first-word-
// fall-through head) and records every command the sequencer drives, with
// the cycle it appeared in. Expected commands and cycle distances are worked
// out from the program alone: consecutive command instructions are 1 cycle
// apart, "WAIT n" between two commands makes them max(n,2) cycles apart.
// CKE instructions take one cycle and set the cke output. Also checked: no start while `hold` is high, the done pulse after END,
// busy, and the underrun flag when the program runs dry before END.
module tb_instr_sequencer;
  import softmc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic prog_ready = 0, hold = 0, head_valid, pop, busy, done, underrun, clear_err = 0, cke;
  bit exp_cke = 1;
  instr_t head_instr;
  ddr_req_t cmd;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  typedef struct { int unsigned t; ddr_req_t c; } ev_t;
  ev_t seen[$];
  int done_cnt = 0, cke_low = 0;

  instr_sequencer dut (.*);

  always #5 clk = ~clk;
  // Buffer model: array with read/write pointers (first-word-fall-through).
  instr_t      pmem [4096];
  int unsigned rp = 0, wp = 0;
  assign head_valid = (rp != wp);
  assign head_instr = pmem[rp % 4096];

  task automatic load(input instr_t q[$]);
    foreach (q[k]) begin pmem[wp % 4096] = q[k]; wp++; end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (pop) rp <= rp + 1;
    if (cmd.cmd != CMD_NOP) seen.push_back('{cyc, cmd});
    if (done) done_cnt++;
    if (rst_n && !cke) cke_low++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic instr_t mk(input opcode_e op, input int unsigned a, input int unsigned n = 0);
    instr_t i = '0;
    i.op = op; i.bank = BANK_W'(a % 8); i.addr = ADDR_W'(a); i.pattern = 8'(a ^ 8'h5A);
    i.cycles = WAIT_W'(n);
    return i;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs one program and checks commands and spacing.
  task automatic run_prog(input instr_t p[$]);
    instr_t    exp_cmds[$];
    int        exp_gap[$];
    int        gap = 0;
    bit        first = 1;
    seen.delete();
    foreach (p[k]) begin
      // Each WAIT n occupies max(n-1,1) cycles; a command occupies one.
      if (p[k].op == OP_WAIT) gap += (p[k].cycles > 2) ? int'(p[k].cycles) - 1 : 1;
      // CKE takes one cycle and issues no command.
      else if (p[k].op == OP_CKE) begin gap += 1; exp_cke = p[k].pattern[0]; end
      else if (p[k].op != OP_END) begin
        exp_cmds.push_back(p[k]);
        exp_gap.push_back(first ? 0 : 1 + gap);
        first = 0; gap = 0;
      end
    end
    done_cnt = 0;
    load(p);
    prog_ready = 1;
    while (!busy) begin @(posedge clk); #1; end
    prog_ready = 0;
    while (done_cnt == 0) begin @(posedge clk); #1; end
    repeat (3) @(posedge clk); #1;
    check(!busy, "idle after END");
    check(done_cnt == 1, "one done pulse");
    check(cke == exp_cke, "cke holds the last CKE instruction's level");
    check(seen.size() == exp_cmds.size(), $sformatf("command count %0d exp %0d", seen.size(), exp_cmds.size()));
    foreach (exp_cmds[k]) if (k < seen.size()) begin
      check(seen[k].c.cmd == op_to_cmd(exp_cmds[k].op) && seen[k].c.bank == exp_cmds[k].bank &&
            seen[k].c.addr == exp_cmds[k].addr && seen[k].c.pattern == exp_cmds[k].pattern,
            $sformatf("command %0d content", k));
      if (k > 0)
        check(int'(seen[k].t - seen[k-1].t) == exp_gap[k],
              $sformatf("command %0d spacing %0d exp %0d", k, seen[k].t - seen[k-1].t, exp_gap[k]));
    end
  endtask

  instr_t p[$];
  int unsigned o;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(!busy && !underrun && cmd.cmd == CMD_NOP && cke, "idle after reset, cke high");

    // spacing rule: consecutive commands 1 cycle apart, "WAIT n" between
    // two commands makes them max(n,2) apart, consecutive WAITs add up.
    // The write-a-row program of the SoftMC API: ACT, WAIT tRCD, WR/WAIT tBL..., WAIT tCL+tWR, PRE, WAIT tRP.
    p = {mk(OP_ACT, 5), mk(OP_WAIT, 0, 6)};
    for (int c = 0; c < 8; c++) begin p.push_back(mk(OP_WR, c * 8)); p.push_back(mk(OP_WAIT, 0, 4)); end
    p.push_back(mk(OP_WAIT, 0, 6 + 6)); p.push_back(mk(OP_PRE, 5)); p.push_back(mk(OP_WAIT, 0, 6));
    p.push_back(mk(OP_END, 0));
    run_prog(p);

    // Back-to-back commands, short and zero waits, REF/PREA.
    p = {mk(OP_CKE, 0), mk(OP_WAIT, 0, 5), mk(OP_CKE, 1), mk(OP_RAW, 7), mk(OP_PREA, 0), mk(OP_REF, 0), mk(OP_WAIT, 0, 1), mk(OP_ACT, 3), mk(OP_WAIT, 0, 0),
         mk(OP_RD, 16), mk(OP_WAIT, 0, 3), mk(OP_RD, 24), mk(OP_PRE, 3), mk(OP_END, 0)};
    run_prog(p);
    check(cke_low == 5, $sformatf("CKE low from the CKE 0 slot to the CKE 1 slot (5 cycles): %0d", cke_low));

    // Random programs.
    for (int r = 0; r < 20; r++) begin
      p.delete();
      for (int k = 0; k < 30; k++) begin
        o = $urandom_range(1, 9);
        p.push_back(mk(opcode_e'(o), $urandom_range(0, 65535), $urandom_range(0, 40)));
      end
      p.push_back(mk(OP_END, 0));
      run_prog(p);
    end

    // hold keeps a ready program from starting.
    seen.delete();
    load({mk(OP_ACT, 1), mk(OP_END, 0)});
    hold = 1; prog_ready = 1;
    repeat (10) @(posedge clk); #1;
    check(!busy && seen.size() == 0, "hold blocks start");
    hold = 0;
    @(posedge clk); #1;
    check(busy, "starts after hold released");
    prog_ready = 0;
    repeat (5) @(posedge clk); #1;
    check(seen.size() == 1 && !busy, "program ran after hold released");

    // A streamed program that runs dry: underrun.
    load({mk(OP_ACT, 2), mk(OP_RD, 8)});
    prog_ready = 1;
    repeat (8) @(posedge clk); #1;
    check(underrun && busy, "underrun flagged when buffer runs dry before END");
    prog_ready = 0;
    load({mk(OP_END, 0)});
    repeat (3) @(posedge clk); #1;
    check(!busy && underrun, "END ends program, flag sticky");
    clear_err = 1; @(posedge clk); #1; clear_err = 0;
    check(!underrun, "clear_err clears underrun");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
