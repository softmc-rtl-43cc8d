// tb_softmc_top: end-to-end test of softmc_top at its default parameters,
// with a behavioural DDR3 module (ddr3_model) on the PHY side.
//
// The testbench acts as the host: it builds programs the way the SoftMC
// programming interface does (activate, wait tRCD, write/read each column,
// wait, precharge, end), streams them into the controller, drains the
// returned read data and counts erroneous bytes against the pattern it
// wrote. It runs:
//   1. write a row and read it back with standard timing (checks the issued
//      command spacing on the DDR3 pins and the data);
//   2. the tRCD test: write, then read each column with tRCD = 3..6 cycles;
//   3. the tRAS test: write a row, ACTIVATE-PRECHARGE with tRAS = 2..14,
//      then read the row with standard timing;
//   4. the retention test with auto-refresh off (row left idle longer and
//      shorter than the model's retention time) and with auto-refresh on;
//   5. refresh postponed during a long program and served afterwards,
//      a software-issued refresh, a read-data overflow and an instruction
//      underrun of a streamed program;
//   6. mode-register set and ZQ calibration through RAW instructions, and
//      power-down through CKE instructions (auto-refresh held off meanwhile).
// Each mechanism is counted; one that never happened is a failure.
// Standard DDR3-800 timing in command-clock cycles: tRCD = tRP = tCL = 6,
// tRAS = 14 (the defaults quoted for the tested modules), tBL = 4, tWR = 6.
module tb_softmc_top;
  import softmc_pkg::*;

  localparam int TRCD = 6, TRAS = 14, TRP = 6, TCL = 6, TWR = 6, TBL = 4, TRFC = 40;
  localparam int RB_DEPTH = 512;
  localparam longint unsigned RETENTION = 3000;
  localparam int unsigned RET = 3000;

  logic clk = 0, rst_n = 0;
  logic host_instr_valid = 0, host_instr_ready;
  logic [INSTR_W-1:0] host_instr = '0;
  logic host_rd_valid, host_rd_ready = 1;
  logic [BURST_W-1:0] host_rd_data;
  logic cfg_refresh_en = 0, err_clear = 0;
  logic [31:0] cfg_trefi = 32'd500;
  logic [7:0]  cfg_trp = 8'(TRP);
  logic [15:0] cfg_trfc = 16'(TRFC);
  logic prog_busy, prog_done, refresh_busy, err_underrun, err_overflow;
  logic [10:0] instr_level;
  logic [9:0]  rb_level;
  ddr_pins_t ddr_cmd;
  logic ddr_cke, ddr_wr_en, phy_rd_valid;
  logic [BURST_W-1:0] ddr_wdata, phy_rd_data;
  int violations, refreshes;

  softmc_top dut (.*);

  ddr3_model #(.CL(TCL), .TRCD_MIN(4), .TRAS_MIN(5), .RETENTION(RETENTION)) u_dram (
    .clk, .rst_n, .cmd(ddr_cmd), .cke(ddr_cke), .wr_en(ddr_wr_en), .wdata(ddr_wdata),
    .rd_valid(phy_rd_valid), .rd_data(phy_rd_data), .violations, .refreshes
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- monitor
  typedef enum {K_NOP, K_ACT, K_RD, K_WR, K_PRE, K_PREA, K_REF, K_MRS, K_ZQ} kind_e;
  typedef struct { longint unsigned t; kind_e k; int ba; int a; bit in_prog; } ev_t;
  ev_t ev[$];
  longint unsigned cyc = 0;
  int n_wait_cycles = 0, n_prog_done = 0, n_hold = 0, n_wdata_bad = 0, n_cke_low = 0, n_ref_cke_low = 0;

  function automatic kind_e decode(input ddr_pins_t p);
    if (p.cs_n) return K_NOP;
    unique case ({p.ras_n, p.cas_n, p.we_n})
      3'b011: return K_ACT;
      3'b101: return K_RD;
      3'b100: return K_WR;
      3'b010: return p.a[10] ? K_PREA : K_PRE;
      3'b001: return K_REF;
      3'b000: return K_MRS;
      3'b110: return K_ZQ;
      default: return K_NOP;
    endcase
  endfunction

  always @(posedge clk) begin
    kind_e k;
    cyc <= cyc + 1;
    if (rst_n) begin
      k = decode(ddr_cmd);
      if (k != K_NOP) ev.push_back('{cyc, k, int'(ddr_cmd.ba), int'(ddr_cmd.a), prog_busy});
      if (k == K_NOP && prog_busy) n_wait_cycles++;
      if (prog_done) n_prog_done++;
      if (!ddr_cke) n_cke_low++;
      if (!ddr_cke && k == K_REF) n_ref_cke_low++;
      if (dut.u_ibuf.prog_ready && !prog_busy && (refresh_busy || dut.ref_want)) n_hold++;
      if (k == K_WR && ddr_wdata != {(BURST_W/8){cur_pattern}}) n_wdata_bad++;
    end
  end

  // ------------------------------------------------------------- host side
  logic [BURST_W-1:0] rx[$];
  logic [7:0] cur_pattern = 8'h00;
  always @(posedge clk) if (rst_n && host_rd_valid && host_rd_ready) rx.push_back(host_rd_data);

  instr_t prog[$];
  function automatic instr_t I(input opcode_e op, input int bank = 0, input int addr = 0,
                               input int n = 0, input logic [7:0] pat = 8'h00);
    instr_t i = '0;
    i.op = op; i.bank = BANK_W'(bank); i.addr = ADDR_W'(addr); i.cycles = WAIT_W'(n); i.pattern = pat;
    return i;
  endfunction

  // Stimulus changes 1 time unit after a rising edge.
  task automatic send(input instr_t i);
    host_instr_valid = 1; host_instr = i;
    while (!host_instr_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    host_instr_valid = 0;
  endtask

  // Send prog[] and wait for it to finish.
  task automatic execute();
    int d0 = n_prog_done;
    foreach (prog[k]) send(prog[k]);
    prog.delete();
    while (n_prog_done == d0) begin @(posedge clk); #1; end
    repeat (TCL + 4) @(posedge clk); #1;
  endtask

  task automatic gen_write_row(input int bank, input int row, input int ncols, input logic [7:0] pat);
    cur_pattern = pat;
    prog.push_back(I(OP_ACT, bank, row));
    prog.push_back(I(OP_WAIT, 0, 0, TRCD));
    for (int c = 0; c < ncols; c++) begin
      prog.push_back(I(OP_WR, bank, c * 8, 0, pat));
      prog.push_back(I(OP_WAIT, 0, 0, TBL));
    end
    prog.push_back(I(OP_WAIT, 0, 0, TCL + TWR));
    prog.push_back(I(OP_PRE, bank));
    prog.push_back(I(OP_WAIT, 0, 0, TRP));
  endtask

  task automatic gen_read_row(input int bank, input int row, input int ncols, input int trcd = TRCD);
    prog.push_back(I(OP_ACT, bank, row));
    prog.push_back(I(OP_WAIT, 0, 0, trcd));
    for (int c = 0; c < ncols; c++) begin
      prog.push_back(I(OP_RD, bank, c * 8));
      prog.push_back(I(OP_WAIT, 0, 0, TBL));
    end
    prog.push_back(I(OP_WAIT, 0, 0, TRAS));
    prog.push_back(I(OP_PRE, bank));
    prog.push_back(I(OP_WAIT, 0, 0, TRP));
  endtask

  // Erroneous bytes in the received bursts, against the pattern.
  function automatic int count_err_bytes(input logic [7:0] pat);
    int n = 0;
    foreach (rx[k]) for (int b = 0; b < BURST_W / 8; b++) if (rx[k][b*8 +: 8] != pat) n++;
    return n;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Counters for the mechanisms.
  int m_trcd_err = 0, m_tras_err = 0, m_ret_err = 0, m_auto_ref = 0, m_postponed = 0,
      m_sw_ref = 0, m_overflow = 0, m_underrun = 0, m_mode_switch = 0, m_raw = 0;
  int e, i0, nref, burst, tras;
  int unsigned idle;
  longint unsigned t_end;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // ---- 1. write a row, read it back, check pin-level spacing
    ev.delete();
    gen_write_row(1, 100, 16, 8'hAA);
    prog.push_back(I(OP_END));
    execute();
    check(ev.size() == 18, $sformatf("write program: %0d commands, expected 18", ev.size()));
    if (ev.size() == 18) begin
      check(ev[0].k == K_ACT && ev[0].ba == 1 && ev[0].a == 100, "ACT bank 1 row 100");
      check(ev[1].k == K_WR && int'(ev[1].t - ev[0].t) == TRCD, "ACT->WR = tRCD");
      for (int k = 2; k <= 16; k++) check(ev[k].k == K_WR && int'(ev[k].t - ev[k-1].t) == TBL && ev[k].a == (k-1)*8, "WR->WR = tBL, next column");
      check(ev[17].k == K_PRE && int'(ev[17].t - ev[16].t) == TBL + TCL + TWR - 1, "last WR -> PRE");
    end
    check(n_wdata_bad == 0, "write data is the pattern");
    rx.delete();
    gen_read_row(1, 100, 16);
    prog.push_back(I(OP_END));
    execute();
    check(rx.size() == 16, $sformatf("16 bursts returned, got %0d", rx.size()));
    check(count_err_bytes(8'hAA) == 0, "row reads back intact");

    // ---- 2. tRCD test: per column ACT-WR-PRE with defaults, then ACT-RD(custom tRCD)-PRE
    for (int trcd = 3; trcd <= 6; trcd++) begin
      gen_write_row(2, 7, 8, 8'h55);
      prog.push_back(I(OP_END));
      execute();
      rx.delete();
      for (int c = 0; c < 8; c++) begin
        prog.push_back(I(OP_ACT, 2, 7));
        prog.push_back(I(OP_WAIT, 0, 0, trcd));
        prog.push_back(I(OP_RD, 2, c * 8));
        prog.push_back(I(OP_WAIT, 0, 0, TRAS - trcd));
        prog.push_back(I(OP_PRE, 2));
        prog.push_back(I(OP_WAIT, 0, 0, TRP));
      end
      prog.push_back(I(OP_END));
      execute();
      e = count_err_bytes(8'h55);
      check(rx.size() == 8, "tRCD test: 8 bursts");
      if (trcd < 4) begin check(e > 0, $sformatf("tRCD=%0d shows errors", trcd)); if (e > 0) m_trcd_err++; end
      else check(e == 0, $sformatf("tRCD=%0d error-free, got %0d", trcd, e));
    end

    // ---- 3. tRAS test: write row, ACT-PRE with custom tRAS, read with defaults
    for (int j = 0; j < 5; j++) begin
      tras = (j == 0) ? 2 : (j == 1) ? 4 : (j == 2) ? 5 : (j == 3) ? 10 : 14;
      gen_write_row(3, 9, 8, 8'h00);
      prog.push_back(I(OP_ACT, 3, 9));
      prog.push_back(I(OP_WAIT, 0, 0, tras));
      prog.push_back(I(OP_PRE, 3));
      prog.push_back(I(OP_WAIT, 0, 0, TRP));
      prog.push_back(I(OP_END));
      execute();
      rx.delete();
      gen_read_row(3, 9, 8);
      prog.push_back(I(OP_END));
      execute();
      e = count_err_bytes(8'h00);
      if (tras < 5) begin check(e > 0, $sformatf("tRAS=%0d shows errors", tras)); if (e > 0) m_tras_err++; end
      else check(e == 0, $sformatf("tRAS=%0d error-free, got %0d", tras, e));
    end

    // ---- 4. retention test, auto-refresh off: wait (software clock) then read
    for (int j = 0; j < 2; j++) begin
      idle = (j == 0) ? RET / 2 : 2 * RET;
      gen_write_row(4, 11, 8, 8'hFF);
      prog.push_back(I(OP_END));
      execute();
      repeat (idle) @(posedge clk); #1;
      rx.delete();
      gen_read_row(4, 11, 8);
      prog.push_back(I(OP_END));
      execute();
      e = count_err_bytes(8'hFF);
      if (j == 0) check(e == 0, "retention: short idle error-free");
      else begin check(e > 0, "retention: idle beyond retention time loses data"); if (e > 0) m_ret_err++; end
    end
    // Same with auto-refresh on (tREFI = 500 cycles < retention time).
    cfg_refresh_en = 1; m_mode_switch++;
    nref = refreshes; i0 = ev.size();
    gen_write_row(4, 12, 8, 8'hFF);
    prog.push_back(I(OP_END));
    execute();
    repeat (2 * RET) @(posedge clk); #1;
    rx.delete();
    gen_read_row(4, 12, 8);
    prog.push_back(I(OP_END));
    execute();
    check(count_err_bytes(8'hFF) == 0, "retention with auto-refresh: no errors");
    m_auto_ref = refreshes - nref;
    check(m_auto_ref >= int'(2 * RET / 500) - 1, $sformatf("auto-refresh count %0d", m_auto_ref));
    for (int k = i0; k < ev.size(); k++) if (ev[k].k == K_REF && k > 0 && ev[k-1].k == K_PREA)
      check(int'(ev[k].t - ev[k-1].t) == TRP, "PREA -> REF = tRP");
    check(violations == 0, "no protocol violation from auto-refresh");

    // ---- 5a. refresh postponed during a long program, served after it
    i0 = ev.size();
    prog.push_back(I(OP_ACT, 5, 1));
    prog.push_back(I(OP_WAIT, 0, 0, 3 * 500 + 20));
    prog.push_back(I(OP_PRE, 5));
    prog.push_back(I(OP_END));
    execute();
    // A short program sent while the postponed refreshes run must wait.
    prog.push_back(I(OP_ACT, 5, 2));
    prog.push_back(I(OP_WAIT, 0, 0, TRAS));
    prog.push_back(I(OP_PRE, 5));
    prog.push_back(I(OP_END));
    execute();
    repeat (4 * TRFC) @(posedge clk); #1;
    burst = 0;
    for (int k = i0; k < ev.size(); k++) begin
      if (ev[k].k == K_REF) check(!ev[k].in_prog, "no refresh inside a program");
      if (ev[k].k == K_REF && k > 0 && ev[k-1].k == K_REF) begin
        check(int'(ev[k].t - ev[k-1].t) == TRFC, "postponed REF->REF = tRFC");
        burst++;
      end
    end
    check(burst >= 2, $sformatf("postponed refreshes served back-to-back (%0d)", burst));
    m_postponed = burst;
    check(n_hold > 0, "a ready program waited for refresh");
    cfg_refresh_en = 0; m_mode_switch++;
    repeat (TRFC + 10) @(posedge clk); #1;

    // ---- 5b. software-issued refresh
    nref = refreshes;
    prog.push_back(I(OP_PREA));
    prog.push_back(I(OP_WAIT, 0, 0, TRP));
    prog.push_back(I(OP_REF));
    prog.push_back(I(OP_WAIT, 0, 0, TRFC));
    prog.push_back(I(OP_END));
    execute();
    m_sw_ref = refreshes - nref;
    check(m_sw_ref == 1 && violations == 0, "software refresh issued cleanly");

    // ---- 5c. read-data overflow: host stops draining
    host_rd_ready = 0; rx.delete();
    for (int p = 0; p < 2; p++) begin
      prog.push_back(I(OP_ACT, 1, 100));
      prog.push_back(I(OP_WAIT, 0, 0, TRCD));
      for (int c = 0; c < RB_DEPTH / 2 + 4; c++) begin
        prog.push_back(I(OP_RD, 1, (c % 16) * 8));
        prog.push_back(I(OP_WAIT, 0, 0, TBL));
      end
      prog.push_back(I(OP_WAIT, 0, 0, TRAS));
      prog.push_back(I(OP_PRE, 1));
      prog.push_back(I(OP_WAIT, 0, 0, TRP));
      prog.push_back(I(OP_END));
      execute();
    end
    check(err_overflow, "overflow flagged");
    check(rb_level == 10'(RB_DEPTH), "read-back buffer full");
    if (err_overflow) m_overflow++;
    host_rd_ready = 1;
    repeat (RB_DEPTH + 4) @(posedge clk); #1;
    check(rx.size() == RB_DEPTH && count_err_bytes(8'hAA) == 0, "stored bursts delivered intact");
    err_clear = 1; @(posedge clk); #1; err_clear = 0;
    check(!err_overflow, "overflow cleared");

    // ---- 5d. streamed program larger than the buffer, host too slow: underrun
    for (int k = 0; k < 1024; k++) send(I(OP_WAIT, 0, 0, 2));
    @(posedge clk); #1;
    check(prog_busy, "full buffer starts a streamed program");
    for (int k = 0; k < 600 && !err_underrun; k++) begin
      send(I(OP_WAIT, 0, 0, 2));
      repeat (3) @(posedge clk); #1;
    end
    check(err_underrun, "underrun flagged");
    if (err_underrun) m_underrun++;
    prog.push_back(I(OP_END));
    execute();
    check(!prog_busy && instr_level == 0, "streamed program ended");
    err_clear = 1; @(posedge clk); #1; err_clear = 0;

    // ---- 5e. other DDR commands through RAW (mode register set, ZQ
    // calibration) and clock-enable control, with auto-refresh on
    cfg_refresh_en = 1; m_mode_switch++;
    i0 = ev.size();
    prog.push_back(I(OP_PREA));
    prog.push_back(I(OP_WAIT, 0, 0, TRP));
    prog.push_back(I(OP_RAW, 0, 16'h0D70, 0, 8'b000));   // MRS to MR0
    prog.push_back(I(OP_WAIT, 0, 0, 12));                 // tMOD
    prog.push_back(I(OP_RAW, 0, 0, 0, 8'b110));          // ZQCS (A10 low)
    prog.push_back(I(OP_WAIT, 0, 0, 64));                 // tZQCS
    prog.push_back(I(OP_CKE, 0, 0, 0, 8'h00));           // power-down until the next program
    prog.push_back(I(OP_END));
    execute();
    for (int k = i0; k < ev.size(); k++) begin
      if (ev[k].k == K_MRS) begin check(ev[k].ba == 0 && ev[k].a == 16'h0D70, "MRS bank/address"); m_raw++; end
      if (ev[k].k == K_ZQ) m_raw++;
    end
    check(m_raw == 2, "MRS and ZQCS issued via RAW");
    check(!ddr_cke, "CKE low after program");
    nref = refreshes;
    repeat (3 * 500) @(posedge clk); #1;
    check(refreshes == nref && n_ref_cke_low == 0, "no auto-refresh while CKE is low");
    prog.push_back(I(OP_CKE, 0, 0, 0, 8'h01));
    prog.push_back(I(OP_WAIT, 0, 0, 10));                 // tXP
    prog.push_back(I(OP_END));
    execute();
    repeat (2 * TRFC + TRP + 10) @(posedge clk); #1;
    check(ddr_cke && refreshes > nref, "postponed refreshes served once CKE is high again");
    cfg_refresh_en = 0; m_mode_switch++;
    repeat (4 * TRFC) @(posedge clk); #1;

    // ---- mechanism summary
    check(n_cke_low > 1000, "CKE held low");
    check(m_raw > 0, "raw DDR commands issued");
    check(n_wait_cycles > 0, "WAIT gaps issued");
    check(m_trcd_err > 0, "reduced-tRCD errors observed");
    check(m_tras_err > 0, "reduced-tRAS errors observed");
    check(m_ret_err > 0, "retention errors observed");
    check(m_auto_ref > 0, "auto-refresh issued");
    check(m_postponed > 0, "postponed refresh served");
    check(m_sw_ref > 0, "software refresh issued");
    check(m_overflow > 0, "overflow occurred");
    check(m_underrun > 0, "underrun occurred");
    check(m_mode_switch >= 2, "auto-refresh switched on and off");
    check(violations == 0, $sformatf("no protocol violations (%0d)", violations));
    $display("mechanisms: wait_cycles=%0d trcd_err=%0d tras_err=%0d retention_err=%0d auto_ref=%0d postponed=%0d sw_ref=%0d overflow=%0d underrun=%0d mode_switch=%0d hold=%0d raw=%0d cke_low=%0d",
             n_wait_cycles, m_trcd_err, m_tras_err, m_ret_err, m_auto_ref, m_postponed, m_sw_ref, m_overflow, m_underrun, m_mode_switch, n_hold, m_raw, n_cke_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
