// tb_refresh_ctrl: self-checking test of refresh_ctrl.
//
// Records every command the engine drives with its cycle number and checks:
// PRECHARGE-ALL then REFRESH, cfg_trp apart; one refresh sequence every
// cfg_trefi cycles while the bus is free; no command while the bus is taken;
// postponed requests served back-to-back cfg_trfc apart once the bus frees;
// at most MAX_PENDING (8) postponed; nothing at all while disabled.
module tb_refresh_ctrl;
  import softmc_pkg::*;
  localparam int unsigned TREFI = 60, TRP = 4, TRFC = 12;

  logic clk = 0, rst_n = 0;
  logic cfg_enable = 0, bus_free = 1, want, busy;
  logic [31:0] cfg_trefi = TREFI;
  logic [7:0]  cfg_trp = 8'(TRP);
  logic [15:0] cfg_trfc = 16'(TRFC);
  ddr_cmd_e cmd;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned t_prea[$], t_ref[$];
  int bad_while_taken = 0;

  refresh_ctrl dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
    if (cmd == CMD_PREA) t_prea.push_back(cyc);
    if (cmd == CMD_REF)  t_ref.push_back(cyc);
    if (cmd != CMD_NOP && cmd != CMD_PREA && cmd != CMD_REF) bad_while_taken++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned t0, n_before;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // Disabled: nothing happens.
    repeat (5 * TREFI) @(posedge clk); #1;
    check(t_prea.size() == 0 && t_ref.size() == 0 && !want && !busy, "disabled -> no refresh");

    // Enabled, bus always free: one PREA+REF every TREFI cycles.
    t0 = cyc; cfg_enable = 1;
    repeat (10 * TREFI + TRP + 5) @(posedge clk); #1;
    check(t_prea.size() == 10 && t_ref.size() == 10, $sformatf("10 refreshes in 10 tREFI, got %0d/%0d", t_prea.size(), t_ref.size()));
    check(t_prea.size() > 0 && t_prea[0] - t0 <= TREFI + 3, "first refresh within tREFI of enable");
    foreach (t_prea[k]) begin
      if (k > 0) check(t_prea[k] - t_prea[k-1] == TREFI, $sformatf("refresh period %0d", t_prea[k] - t_prea[k-1]));
      if (k < t_ref.size()) check(t_ref[k] - t_prea[k] == TRP, $sformatf("PREA->REF %0d exp %0d", t_ref[k] - t_prea[k], TRP));
    end
    check(bad_while_taken == 0, "only PREA/REF issued");

    // Bus taken for ~3.5 tREFI: requests are postponed, then served back-to-back.
    // Align to a refresh: the request that caused it was counted 2 cycles
    // before the PREA, so the next ones come TREFI-2, 2*TREFI-2, ... later.
    while (cmd != CMD_PREA) begin @(posedge clk); #1; end
    repeat (TRP + TRFC + 2) @(posedge clk); #1;
    bus_free = 0; n_before = t_ref.size(); t_prea.delete(); t_ref.delete();
    repeat (3 * TREFI - TRP - TRFC + 10) @(posedge clk); #1;
    check(t_ref.size() == 0 && t_prea.size() == 0, "no command while bus taken");
    check(want, "want raised while requests pending");
    // No further requests from here on, so exactly the postponed ones are served.
    bus_free = 1; cfg_trefi = '1;
    repeat (3 * TRFC + TRP + 10) @(posedge clk); #1;
    check(t_prea.size() == 1 && t_ref.size() == 3, $sformatf("3 postponed refreshes served: %0d PREA %0d REF", t_prea.size(), t_ref.size()));
    for (int k = 1; k < t_ref.size(); k++) check(t_ref[k] - t_ref[k-1] == TRFC, "REF->REF = tRFC");
    check(!busy && !want, "bus released after postponed refreshes");

    // Long blocking: pending saturates at 8.
    while (busy) begin @(posedge clk); #1; end
    bus_free = 0; t_prea.delete(); t_ref.delete();
    cfg_trefi = 32'(TREFI);
    repeat (20 * TREFI) @(posedge clk); #1;
    bus_free = 1; cfg_trefi = '1;
    repeat (10 * TRFC + TRP + 5) @(posedge clk); #1;
    check(t_ref.size() == 8, $sformatf("postponed refreshes capped at 8, got %0d", t_ref.size()));

    // Disable with requests pending: they are dropped.
    while (busy) begin @(posedge clk); #1; end
    bus_free = 0; cfg_trefi = 32'(TREFI);
    repeat (2 * TREFI + 3) @(posedge clk); #1;
    cfg_enable = 0; @(posedge clk); #1;
    check(!want, "disable drops pending requests");
    bus_free = 1; t_prea.delete(); t_ref.delete();
    repeat (4 * TREFI) @(posedge clk); #1;
    check(t_ref.size() == 0 && t_prea.size() == 0, "no refresh after disable");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
