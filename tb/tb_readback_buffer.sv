// tb_readback_buffer: self-checking test of readback_buffer.
//
// Feeds numbered bursts while the host side drains at random, compares the
// host-side stream with a reference queue, then stops draining, overfills
// the buffer and checks that the surplus bursts are dropped, that the
// sticky overflow flag rises and that clear_err clears it. DEPTH = 16.
module tb_readback_buffer;
  import softmc_pkg::*;
  localparam int unsigned DEPTH = 16;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid, out_ready = 0, overflow, clear_err = 0;
  logic [BURST_W-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;
  logic [BURST_W-1:0] model[$];

  readback_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [BURST_W-1:0] burst(input int n);
    return {(BURST_W/32){32'(n * 32'h9E37_79B9)}};
  endfunction

  // Host side: when it takes a word, compare with the model.
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (model.size() == 0 || out_data != model[0]) begin
        failures++; $display("FAIL: host data out of order");
      end
      if (model.size() > 0) void'(model.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(!out_valid && !overflow && level == 0, "empty after reset");
    // Random traffic, never overfilled.
    for (int n = 0; n < 300; n++) begin
      out_ready = ($urandom_range(0, 3) != 0);
      in_valid = ($urandom_range(0, 1) == 1) && (level < 5'(DEPTH - 1));
      in_data = burst(n);
      if (in_valid) model.push_back(burst(n));
      @(posedge clk); #1;
    end
    in_valid = 0; out_ready = 1;
    repeat (DEPTH + 2) @(posedge clk); #1;
    check(model.size() == 0 && !out_valid, "all bursts delivered");
    check(!overflow, "no overflow while drained");
    // Overfill: DEPTH + 3 bursts with the host stalled.
    out_ready = 0;
    for (int n = 0; n < DEPTH + 3; n++) begin
      in_valid = 1; in_data = burst(1000 + n);
      if (n < DEPTH) model.push_back(burst(1000 + n));
      @(posedge clk); #1;
    end
    in_valid = 0;
    check(overflow, "overflow flagged");
    check(level == 5'(DEPTH), "buffer full, surplus dropped");
    out_ready = 1;
    repeat (DEPTH + 2) @(posedge clk); #1;
    check(model.size() == 0, "stored bursts intact after overflow");
    check(overflow, "overflow sticky");
    clear_err = 1; @(posedge clk); #1; clear_err = 0;
    check(!overflow, "clear_err clears overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
