// ddr3_model: behavioural stand-in for a DDR3 SO-DIMM behind its PHY, for
// simulation only (not synthesizable, not part of the controller).
//
// It decodes the DDR3 command pins with its own copy of the JEDEC truth
// table, keeps written bursts in a sparse store and returns one burst CL
// cycles after each READ. To let characterisation programs see something,
// it imitates the three effects SoftMC's example tests look for, with
// thresholds given as parameters:
//   - a READ issued less than TRCD_MIN cycles after its ACTIVATE returns
//     corrupted data (the stored data is unharmed);
//   - a PRECHARGE less than TRAS_MIN cycles after the ACTIVATE leaves the row
//     incompletely restored: its stored data is corrupted;
//   - a row not activated or refreshed for more than RETENTION cycles loses
//     its data; this is applied at its next ACTIVATE. Every REFRESH counts as
//     refreshing all rows.
// Corruption flips bit 0 of every byte. The model also counts protocol
// violations (READ/WRITE to a closed bank, ACTIVATE to an open bank, REFRESH,
// MODE REGISTER SET or ZQ calibration with a bank open, any command while CKE
// is low) so a testbench can check the controller's own refresh
// sequence. Commands are ignored while rst_n is low. Timing: rd_valid/rd_data appear CL cycles after the READ.
module ddr3_model
  import softmc_pkg::*;
#(
  parameter int unsigned CL        = 6,
  parameter int unsigned TRCD_MIN  = 4,
  parameter int unsigned TRAS_MIN  = 5,
  parameter longint unsigned RETENTION = 64'd3000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  ddr_pins_t          cmd,
  input  logic               cke,
  input  logic               wr_en,
  input  logic [BURST_W-1:0] wdata,
  output logic               rd_valid,
  output logic [BURST_W-1:0] rd_data,
  output int                 violations,
  output int                 refreshes
);
  localparam logic [BURST_W-1:0] FLIP = {(BURST_W/8){8'h01}};

  logic [BURST_W-1:0] store [int unsigned];
  longint unsigned    restored [int unsigned];
  longint unsigned    now = 0, last_ref = 0;
  bit                 open_b [8];
  logic [15:0]        open_row [8];
  longint unsigned    act_t [8];
  typedef struct { longint unsigned due; logic [BURST_W-1:0] d; } rd_t;
  rd_t                pipe [$];

  initial begin
    violations = 0; refreshes = 0; rd_valid = 0; rd_data = '0;
    foreach (open_b[b]) begin open_b[b] = 0; open_row[b] = '0; act_t[b] = 0; end
  end

  function automatic int unsigned rkey(input int b, input logic [15:0] r);
    return {13'd0, 3'(b), r};
  endfunction
  function automatic int unsigned ckey(input int b, input logic [15:0] r, input logic [15:0] c);
    return {3'(b), r, c[9:3]};  // one entry per burst of 8 columns
  endfunction

  task automatic corrupt_row(input int b, input logic [15:0] r);
    for (int c = 0; c < 128; c++)
      if (store.exists(ckey(b, r, 16'(c * 8)))) store[ckey(b, r, 16'(c * 8))] ^= FLIP;
  endtask

  task automatic close_bank(input int b);
    if (open_b[b] && (now - act_t[b]) < TRAS_MIN) corrupt_row(b, open_row[b]);
    open_b[b] = 0;
  endtask

  always @(posedge clk) begin
    int b;
    longint unsigned last;
    now++;
    b = int'(cmd.ba);
    rd_valid <= 1'b0;
    if (pipe.size() > 0 && pipe[0].due == now) begin
      rd_valid <= 1'b1;
      rd_data  <= pipe[0].d;
      void'(pipe.pop_front());
    end
    if (rst_n && !cmd.cs_n && !cke) violations++;  // command while clock-enable is low
    if (rst_n && !cmd.cs_n && cke) begin
      unique case ({cmd.ras_n, cmd.cas_n, cmd.we_n})
        3'b011: begin  // ACTIVATE
          if (open_b[b]) violations++;
          last = restored.exists(rkey(b, cmd.a)) ? restored[rkey(b, cmd.a)] : 0;
          if (last_ref > last) last = last_ref;
          if (now - last > RETENTION) corrupt_row(b, cmd.a);
          restored[rkey(b, cmd.a)] = now;
          open_b[b] = 1; open_row[b] = cmd.a; act_t[b] = now;
        end
        3'b101: begin  // READ
          logic [BURST_W-1:0] d;
          if (!open_b[b]) violations++;
          d = store.exists(ckey(b, open_row[b], cmd.a)) ? store[ckey(b, open_row[b], cmd.a)] : '0;
          if (now - act_t[b] < TRCD_MIN) d ^= FLIP;
          pipe.push_back('{now + CL, d});
        end
        3'b100: begin  // WRITE
          if (!open_b[b] || !wr_en) violations++;
          store[ckey(b, open_row[b], cmd.a)] = wdata;
        end
        3'b010: begin  // PRECHARGE (A10: all banks)
          if (cmd.a[10]) for (int k = 0; k < 8; k++) close_bank(k);
          else close_bank(b);
        end
        3'b001: begin  // REFRESH
          for (int k = 0; k < 8; k++) if (open_b[k]) violations++;
          last_ref = now;
          refreshes++;
        end
        3'b000, 3'b110: begin  // MODE REGISTER SET, ZQ CALIBRATION: all banks idle
          for (int k = 0; k < 8; k++) if (open_b[k]) violations++;
        end
        default: ;     // NOP
      endcase
    end
  end
endmodule
