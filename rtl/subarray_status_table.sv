// subarray_status_table: the memory controller's copy of the state of every
// subarray of every bank.
//
// With subarray-level parallelism the controller must know, per bank, which
// subarrays are activated, which row each one holds, and (for MASA) which
// subarray is designated to drive the global bitlines.  This table records
// that from the command stream the controller issues, so it mirrors the
// latches in masa_bank.  For 8 banks x 8 subarrays x (1 + 12) bits plus
// 8 x (1 + 3) designation bits it holds 864 bits (108 bytes), within the
// "under 256 bytes" budget the mechanism is stated to need.
//
// Interface: one issued command per cycle (`cmd`, `bank`, `sa`, local row
// `lrow`).  Outputs are registered state, valid from the cycle after the
// command.  PRECHARGE in SALP-1 mode closes every subarray of the bank (an
// unmodified bank); otherwise only the addressed subarray.  n_open counts
// activated subarrays per bank.
module subarray_status_table
  import salp_pkg::*;
#(
  parameter salp_mode_e  MODE      = MODE_MASA,
  parameter int unsigned BANKS     = BANKS_DEF,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter int unsigned LROW_W    = 12,
  localparam int unsigned BANK_W   = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned SA_W     = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned CNT_W    = $clog2(SUBARRAYS + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cmd_e                   cmd,
  input  logic [BANK_W-1:0]      bank,
  input  logic [SA_W-1:0]        sa,
  input  logic [LROW_W-1:0]      lrow,
  output logic [BANKS-1:0][SUBARRAYS-1:0]             open,
  output logic [BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] open_row,
  output logic [BANKS-1:0]                            desig_valid,
  output logic [BANKS-1:0][SA_W-1:0]                  desig_sa,
  output logic [BANKS-1:0][CNT_W-1:0]                 n_open
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open        <= '0;
      desig_valid <= '0;
      desig_sa    <= '0;
    end else begin
      case (cmd)
        CMD_ACT: open[bank][sa] <= 1'b1;
        CMD_PRE: begin
          if (MODE == MODE_SALP1) open[bank] <= '0;
          else                    open[bank][sa] <= 1'b0;
          if (MODE == MODE_SALP1 || desig_sa[bank] == sa) desig_valid[bank] <= 1'b0;
        end
        CMD_SASEL: begin
          desig_valid[bank] <= 1'b1;
          desig_sa[bank]    <= sa;
        end
        default: ;
      endcase
    end
  end

  // Row addresses need no reset: they are only read while `open` is set.
  always_ff @(posedge clk) begin
    if (cmd == CMD_ACT) open_row[bank][sa] <= lrow;
  end

  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      logic [CNT_W-1:0] c;
      c = '0;
      for (int s = 0; s < SUBARRAYS; s++) c = c + CNT_W'(open[b][s]);
      n_open[b] = c;
    end
  end

endmodule
