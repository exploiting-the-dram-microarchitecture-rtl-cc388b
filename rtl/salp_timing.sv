// salp_timing: DRAM timing-constraint tracking for a subarray-aware memory
// controller.
//
// The key timing change behind subarray-level parallelism is that the
// constraints which come from the subarray's own bitlines and sense
// amplifiers are tracked per subarray, not per bank:
//  * tRP (PRECHARGE -> ACTIVATE) only delays an ACTIVATE to the same
//    subarray.  An ACTIVATE to another subarray of the bank may follow a
//    PRECHARGE at once; this is the reinterpretation SALP-1 relies on.
//  * tRCD (ACTIVATE -> column), tRAS (ACTIVATE -> PRECHARGE), write recovery
//    (end of write data + tWR -> PRECHARGE) and tRTP are likewise per
//    subarray, so one subarray's write recovery does not hold up another.
// Constraints of shared resources stay global for the rank: tRRD between
// ACTIVATEs, tCCD between column commands, the read/write turnaround of the
// data bus, and, per bank, tSA from SA_SEL to the next column command.
//
// Interface: the command issued this cycle (`cmd`, `bank`, `sa`) loads down-
// counters; the *_ok outputs say whether a command of that kind may be
// issued in the current cycle.  Counter values are registered, so an issued
// command affects the ok flags from the next cycle on.  The timing values and
// the turnaround formulas are this design's own (typical DDR3), as the
// mechanism description gives none.
module salp_timing
  import salp_pkg::*;
#(
  parameter int unsigned BANKS     = BANKS_DEF,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter int unsigned T_RCD = T_RCD_DEF,
  parameter int unsigned T_RP  = T_RP_DEF,
  parameter int unsigned T_RAS = T_RAS_DEF,
  parameter int unsigned T_WR  = T_WR_DEF,
  parameter int unsigned T_RTP = T_RTP_DEF,
  parameter int unsigned T_CL  = T_CL_DEF,
  parameter int unsigned T_CWL = T_CWL_DEF,
  parameter int unsigned T_BL  = T_BL_DEF,
  parameter int unsigned T_CCD = T_CCD_DEF,
  parameter int unsigned T_RRD = T_RRD_DEF,
  parameter int unsigned T_SA  = T_SA_DEF,
  localparam int unsigned BANK_W = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned SA_W   = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned CW     = 6
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  cmd_e                           cmd,
  input  logic [BANK_W-1:0]              bank,
  input  logic [SA_W-1:0]                sa,
  output logic [BANKS-1:0][SUBARRAYS-1:0] act_ok,
  output logic [BANKS-1:0][SUBARRAYS-1:0] col_ok,
  output logic [BANKS-1:0][SUBARRAYS-1:0] pre_ok,
  output logic [BANKS-1:0]                sel_ok,
  output logic                            rrd_ok,
  output logic                            rd_ok,
  output logic                            wr_ok
);

  // A constraint of N cycles between commands at cycles t and t+N is a
  // counter loaded with N-1 that must be zero.
  function automatic logic [CW-1:0] ld(int unsigned n);
    return (n > 0) ? CW'(n - 1) : '0;
  endfunction
  function automatic logic [CW-1:0] dec(logic [CW-1:0] c);
    return (c != 0) ? c - 1'b1 : c;
  endfunction
  function automatic logic [CW-1:0] maxc(logic [CW-1:0] a, logic [CW-1:0] b);
    return (a > b) ? a : b;
  endfunction

  localparam logic [CW-1:0] L_WRPRE = ld(T_CWL + T_BL + T_WR);
  localparam logic [CW-1:0] L_RTW   = ld(T_CL + T_BL + 2 - T_CWL);  // 2-cycle bus turnaround
  localparam logic [CW-1:0] L_WTR   = ld(T_CWL + T_BL + 4);         // tWTR = 4

  logic [BANKS-1:0][SUBARRAYS-1:0][CW-1:0] c_act, c_col, c_pre;
  logic [BANKS-1:0][CW-1:0]                c_sel;
  logic [CW-1:0]                           c_rrd, c_ccd_rd, c_ccd_wr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_act <= '0; c_col <= '0; c_pre <= '0; c_sel <= '0;
      c_rrd <= '0; c_ccd_rd <= '0; c_ccd_wr <= '0;
    end else begin
      for (int b = 0; b < BANKS; b++) begin
        c_sel[b] <= dec(c_sel[b]);
        for (int s = 0; s < SUBARRAYS; s++) begin
          c_act[b][s] <= dec(c_act[b][s]);
          c_col[b][s] <= dec(c_col[b][s]);
          c_pre[b][s] <= dec(c_pre[b][s]);
        end
      end
      c_rrd    <= dec(c_rrd);
      c_ccd_rd <= dec(c_ccd_rd);
      c_ccd_wr <= dec(c_ccd_wr);
      case (cmd)
        CMD_ACT: begin
          c_col[bank][sa] <= ld(T_RCD);
          c_pre[bank][sa] <= ld(T_RAS);
          c_rrd           <= ld(T_RRD);
        end
        CMD_PRE: c_act[bank][sa] <= ld(T_RP);
        CMD_SASEL: c_sel[bank] <= ld(T_SA);
        CMD_RD: begin
          c_pre[bank][sa] <= maxc(dec(c_pre[bank][sa]), ld(T_RTP));
          c_ccd_rd        <= maxc(dec(c_ccd_rd), ld(T_CCD));
          c_ccd_wr        <= maxc(dec(c_ccd_wr), maxc(ld(T_CCD), L_RTW));
        end
        CMD_WR: begin
          c_pre[bank][sa] <= maxc(dec(c_pre[bank][sa]), L_WRPRE);
          c_ccd_wr        <= maxc(dec(c_ccd_wr), ld(T_CCD));
          c_ccd_rd        <= maxc(dec(c_ccd_rd), maxc(ld(T_CCD), L_WTR));
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      sel_ok[b] = (c_sel[b] == 0);
      for (int s = 0; s < SUBARRAYS; s++) begin
        act_ok[b][s] = (c_act[b][s] == 0);
        col_ok[b][s] = (c_col[b][s] == 0);
        pre_ok[b][s] = (c_pre[b][s] == 0);
      end
    end
    rrd_ok = (c_rrd == 0);
    rd_ok  = (c_ccd_rd == 0);
    wr_ok  = (c_ccd_wr == 0);
  end

endmodule
