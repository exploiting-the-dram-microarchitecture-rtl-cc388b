// salp_scheduler: request queue and command selection of a memory controller
// that exploits subarray-level parallelism.
//
// Requests (read or write of one column of one row of one bank) wait in a
// queue of QDEPTH entries kept in arrival order, entry 0 the oldest.  Every
// cycle each entry works out the next DRAM command it needs and whether that
// command is legal now; the oldest entry with a legal command issues it.
// Because younger requests may issue ACTIVATEs while older ones wait on
// timing, activations to different subarrays of a bank overlap, which is
// how the mechanisms gain their parallelism.  An entry leaves the queue when
// its READ or WRITE issues (open-row policy: rows stay open afterwards).
//
// The next command of an entry for subarray s of bank b depends on MODE:
//  * row open in s (hit): MASA issues SA_SEL first unless s is designated,
//    then the column command.  SALP-1/SALP-2 first precharge any other open
//    subarray of the bank, as a column command there needs exactly one
//    activated subarray.
//  * other row open in s (conflict): PRECHARGE s.
//  * s closed: MASA activates at once.  SALP-2 activates if fewer than two
//    subarrays of the bank are open and no queued request still hits in the
//    open one (so the ACTIVATE overlaps the other's write recovery, the
//    "ACTIVATE before PRECHARGE" of SALP-2, without throwing away a row
//    that is still wanted); otherwise it precharges one.  A steady stream of
//    new hits to the open row can delay such an ACTIVATE indefinitely; no
//    age limit is built in.
//    SALP-1 first precharges the open subarray, then may activate s without
//    waiting tRP, because tRP is tracked per subarray (salp_timing).
// A PRECHARGE or SA_SEL that would take away a row an older request hits in
// is held back, so younger requests never undo older ones, and a column
// command waits while an older request to the same column is queued, so
// reads and writes to one address complete in arrival order.
//
// Interface: valid/ready request port; state inputs from
// subarray_status_table and salp_timing; one command per cycle out
// (combinational from registered state, CMD_NOP when none).  The selection
// policy (oldest legal command first) and the blocking rules are this
// design's own; the mode rules follow the mechanism descriptions.
module salp_scheduler
  import salp_pkg::*;
#(
  parameter salp_mode_e  MODE      = MODE_MASA,
  parameter int unsigned BANKS     = BANKS_DEF,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter int unsigned ROWS      = ROWS_DEF,
  parameter int unsigned COLS      = COLS_DEF,
  parameter int unsigned DATA_W    = DATA_W_DEF,
  parameter int unsigned QDEPTH    = QDEPTH_DEF,
  parameter int unsigned ID_W      = ID_W_DEF,
  localparam int unsigned BANK_W   = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned SA_W     = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned ROW_W    = $clog2(ROWS),
  localparam int unsigned LROW_W   = $clog2(ROWS / SUBARRAYS),
  localparam int unsigned COL_W    = $clog2(COLS),
  localparam int unsigned CNT_W    = $clog2(SUBARRAYS + 1),
  localparam int unsigned QC_W     = $clog2(QDEPTH + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // request port
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_we,
  input  logic [BANK_W-1:0]     req_bank,
  input  logic [ROW_W-1:0]      req_row,
  input  logic [COL_W-1:0]      req_col,
  input  logic [ID_W-1:0]       req_id,
  input  logic [DATA_W-1:0]     req_wdata,
  // state
  input  logic [BANKS-1:0][SUBARRAYS-1:0]             open,
  input  logic [BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] open_row,
  input  logic [BANKS-1:0]                            desig_valid,
  input  logic [BANKS-1:0][SA_W-1:0]                  desig_sa,
  input  logic [BANKS-1:0][CNT_W-1:0]                 n_open,
  input  logic [BANKS-1:0][SUBARRAYS-1:0]             act_ok,
  input  logic [BANKS-1:0][SUBARRAYS-1:0]             col_ok,
  input  logic [BANKS-1:0][SUBARRAYS-1:0]             pre_ok,
  input  logic [BANKS-1:0]                            sel_ok,
  input  logic                  rrd_ok,
  input  logic                  rd_ok,
  input  logic                  wr_ok,
  // issued command
  output cmd_e                  cmd,
  output logic [BANK_W-1:0]     cmd_bank,
  output logic [SA_W-1:0]       cmd_sa,
  output logic [LROW_W-1:0]     cmd_lrow,
  output logic [COL_W-1:0]      cmd_col,
  output logic [ID_W-1:0]       cmd_id,
  output logic [DATA_W-1:0]     cmd_wdata,
  output logic [QC_W-1:0]       q_count
);

  typedef struct packed {
    logic              we;
    logic [BANK_W-1:0] bank;
    logic [SA_W-1:0]   sa;
    logic [LROW_W-1:0] lrow;
    logic [COL_W-1:0]  col;
    logic [ID_W-1:0]   id;
    logic [DATA_W-1:0] wdata;
  } entry_t;

  entry_t [QDEPTH-1:0] q;
  logic   [QC_W-1:0]   cnt;

  // ---- per-entry analysis --------------------------------------------------
  logic [QDEPTH-1:0]           v, hit, opn, legal, older_same;
  cmd_e [QDEPTH-1:0]           need;
  logic [QDEPTH-1:0][SA_W-1:0] tsa;
  logic [QDEPTH-1:0][SA_W-1:0] oth;   // an open subarray of the bank other than q.sa

  function automatic logic older_hit(input logic [QDEPTH-1:0] hv, input entry_t [QDEPTH-1:0] qq,
                                     input int i, input logic [BANK_W-1:0] b,
                                     input logic [SA_W-1:0] s, input logic any_sa);
    logic r = 1'b0;
    for (int j = 0; j < QDEPTH; j++)
      if (j < i && hv[j] && qq[j].bank == b && (any_sa || qq[j].sa == s)) r = 1'b1;
    return r;
  endfunction

  always_comb begin
    for (int i = 0; i < QDEPTH; i++) begin
      v[i]   = (QC_W'(i) < cnt);
      opn[i] = open[q[i].bank][q[i].sa];
      hit[i] = v[i] && opn[i] && (open_row[q[i].bank][q[i].sa] == q[i].lrow);
      oth[i] = '0;
      for (int s = SUBARRAYS - 1; s >= 0; s--)
        if (open[q[i].bank][s] && SA_W'(s) != q[i].sa) oth[i] = SA_W'(s);
    end
    // Requests to the same column keep their order (read/write hazards)
    for (int i = 0; i < QDEPTH; i++) begin
      older_same[i] = 1'b0;
      for (int j = 0; j < QDEPTH; j++)
        if (j < i && v[j] && q[j].bank == q[i].bank && q[j].sa == q[i].sa &&
            q[j].lrow == q[i].lrow && q[j].col == q[i].col) older_same[i] = 1'b1;
    end
    for (int i = 0; i < QDEPTH; i++) begin
      logic [BANK_W-1:0] b;
      logic [SA_W-1:0]   s;
      logic              colt;
      b    = q[i].bank;
      s    = q[i].sa;
      colt = col_ok[b][s] && (q[i].we ? wr_ok : rd_ok) && !older_same[i];
      need[i]  = CMD_NOP;
      tsa[i]   = s;
      legal[i] = 1'b0;
      if (hit[i]) begin
        if (MODE == MODE_MASA) begin
          if (!(desig_valid[b] && desig_sa[b] == s)) begin
            need[i]  = CMD_SASEL;
            legal[i] = !(desig_valid[b] && older_hit(hit, q, i, b, desig_sa[b], 1'b0));
          end else begin
            need[i]  = q[i].we ? CMD_WR : CMD_RD;
            legal[i] = colt && sel_ok[b];
          end
        end else if (n_open[b] > 1) begin
          need[i]  = CMD_PRE;
          tsa[i]   = oth[i];
          legal[i] = pre_ok[b][oth[i]] && !older_hit(hit, q, i, b, oth[i], 1'b0);
        end else begin
          need[i]  = q[i].we ? CMD_WR : CMD_RD;
          legal[i] = colt;
        end
      end else if (v[i] && opn[i]) begin
        need[i]  = CMD_PRE;
        legal[i] = pre_ok[b][s] && !older_hit(hit, q, i, b, s, 1'b0);
      end else if (v[i]) begin
        if ((MODE == MODE_SALP1 && n_open[b] != 0) || (MODE == MODE_SALP2 && n_open[b] >= 2)) begin
          need[i]  = CMD_PRE;
          tsa[i]   = oth[i];
          legal[i] = pre_ok[b][oth[i]] && !older_hit(hit, q, i, b, oth[i], 1'b0);
        end else begin
          need[i]  = CMD_ACT;
          legal[i] = act_ok[b][s] && rrd_ok &&
                     !(MODE == MODE_SALP2 && older_hit(hit, q, QDEPTH, b, s, 1'b1));
        end
      end
    end
  end

  // ---- oldest legal entry issues ------------------------------------------
  logic              win_v;
  logic [QC_W-1:0]   win;
  always_comb begin
    win_v = 1'b0;
    win   = '0;
    for (int i = QDEPTH - 1; i >= 0; i--)
      if (v[i] && legal[i]) begin
        win_v = 1'b1;
        win   = QC_W'(i);
      end
  end

  always_comb begin
    cmd       = win_v ? need[win] : CMD_NOP;
    cmd_bank  = q[win].bank;
    cmd_sa    = tsa[win];
    cmd_lrow  = q[win].lrow;
    cmd_col   = q[win].col;
    cmd_id    = q[win].id;
    cmd_wdata = q[win].wdata;
  end

  // ---- queue update --------------------------------------------------------
  logic retire, enq;
  assign retire    = (cmd == CMD_RD) || (cmd == CMD_WR);
  assign req_ready = (cnt < QC_W'(QDEPTH));
  assign enq       = req_valid && req_ready;
  assign q_count   = cnt;

  entry_t new_e;
  always_comb begin
    new_e.we    = req_we;
    new_e.bank  = req_bank;
    new_e.sa    = (SUBARRAYS > 1) ? SA_W'(req_row >> LROW_W) : '0;
    new_e.lrow  = req_row[LROW_W-1:0];
    new_e.col   = req_col;
    new_e.id    = req_id;
    new_e.wdata = req_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else begin
      cnt <= cnt + QC_W'(enq) - QC_W'(retire);
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < QDEPTH; i++) begin
      if (retire && QC_W'(i) >= win && i < QDEPTH - 1) q[i] <= q[i+1];
    end
    if (enq) q[retire ? cnt - 1'b1 : cnt] <= new_e;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= QC_W'(QDEPTH));

endmodule
