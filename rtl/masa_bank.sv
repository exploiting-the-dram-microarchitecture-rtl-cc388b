// masa_bank: the digital peripheral logic of one DRAM bank that supports
// subarray-level parallelism.
//
// A bank of ROWS rows is built from SUBARRAYS subarrays, each with its own
// local row buffer; all share a global row-address decoder and a global row
// buffer.  The top bits of the bank row address select the subarray, the
// rest select the row inside it.  This module holds, for every subarray, the
// latched row and whether it is activated, and decides which subarray's
// local row buffer is connected to the global bitlines during a READ or
// WRITE (output gbl_drive, one bit per subarray).
//
// MODE selects the mechanism:
//  * SALP-1: an unmodified bank.  One global row-address latch; at most one
//    subarray may be activated; PRECHARGE closes the bank.  Only the
//    controller's timing changes (see salp_timing).
//  * SALP-2: one local row-address latch per subarray; up to two subarrays may
//    be activated; PRECHARGE closes the addressed subarray.  A column command
//    connects every activated subarray, so it needs exactly one activated.
//  * MASA: local latches plus a designated bit per subarray, set by SA_SEL.
//    Any number of subarrays may be activated; a column command connects only
//    the activated, designated one.
//
// Interface: one command per cycle on `cmd` (CMD_NOP when the command is for
// another bank), with `row` (bank row address, for ACT) and `sa` (subarray,
// for PRE and SA_SEL).  State changes on the next rising edge; gbl_drive and
// the error flags are combinational in the command cycle.  The error flags
// report commands the mode does not allow (they are also assertions) and are
// this design's own addition, as is the choice that ACT does not designate a
// subarray by itself.
module masa_bank
  import salp_pkg::*;
#(
  parameter salp_mode_e  MODE      = MODE_MASA,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter int unsigned ROWS      = ROWS_DEF,
  localparam int unsigned ROW_W    = $clog2(ROWS),
  localparam int unsigned SA_W     = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned LROW_W   = $clog2(ROWS / SUBARRAYS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cmd_e                    cmd,
  input  logic [ROW_W-1:0]        row,
  input  logic [SA_W-1:0]         sa,
  output logic [SUBARRAYS-1:0]    sa_active,
  output logic [SUBARRAYS-1:0][LROW_W-1:0] sa_row,
  output logic [SUBARRAYS-1:0]    sa_designated,
  output logic [SUBARRAYS-1:0]    gbl_drive,
  output logic                    act_err,
  output logic                    col_err,
  output logic                    sel_err
);

  // Global row-address decode: which subarray an ACT goes to
  logic [SA_W-1:0]   act_sa;
  logic [LROW_W-1:0] act_lrow;
  assign act_lrow = row[LROW_W-1:0];
  if (SUBARRAYS > 1) begin : g_sa
    assign act_sa = row[ROW_W-1 -: SA_W];
  end else begin : g_nosa
    assign act_sa = '0;
  end

  logic [SUBARRAYS-1:0]             lat_act, lat_pre, lat_sel, lat_desel;
  logic [SUBARRAYS-1:0][LROW_W-1:0] lat_row;
  logic [$clog2(SUBARRAYS+1)-1:0]   n_active;

  always_comb begin
    n_active = '0;
    for (int i = 0; i < SUBARRAYS; i++) n_active += sa_active[i];
  end

  for (genvar i = 0; i < SUBARRAYS; i++) begin : g_sub
    assign lat_act[i]   = (cmd == CMD_ACT) && (act_sa == SA_W'(i));
    assign lat_pre[i]   = (cmd == CMD_PRE) &&
                          ((MODE == MODE_SALP1) || (sa == SA_W'(i)));
    assign lat_sel[i]   = (MODE == MODE_MASA) && (cmd == CMD_SASEL) && (sa == SA_W'(i));
    assign lat_desel[i] = (MODE == MODE_MASA) && (cmd == CMD_SASEL) && (sa != SA_W'(i));
    subarray_latch #(.LROW_W(LROW_W)) u_lat (
      .clk, .rst_n,
      .act(lat_act[i]), .pre(lat_pre[i]), .sel(lat_sel[i]), .desel(lat_desel[i]),
      .row_in(act_lrow),
      .active(sa_active[i]), .row(lat_row[i]), .designated(sa_designated[i])
    );
  end

  // SALP-1 keeps the one shared global latch of an existing bank: every
  // subarray sees the same latched row address.
  if (MODE == MODE_SALP1) begin : g_global_latch
    logic [LROW_W-1:0] glob_row;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)              glob_row <= '0;
      else if (cmd == CMD_ACT) glob_row <= act_lrow;
    end
    for (genvar i = 0; i < SUBARRAYS; i++) begin : g_r
      assign sa_row[i] = glob_row;
    end
  end else begin : g_local_latch
    assign sa_row = lat_row;
  end

  // Which local row buffers connect to the global bitlines
  logic is_col;
  assign is_col = (cmd == CMD_RD) || (cmd == CMD_WR);
  always_comb begin
    if (!is_col)                gbl_drive = '0;
    else if (MODE == MODE_MASA) gbl_drive = sa_active & sa_designated;
    else                        gbl_drive = sa_active;
  end

  logic [$clog2(SUBARRAYS+1)-1:0] n_drive;
  always_comb begin
    n_drive = '0;
    for (int i = 0; i < SUBARRAYS; i++) n_drive += gbl_drive[i];
    col_err = is_col && (n_drive != 1);
    case (MODE)
      MODE_SALP1: act_err = (cmd == CMD_ACT) && (n_active != 0);
      MODE_SALP2: act_err = (cmd == CMD_ACT) && (n_active >= 2);
      default:    act_err = 1'b0;
    endcase
    if (cmd == CMD_ACT && sa_active[act_sa]) act_err = 1'b1;
    sel_err = (cmd == CMD_SASEL) && ((MODE != MODE_MASA) || !sa_active[sa]);
  end

  a_col_onehot: assert property (@(posedge clk) disable iff (!rst_n) !col_err)
    else $error("column command with %0d subarrays on the global bitlines", n_drive);
  a_act_legal: assert property (@(posedge clk) disable iff (!rst_n) !act_err)
    else $error("ACTIVATE not allowed in this mode/state");
  a_sel_legal: assert property (@(posedge clk) disable iff (!rst_n) !sel_err)
    else $error("SA_SEL to a subarray that is not activated");
  a_one_designated: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sa_designated));

endmodule
