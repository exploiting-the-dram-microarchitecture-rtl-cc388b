// salp_ctrl: memory controller for one rank that exploits subarray-level
// parallelism (SALP-1, SALP-2 or MASA, chosen by MODE).
//
// It joins the request queue and command selection (salp_scheduler), the
// controller's copy of the subarray state (subarray_status_table) and the
// timing counters (salp_timing).  The command chosen in a cycle goes to the
// DRAM command bus and, at the same clock edge, updates the table and the
// timers, so the controller's view and the banks' latches stay equal.
//
// Responses: a WRITE is acknowledged in the cycle it issues (wr_done).  A
// READ's id is delayed T_CL cycles in a shift register; in that cycle the
// DRAM returns the line on dram_rvalid/dram_rdata and the controller passes
// it out as rd_resp with the id.  Returning the whole line in one cycle, T_CL
// after the READ, is a simplification of this design (the burst is not
// modelled beat by beat).  rd_resp_data is dram_rdata wired straight
// through: the controller only adds the id and the valid strobe.
module salp_ctrl
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
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned LROW_W = $clog2(ROWS / SUBARRAYS),
  localparam int unsigned COL_W  = $clog2(COLS),
  localparam int unsigned CNT_W  = $clog2(SUBARRAYS + 1),
  localparam int unsigned QC_W   = $clog2(QDEPTH + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_we,
  input  logic [BANK_W-1:0]     req_bank,
  input  logic [ROW_W-1:0]      req_row,
  input  logic [COL_W-1:0]      req_col,
  input  logic [ID_W-1:0]       req_id,
  input  logic [DATA_W-1:0]     req_wdata,
  output logic                  wr_done,
  output logic [ID_W-1:0]       wr_done_id,
  output logic                  rd_resp,
  output logic [ID_W-1:0]       rd_resp_id,
  output logic [DATA_W-1:0]     rd_resp_data,
  // DRAM command bus
  output cmd_e                  dram_cmd,
  output logic [BANK_W-1:0]     dram_bank,
  output logic [SA_W-1:0]       dram_sa,
  output logic [ROW_W-1:0]      dram_row,
  output logic [COL_W-1:0]      dram_col,
  output logic [DATA_W-1:0]     dram_wdata,
  input  logic                  dram_rvalid,
  input  logic [DATA_W-1:0]     dram_rdata,
  output logic [QC_W-1:0]       q_count
);

  logic [BANKS-1:0][SUBARRAYS-1:0]             open, act_ok, col_ok, pre_ok;
  logic [BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] open_row;
  logic [BANKS-1:0]                            desig_valid, sel_ok;
  logic [BANKS-1:0][SA_W-1:0]                  desig_sa;
  logic [BANKS-1:0][CNT_W-1:0]                 n_open;
  logic                                        rrd_ok, rd_ok, wr_ok;
  cmd_e                                        cmd;
  logic [LROW_W-1:0]                           cmd_lrow;
  logic [ID_W-1:0]                             cmd_id;

  salp_scheduler #(
    .MODE(MODE), .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS), .COLS(COLS),
    .DATA_W(DATA_W), .QDEPTH(QDEPTH), .ID_W(ID_W)
  ) u_sched (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_bank, .req_row, .req_col, .req_id, .req_wdata,
    .open, .open_row, .desig_valid, .desig_sa, .n_open,
    .act_ok, .col_ok, .pre_ok, .sel_ok, .rrd_ok, .rd_ok, .wr_ok,
    .cmd, .cmd_bank(dram_bank), .cmd_sa(dram_sa), .cmd_lrow, .cmd_col(dram_col),
    .cmd_id, .cmd_wdata(dram_wdata), .q_count
  );

  subarray_status_table #(
    .MODE(MODE), .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .LROW_W(LROW_W)
  ) u_table (
    .clk, .rst_n, .cmd, .bank(dram_bank), .sa(dram_sa), .lrow(cmd_lrow),
    .open, .open_row, .desig_valid, .desig_sa, .n_open
  );

  salp_timing #(
    .BANKS(BANKS), .SUBARRAYS(SUBARRAYS),
    .T_RCD(T_RCD), .T_RP(T_RP), .T_RAS(T_RAS), .T_WR(T_WR), .T_RTP(T_RTP),
    .T_CL(T_CL), .T_CWL(T_CWL), .T_BL(T_BL), .T_CCD(T_CCD), .T_RRD(T_RRD), .T_SA(T_SA)
  ) u_timing (
    .clk, .rst_n, .cmd, .bank(dram_bank), .sa(dram_sa),
    .act_ok, .col_ok, .pre_ok, .sel_ok, .rrd_ok, .rd_ok, .wr_ok
  );

  assign dram_cmd = cmd;
  if (SUBARRAYS > 1) begin : g_row
    assign dram_row = {dram_sa, cmd_lrow};
  end else begin : g_row1
    assign dram_row = cmd_lrow;
  end

  assign wr_done    = (cmd == CMD_WR);
  assign wr_done_id = cmd_id;

  // Read return: id pipeline of T_CL stages
  logic [T_CL-1:0]           rp_v;
  logic [T_CL-1:0][ID_W-1:0] rp_id;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rp_v <= '0;
    else        rp_v <= {rp_v[T_CL-2:0], cmd == CMD_RD};
  end
  always_ff @(posedge clk) rp_id <= {rp_id[T_CL-2:0], cmd_id};

  assign rd_resp      = rp_v[T_CL-1];
  assign rd_resp_id   = rp_id[T_CL-1];
  assign rd_resp_data = dram_rdata;

  a_rdata_on_time: assert property (@(posedge clk) disable iff (!rst_n) dram_rvalid == rd_resp)
    else $error("DRAM read data not returned T_CL cycles after READ");

endmodule
