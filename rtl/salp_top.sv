// salp_top: a memory system with subarray-level parallelism: the memory
// controller (salp_ctrl) and the SALP/MASA peripheral logic of each of the
// BANKS banks of a rank (masa_bank), joined by the DRAM command bus.
//
// The DRAM core itself (cells, bitlines, local and global sense amplifiers)
// is analog and is not part of this RTL.  Its connections are brought out as
// ports: for every subarray of every bank, whether its wordline is raised
// (arr_active), which local row it holds (arr_row) and, for MASA, whether it
// is designated (arr_designated); for a column command,
// which subarray's local row buffer is connected to the global bitlines
// (arr_gbl_drive), the column, the write strobe and data; and the read data
// coming back from the global row buffer T_CL cycles after a READ.
//
// The command bus and the bank error flags are also outputs, for observing
// the mechanism.  Timing: requests enter on a valid/ready port; commands are
// issued at most one per cycle; see salp_ctrl for responses.  MODE selects
// SALP-1, SALP-2 or MASA (default) in the controller and the banks alike.
module salp_top
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
  localparam int unsigned QC_W   = $clog2(QDEPTH + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // requests and responses
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
  // to / from the DRAM core
  output logic [BANKS-1:0][SUBARRAYS-1:0]             arr_active,
  output logic [BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] arr_row,
  output logic [BANKS-1:0][SUBARRAYS-1:0]             arr_gbl_drive,
  output logic [BANKS-1:0][SUBARRAYS-1:0]             arr_designated,
  output logic [COL_W-1:0]      arr_col,
  output logic                  arr_we,
  output logic [DATA_W-1:0]     arr_wdata,
  input  logic                  arr_rvalid,
  input  logic [DATA_W-1:0]     arr_rdata,
  // observation
  output cmd_e                  bus_cmd,
  output logic [BANK_W-1:0]     bus_bank,
  output logic [SA_W-1:0]       bus_sa,
  output logic [QC_W-1:0]       q_count,
  output logic                  bank_err
);

  cmd_e              dram_cmd;
  logic [BANK_W-1:0] dram_bank;
  logic [SA_W-1:0]   dram_sa;
  logic [ROW_W-1:0]  dram_row;
  logic [BANKS-1:0]  act_err, col_err, sel_err;

  salp_ctrl #(
    .MODE(MODE), .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS), .COLS(COLS),
    .DATA_W(DATA_W), .QDEPTH(QDEPTH), .ID_W(ID_W),
    .T_RCD(T_RCD), .T_RP(T_RP), .T_RAS(T_RAS), .T_WR(T_WR), .T_RTP(T_RTP),
    .T_CL(T_CL), .T_CWL(T_CWL), .T_BL(T_BL), .T_CCD(T_CCD), .T_RRD(T_RRD), .T_SA(T_SA)
  ) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_bank, .req_row, .req_col, .req_id, .req_wdata,
    .wr_done, .wr_done_id, .rd_resp, .rd_resp_id, .rd_resp_data,
    .dram_cmd, .dram_bank, .dram_sa, .dram_row, .dram_col(arr_col), .dram_wdata(arr_wdata),
    .dram_rvalid(arr_rvalid), .dram_rdata(arr_rdata), .q_count
  );

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    cmd_e bcmd;
    assign bcmd = (dram_bank == BANK_W'(b)) ? dram_cmd : CMD_NOP;
    masa_bank #(.MODE(MODE), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS)) u_bank (
      .clk, .rst_n, .cmd(bcmd), .row(dram_row), .sa(dram_sa),
      .sa_active(arr_active[b]), .sa_row(arr_row[b]), .sa_designated(arr_designated[b]),
      .gbl_drive(arr_gbl_drive[b]),
      .act_err(act_err[b]), .col_err(col_err[b]), .sel_err(sel_err[b])
    );
  end

  assign arr_we   = (dram_cmd == CMD_WR);
  assign bus_cmd  = dram_cmd;
  assign bus_bank = dram_bank;
  assign bus_sa   = dram_sa;
  assign bank_err = |{act_err, col_err, sel_err};

endmodule
