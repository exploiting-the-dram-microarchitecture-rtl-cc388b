// salp_pkg: types and default constants shared by the subarray-level
// parallelism (SALP) memory controller and the DRAM-side bank logic.
//
// The command set is the usual DDR set (ACTIVATE, PRECHARGE, READ, WRITE)
// plus SA_SEL, the subarray-select command that MASA adds to pick which of
// several activated subarrays drives the global bitlines.  The three
// mechanisms (SALP-1, SALP-2, MASA) are a mode of the controller and of the
// bank; MASA, the most capable one, is the default.
//
// Geometry follows the organisation this design is built around: 32k rows
// per bank, split into 8 exposed subarrays (the evaluated configuration).
// The DRAM timing values are not given by the mechanism description; the
// defaults here are typical DDR3-1066 values in memory-clock cycles and are
// this design's own choice.
package salp_pkg;

  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACT   = 3'd1,
    CMD_PRE   = 3'd2,
    CMD_SASEL = 3'd3,
    CMD_RD    = 3'd4,
    CMD_WR    = 3'd5
  } cmd_e;

  typedef enum logic [1:0] {
    MODE_SALP1 = 2'd0,
    MODE_SALP2 = 2'd1,
    MODE_MASA  = 2'd2
  } salp_mode_e;

  // Default geometry
  localparam int unsigned BANKS_DEF     = 8;
  localparam int unsigned SUBARRAYS_DEF = 8;
  localparam int unsigned ROWS_DEF      = 32768;  // rows per bank
  localparam int unsigned COLS_DEF      = 128;    // 64-byte columns per 8 kB row
  localparam int unsigned DATA_W_DEF    = 512;    // one 64-byte cache line
  localparam int unsigned QDEPTH_DEF    = 8;
  localparam int unsigned ID_W_DEF      = 8;

  // Default timing, memory-clock cycles (DDR3-1066 class)
  localparam int unsigned T_RCD_DEF = 8;   // ACT -> column command
  localparam int unsigned T_RP_DEF  = 8;   // PRE -> ACT, same subarray
  localparam int unsigned T_RAS_DEF = 20;  // ACT -> PRE
  localparam int unsigned T_WR_DEF  = 8;   // end of write burst -> PRE
  localparam int unsigned T_RTP_DEF = 4;   // READ -> PRE
  localparam int unsigned T_CL_DEF  = 8;   // READ -> data
  localparam int unsigned T_CWL_DEF = 6;   // WRITE -> data
  localparam int unsigned T_BL_DEF  = 4;   // burst length 8 on a DDR bus
  localparam int unsigned T_CCD_DEF = 4;   // column -> column
  localparam int unsigned T_RRD_DEF = 4;   // ACT -> ACT, any bank
  localparam int unsigned T_SA_DEF  = 1;   // SA_SEL -> column command

endpackage
