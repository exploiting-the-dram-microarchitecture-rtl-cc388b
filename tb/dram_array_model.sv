// dram_array_model: behavioural model (not synthesizable) of the analog DRAM
// core behind salp_top: cells, local row buffers and the global row buffer
// of every bank.
//
// On a READ or WRITE it looks up which subarray the bank logic connected to
// the global bitlines (arr_gbl_drive, must be exactly one in the addressed
// bank, else `errors` counts it) and which row that subarray's latch holds
// (arr_row), so data really goes through the subarray the bank designated.
// Storage is an associative array keyed by (bank, row, column); a location
// never written reads as init_data(key).  Read data appears T_CL cycles after
// the READ, for one cycle.
module dram_array_model
  import salp_pkg::*;
#(
  parameter int unsigned BANKS     = BANKS_DEF,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter int unsigned ROWS      = ROWS_DEF,
  parameter int unsigned COLS      = COLS_DEF,
  parameter int unsigned DATA_W    = DATA_W_DEF,
  parameter int unsigned T_CL      = T_CL_DEF,
  localparam int unsigned LROW_W   = $clog2(ROWS / SUBARRAYS),
  localparam int unsigned COL_W    = $clog2(COLS)
) (
  input  logic                                        clk,
  input  logic [BANKS-1:0][SUBARRAYS-1:0]             arr_active,
  input  logic [BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] arr_row,
  input  logic [BANKS-1:0][SUBARRAYS-1:0]             arr_gbl_drive,
  input  logic [COL_W-1:0]                            arr_col,
  input  logic                                        arr_we,
  input  logic [DATA_W-1:0]                           arr_wdata,
  input  cmd_e                                        bus_cmd,
  output logic                                        arr_rvalid,
  output logic [DATA_W-1:0]                           arr_rdata,
  output int                                          errors
);

  function automatic logic [DATA_W-1:0] init_data(longint key);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = 32'(key * (i + 7)) ^ 32'hA5C3_0F17;
    return d;
  endfunction

  logic [DATA_W-1:0] mem [longint];
  logic [T_CL-1:0]             sr_v = '0;
  logic [T_CL-1:0][DATA_W-1:0] sr_d;
  initial errors = 0;

  assign arr_rvalid = sr_v[T_CL-1];
  assign arr_rdata  = sr_d[T_CL-1];

  always @(posedge clk) begin
    logic              is_rd;
    logic [DATA_W-1:0] d;
    int                nb, bsel, ssel;
    is_rd = (bus_cmd == CMD_RD);
    d = '0;
    if (is_rd || arr_we) begin
      nb = 0; bsel = 0; ssel = 0;
      for (int b = 0; b < BANKS; b++)
        for (int s = 0; s < SUBARRAYS; s++)
          if (arr_gbl_drive[b][s]) begin
            nb++; bsel = b; ssel = s;
          end
      if (nb != 1 || !arr_active[bsel][ssel]) begin
        errors++;
        $display("DRAM model: column command with %0d subarrays on the global bitlines", nb);
      end else begin
        longint key;
        key = ((longint'(bsel) * ROWS + longint'(ssel) * (ROWS / SUBARRAYS) +
                longint'(arr_row[bsel][ssel])) * COLS) + longint'(arr_col);
        if (arr_we) mem[key] = arr_wdata;
        else d = mem.exists(key) ? mem[key] : init_data(key);
      end
    end
    sr_v <= {sr_v[T_CL-2:0], is_rd};
    sr_d <= {sr_d[T_CL-2:0], d};
  end

endmodule
