// salp_tb_harness: end-to-end test bench body for salp_top in one MODE.
//
// It connects salp_top to the behavioural DRAM core (dram_array_model) and
// runs two phases:
//  1. the four-request example of the timeline figures: WRITE row 0 of
//     subarray 0, WRITE a row of subarray 1, READ the first row, READ the
//     second, all in bank 0, issued back to back.  `t_example` is the number
//     of cycles from the first request to the last response.
//  2. N_RAND random requests over two banks, all subarrays, two rows per
//     subarray and four columns, 40 % writes, so that row hits, row
//     conflicts, many activated subarrays and full-queue stalls all occur.
// Every read response is compared with a reference memory updated in
// request order.  The mechanisms are counted from the command bus and the
// bank state; `done` rises at the end.
module salp_tb_harness
  import salp_pkg::*;
#(
  parameter salp_mode_e  MODE   = MODE_MASA,
  parameter int unsigned N_RAND = 1000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   t_example,
  output int   n_act, n_pre, n_sasel, n_col, n_stall,
  output int   n_multi2, n_multi3, n_act_before_pre, n_fast_act
);
  localparam int unsigned BANKS = BANKS_DEF, SUBARRAYS = SUBARRAYS_DEF, ROWS = ROWS_DEF;
  localparam int unsigned COLS = COLS_DEF, DATA_W = DATA_W_DEF, ID_W = ID_W_DEF;
  localparam int unsigned BANK_W = $clog2(BANKS), SA_W = $clog2(SUBARRAYS);
  localparam int unsigned ROW_W = $clog2(ROWS), COL_W = $clog2(COLS);
  localparam int unsigned LROW_W = $clog2(ROWS / SUBARRAYS);
  localparam int unsigned QC_W = $clog2(QDEPTH_DEF + 1);

  logic              req_valid, req_ready, req_we;
  logic [BANK_W-1:0] req_bank;
  logic [ROW_W-1:0]  req_row;
  logic [COL_W-1:0]  req_col;
  logic [ID_W-1:0]   req_id;
  logic [DATA_W-1:0] req_wdata;
  logic              wr_done, rd_resp;
  logic [ID_W-1:0]   wr_done_id, rd_resp_id;
  logic [DATA_W-1:0] rd_resp_data;
  logic [BANKS-1:0][SUBARRAYS-1:0]             arr_active, arr_gbl_drive, arr_designated;
  logic [BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] arr_row;
  logic [COL_W-1:0]  arr_col;
  logic              arr_we, arr_rvalid;
  logic [DATA_W-1:0] arr_wdata, arr_rdata;
  cmd_e              bus_cmd;
  logic [BANK_W-1:0] bus_bank;
  logic [SA_W-1:0]   bus_sa;
  logic [QC_W-1:0]   q_count;
  logic              bank_err;
  int                model_errors;

  salp_top #(.MODE(MODE)) dut (.*);

  dram_array_model u_model (
    .clk, .arr_active, .arr_row, .arr_gbl_drive, .arr_col, .arr_we, .arr_wdata, .bus_cmd,
    .arr_rvalid, .arr_rdata, .errors(model_errors)
  );

  function automatic logic [DATA_W-1:0] init_data(longint key);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = 32'(key * (i + 7)) ^ 32'hA5C3_0F17;
    return d;
  endfunction

  // ---- reference memory and outstanding requests ---------------------------
  logic [DATA_W-1:0] ref_mem [longint];
  logic [DATA_W-1:0] exp_rd [int];
  bit                is_wr [int];
  int                outstanding;
  int                cyc;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic send(bit we, int bank, int row, int col, int id);
    longint key;
    logic [DATA_W-1:0] wd;
    key = (longint'(bank) * ROWS + longint'(row)) * COLS + longint'(col);
    for (int i = 0; i < DATA_W / 32; i++) wd[i*32 +: 32] = $urandom;
    @(negedge clk);
    req_valid = 1; req_we = we; req_bank = BANK_W'(bank); req_row = ROW_W'(row);
    req_col = COL_W'(col); req_id = ID_W'(id); req_wdata = wd;
    #1;
    while (!req_ready) begin
      n_stall++;
      @(negedge clk);
      #1;
    end
    if (we) ref_mem[key] = wd;
    else exp_rd[id] = ref_mem.exists(key) ? ref_mem[key] : init_data(key);
    is_wr[id] = we;
    outstanding++;
    @(posedge clk);
    #1;
    req_valid = 0;
  endtask

  // responses
  always @(posedge clk) begin
    if (rst_n && wr_done) begin
      checks++;
      if (!is_wr.exists(int'(wr_done_id)) || !is_wr[int'(wr_done_id)]) begin
        failures++;
        $display("mode %0d: unexpected write completion id %0d", MODE, wr_done_id);
      end
      is_wr.delete(int'(wr_done_id));
      outstanding--;
    end
    if (rst_n && rd_resp) begin
      checks++;
      if (!exp_rd.exists(int'(rd_resp_id)) || rd_resp_data !== exp_rd[int'(rd_resp_id)]) begin
        failures++;
        $display("mode %0d: read id %0d returned wrong data", MODE, rd_resp_id);
      end
      exp_rd.delete(int'(rd_resp_id));
      is_wr.delete(int'(rd_resp_id));
      outstanding--;
    end
    if (rst_n && (bank_err || model_errors != 0)) begin
      failures++;
      $display("mode %0d: illegal command reached a bank", MODE);
    end
  end

  // ---- mechanism counters --------------------------------------------------
  int last_pre [BANKS];
  always @(posedge clk) begin
    if (rst_n) begin
      for (int b = 0; b < BANKS; b++) begin
        int c;
        c = 0;
        for (int s = 0; s < SUBARRAYS; s++) c += int'(arr_active[b][s]);
        if (c >= 2) n_multi2++;
        if (c >= 3) n_multi3++;
      end
      case (bus_cmd)
        CMD_ACT: begin
          n_act++;
          if (arr_active[bus_bank] != '0) n_act_before_pre++;
          if (cyc - last_pre[bus_bank] < int'(T_RP_DEF)) n_fast_act++;
        end
        CMD_PRE: begin
          n_pre++;
          last_pre[bus_bank] = cyc;
        end
        CMD_SASEL: n_sasel++;
        CMD_RD, CMD_WR: n_col++;
        default: ;
      endcase
    end
  end

  initial begin
    int id, t0;
    {n_act, n_pre, n_sasel, n_col, n_stall} = '0;
    {n_multi2, n_multi3, n_act_before_pre, n_fast_act} = '0;
    checks = 0; failures = 0; outstanding = 0; cyc = 0; done = 0; t_example = 0;
    for (int b = 0; b < BANKS; b++) last_pre[b] = -1000;
    req_valid = 0; req_we = 0; req_bank = '0; req_row = '0; req_col = '0; req_id = '0;
    req_wdata = '0;
    @(posedge rst_n);
    repeat (3) @(posedge clk);
    // phase 1: the four-request example
    t0 = cyc;
    send(1, 0, 0, 0, 1);
    send(1, 0, ROWS / SUBARRAYS, 0, 2);
    send(0, 0, 0, 0, 3);
    send(0, 0, ROWS / SUBARRAYS, 0, 4);
    while (outstanding != 0) @(posedge clk);
    t_example = cyc - t0;
    // phase 2: random traffic
    id = 8;
    for (int n = 0; n < int'(N_RAND); n++) begin
      int sa, row;
      sa  = $urandom_range(SUBARRAYS - 1);
      row = sa * (ROWS / SUBARRAYS) + 16 * $urandom_range(1);
      send($urandom_range(9) < 4, $urandom_range(1), row, $urandom_range(3), id);
      id = (id + 1) % 256;
    end
    while (outstanding != 0) @(posedge clk);
    repeat (T_CL_DEF + 2) @(posedge clk);
    checks++;
    if (exp_rd.size() != 0 || is_wr.size() != 0) begin
      failures++;
      $display("mode %0d: %0d requests never answered", MODE, exp_rd.size() + is_wr.size());
    end
    done = 1;
  end

endmodule
