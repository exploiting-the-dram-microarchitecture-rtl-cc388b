// tb_salp_ctrl: random traffic through the MASA controller, checked on the
// DRAM command bus by an independent protocol monitor and on the response
// side by a reference memory.
// The monitor keeps its own subarray state and checks every command: ACT only
// to a closed subarray, tRP after that subarray's PRECHARGE and tRRD after
// any ACT; PRE only to an open subarray and tRAS after its ACT; SA_SEL only
// to an open subarray; READ/WRITE only to the open, designated subarray,
// tRCD after its ACT, tSA after SA_SEL and tCCD after the previous column
// command.  A small data model answers READs T_CL cycles later from the row
// the monitor says is open.
module tb_salp_ctrl;
  import salp_pkg::*;
  localparam int unsigned BANKS = 8, SUBARRAYS = 8, ROWS = 32768, COLS = 128;
  localparam int unsigned DATA_W = 64, ID_W = 8, LROW = ROWS / SUBARRAYS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic req_valid, req_ready, req_we;
  logic [2:0] req_bank;
  logic [14:0] req_row;
  logic [6:0] req_col;
  logic [ID_W-1:0] req_id;
  logic [DATA_W-1:0] req_wdata;
  logic wr_done, rd_resp;
  logic [ID_W-1:0] wr_done_id, rd_resp_id;
  logic [DATA_W-1:0] rd_resp_data;
  cmd_e dram_cmd;
  logic [2:0] dram_bank, dram_sa;
  logic [14:0] dram_row;
  logic [6:0] dram_col;
  logic [DATA_W-1:0] dram_wdata;
  logic dram_rvalid;
  logic [DATA_W-1:0] dram_rdata;
  logic [3:0] q_count;

  salp_ctrl #(.DATA_W(DATA_W)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic viol(bit bad, string what);
    checks++;
    if (bad) begin
      failures++;
      $display("cycle %0d: %s (bank %0d sa %0d)", cyc, what, dram_bank, dram_sa);
    end
  endtask

  // ---- protocol monitor and data model -------------------------------------
  bit   m_open [BANKS][SUBARRAYS];
  int   m_row  [BANKS][SUBARRAYS];
  int   t_act  [BANKS][SUBARRAYS];
  int   t_pre  [BANKS][SUBARRAYS];
  int   m_des  [BANKS];
  int   t_sel  [BANKS];
  int   t_lact = -1000, t_lcol = -1000;
  logic [DATA_W-1:0] mem [longint];
  logic [T_CL_DEF-1:0] sr_v = '0;
  logic [T_CL_DEF-1:0][DATA_W-1:0] sr_d;
  assign dram_rvalid = sr_v[T_CL_DEF-1];
  assign dram_rdata  = sr_d[T_CL_DEF-1];

  function automatic logic [DATA_W-1:0] init_data(longint key);
    return {32'(key * 13), 32'(key) ^ 32'h1234_5678};
  endfunction

  always @(posedge clk) begin
    logic [DATA_W-1:0] d;
    int b, s;
    d = '0;
    b = int'(dram_bank);
    s = int'(dram_sa);
    if (rst_n) case (dram_cmd)
      CMD_ACT: begin
        viol(m_open[b][s], "ACT to an open subarray");
        viol(cyc - t_pre[b][s] < int'(T_RP_DEF), "tRP violated");
        viol(cyc - t_lact < int'(T_RRD_DEF), "tRRD violated");
        viol(int'(dram_row) / LROW != s, "ACT row not in the addressed subarray");
        m_open[b][s] = 1; m_row[b][s] = int'(dram_row) % LROW; t_act[b][s] = cyc; t_lact = cyc;
      end
      CMD_PRE: begin
        viol(!m_open[b][s], "PRE to a closed subarray");
        viol(cyc - t_act[b][s] < int'(T_RAS_DEF), "tRAS violated");
        m_open[b][s] = 0; t_pre[b][s] = cyc;
        if (m_des[b] == s) m_des[b] = -1;
      end
      CMD_SASEL: begin
        viol(!m_open[b][s], "SA_SEL to a closed subarray");
        m_des[b] = s; t_sel[b] = cyc;
      end
      CMD_RD, CMD_WR: begin
        longint key;
        viol(m_des[b] != s || !m_open[b][s], "column command to a non-designated subarray");
        viol(cyc - t_act[b][s] < int'(T_RCD_DEF), "tRCD violated");
        viol(cyc - t_sel[b] < int'(T_SA_DEF), "tSA violated");
        viol(cyc - t_lcol < int'(T_CCD_DEF), "tCCD violated");
        t_lcol = cyc;
        key = (longint'(b) * ROWS + longint'(s) * LROW + longint'(m_row[b][s])) * COLS +
              longint'(dram_col);
        if (dram_cmd == CMD_WR) mem[key] = dram_wdata;
        else d = mem.exists(key) ? mem[key] : init_data(key);
      end
      default: ;
    endcase
    sr_v <= {sr_v[T_CL_DEF-2:0], dram_cmd == CMD_RD};
    sr_d <= {sr_d[T_CL_DEF-2:0], d};
  end

  // ---- reference memory ----------------------------------------------------
  logic [DATA_W-1:0] ref_mem [longint];
  logic [DATA_W-1:0] exp_rd [int];
  int outstanding = 0, n_rd = 0, n_wr = 0;

  always @(posedge clk) begin
    if (rst_n && wr_done) begin outstanding--; n_wr++; end
    if (rst_n && rd_resp) begin
      checks++;
      n_rd++;
      if (!exp_rd.exists(int'(rd_resp_id)) || rd_resp_data !== exp_rd[int'(rd_resp_id)]) begin
        failures++;
        $display("read id %0d: wrong data", rd_resp_id);
      end
      exp_rd.delete(int'(rd_resp_id));
      outstanding--;
    end
  end

  initial begin
    for (int b = 0; b < BANKS; b++) begin
      m_des[b] = -1; t_sel[b] = -1000;
      for (int s = 0; s < SUBARRAYS; s++) begin
        m_open[b][s] = 0; t_act[b][s] = -1000; t_pre[b][s] = -1000;
      end
    end
    req_valid = 0; req_we = 0; req_bank = '0; req_row = '0; req_col = '0; req_id = '0;
    req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      int bank, row, col;
      longint key;
      bank = $urandom_range(2);
      row  = $urandom_range(SUBARRAYS - 1) * LROW + 8 * $urandom_range(2);
      col  = $urandom_range(3);
      key  = (longint'(bank) * ROWS + longint'(row)) * COLS + longint'(col);
      @(negedge clk);
      req_valid = 1; req_we = ($urandom_range(1) == 1); req_bank = 3'(bank);
      req_row = 15'(row); req_col = 7'(col); req_id = 8'(n); req_wdata = {$urandom, $urandom};
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      if (req_we) ref_mem[key] = req_wdata;
      else exp_rd[n % 256] = ref_mem.exists(key) ? ref_mem[key] : init_data(key);
      outstanding++;
      @(posedge clk);
      #1;
      req_valid = 0;
    end
    while (outstanding != 0) @(posedge clk);
    checks++;
    if (n_rd + n_wr != 1500 || n_rd < 100) begin
      failures++;
      $display("responses: %0d reads %0d writes", n_rd, n_wr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
