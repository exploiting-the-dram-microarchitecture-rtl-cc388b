// tb_masa_bank: checks the bank peripheral logic in all three modes.
// For each mode a random but legal command stream (ACT to a closed subarray,
// PRE, SA_SEL, READ/WRITE) is driven and a reference model of the expected
// latch contents is compared every cycle with sa_active, sa_row and
// sa_designated, and, on each column command, with gbl_drive: in MASA it must
// be the designated subarray, in SALP-1/SALP-2 the single activated one.
module tb_masa_bank;
  import salp_pkg::*;
  localparam int unsigned SUBARRAYS = 8;
  localparam int unsigned ROWS      = 32768;
  localparam int unsigned ROW_W  = $clog2(ROWS);
  localparam int unsigned SA_W   = $clog2(SUBARRAYS);
  localparam int unsigned LROW_W = $clog2(ROWS / SUBARRAYS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cmd_e cmd [3];
  logic [ROW_W-1:0] row [3];
  logic [SA_W-1:0]  sa [3];
  logic [SUBARRAYS-1:0] act_v [3], des_v [3], gbl [3];
  logic [SUBARRAYS-1:0][LROW_W-1:0] rows [3];
  logic [2:0] aerr, cerr, serr;

  masa_bank #(.MODE(MODE_SALP1), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS)) u1 (
    .clk, .rst_n, .cmd(cmd[0]), .row(row[0]), .sa(sa[0]), .sa_active(act_v[0]), .sa_row(rows[0]),
    .sa_designated(des_v[0]), .gbl_drive(gbl[0]), .act_err(aerr[0]), .col_err(cerr[0]), .sel_err(serr[0]));
  masa_bank #(.MODE(MODE_SALP2), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS)) u2 (
    .clk, .rst_n, .cmd(cmd[1]), .row(row[1]), .sa(sa[1]), .sa_active(act_v[1]), .sa_row(rows[1]),
    .sa_designated(des_v[1]), .gbl_drive(gbl[1]), .act_err(aerr[1]), .col_err(cerr[1]), .sel_err(serr[1]));
  masa_bank #(.MODE(MODE_MASA), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS)) u3 (
    .clk, .rst_n, .cmd(cmd[2]), .row(row[2]), .sa(sa[2]), .sa_active(act_v[2]), .sa_row(rows[2]),
    .sa_designated(des_v[2]), .gbl_drive(gbl[2]), .act_err(aerr[2]), .col_err(cerr[2]), .sel_err(serr[2]));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  logic [SUBARRAYS-1:0] m_act, m_des;
  logic [LROW_W-1:0]    m_row [SUBARRAYS];
  int n_col [3];

  function automatic int count(logic [SUBARRAYS-1:0] v);
    int c = 0;
    for (int i = 0; i < SUBARRAYS; i++) c += int'(v[i]);
    return c;
  endfunction

  function automatic int pick(logic [SUBARRAYS-1:0] v, bit want);
    int c [$];
    for (int i = 0; i < SUBARRAYS; i++) if (v[i] == want) c.push_back(i);
    if (c.size() == 0) return -1;
    return c[$urandom_range(c.size() - 1)];
  endfunction

  task automatic run_mode(int m);
    logic [SUBARRAYS-1:0] exp_gbl;
    m_act = '0; m_des = '0;
    for (int n = 0; n < 2000; n++) begin
      int r, s, lim;
      @(negedge clk);
      cmd[m] = CMD_NOP;
      exp_gbl = '0;
      lim = (m == 0) ? 1 : (m == 1) ? 2 : SUBARRAYS;
      r = $urandom_range(9);
      if (r < 3 && count(m_act) < lim) begin
        s = pick(m_act, 1'b0);
        cmd[m] = CMD_ACT;
        row[m] = {SA_W'(s), LROW_W'($urandom)};
        m_act[s] = 1'b1;
        m_row[s] = row[m][LROW_W-1:0];
      end else if (r < 5 && count(m_act) > 0) begin
        s = pick(m_act, 1'b1);
        cmd[m] = CMD_PRE;
        sa[m] = SA_W'(s);
        if (m == 0) begin m_act = '0; m_des = '0; end
        else begin m_act[s] = 1'b0; m_des[s] = 1'b0; end
      end else if (r < 7 && m == 2 && count(m_act) > 0) begin
        s = pick(m_act, 1'b1);
        cmd[m] = CMD_SASEL;
        sa[m] = SA_W'(s);
        m_des = '0;
        m_des[s] = 1'b1;
      end else if ((m == 2 && (m_des & m_act) != 0) || (m != 2 && count(m_act) == 1)) begin
        cmd[m] = ($urandom_range(1) != 0) ? CMD_RD : CMD_WR;
        exp_gbl = (m == 2) ? (m_des & m_act) : m_act;
        n_col[m]++;
      end
      #1;
      if (cmd[m] == CMD_RD || cmd[m] == CMD_WR) begin
        checks++;
        if (gbl[m] !== exp_gbl || cerr[m]) begin
          failures++;
          $display("mode %0d: gbl_drive %b expected %b", m, gbl[m], exp_gbl);
        end
      end
      @(posedge clk);
      #1;
      checks++;
      if (act_v[m] !== m_act || (m == 2 && des_v[m] !== m_des)) begin
        failures++;
        $display("mode %0d cycle %0d: active %b/%b designated %b/%b", m, n, act_v[m], m_act,
                 des_v[m], m_des);
      end
      for (int i = 0; i < SUBARRAYS; i++)
        if (m_act[i]) begin
          checks++;
          if (rows[m][i] !== m_row[i]) begin
            failures++;
            $display("mode %0d: subarray %0d row %h expected %h", m, i, rows[m][i], m_row[i]);
          end
        end
    end
    @(negedge clk);
    cmd[m] = CMD_NOP;
  endtask

  initial begin
    for (int m = 0; m < 3; m++) begin cmd[m] = CMD_NOP; row[m] = '0; sa[m] = '0; n_col[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) run_mode(m);
    for (int m = 0; m < 3; m++) begin
      checks++;
      if (n_col[m] < 10) begin failures++; $display("mode %0d: too few column commands", m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
