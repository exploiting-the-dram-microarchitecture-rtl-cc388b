// tb_salp_scheduler: directed checks of the command choice of the MASA
// scheduler.  The bank state and timing inputs are driven by the test, so
// each case sets up one situation and checks the single command chosen:
// ACT for a closed subarray, SA_SEL before a hit on a non-designated one, the
// column command when designated and timing allows, nothing while tRCD runs,
// an ACT of a younger request overlapping an older one's wait, a PRECHARGE
// or SA_SEL held back because an older request still hits the row, and
// oldest-first choice between two legal commands.
module tb_salp_scheduler;
  import salp_pkg::*;
  localparam int unsigned BANKS = 8, SUBARRAYS = 8, ROWS = 32768, COLS = 128;
  localparam int unsigned DATA_W = 32, QDEPTH = 8, ID_W = 8;
  localparam int unsigned LROW_W = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, req_we;
  logic [2:0] req_bank;
  logic [14:0] req_row;
  logic [6:0] req_col;
  logic [ID_W-1:0] req_id;
  logic [DATA_W-1:0] req_wdata;
  logic [BANKS-1:0][SUBARRAYS-1:0]             open, act_ok, col_ok, pre_ok;
  logic [BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] open_row;
  logic [BANKS-1:0]                            desig_valid, sel_ok;
  logic [BANKS-1:0][2:0]                       desig_sa;
  logic [BANKS-1:0][3:0]                       n_open;
  logic rrd_ok, rd_ok, wr_ok;
  cmd_e cmd;
  logic [2:0] cmd_bank, cmd_sa;
  logic [LROW_W-1:0] cmd_lrow;
  logic [6:0] cmd_col;
  logic [ID_W-1:0] cmd_id;
  logic [DATA_W-1:0] cmd_wdata;
  logic [3:0] q_count;

  salp_scheduler #(.MODE(MODE_MASA), .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS),
                   .COLS(COLS), .DATA_W(DATA_W), .QDEPTH(QDEPTH), .ID_W(ID_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic enq(bit we, int bank, int sa, int lrow, int col, int id);
    @(negedge clk);
    req_valid = 1; req_we = we; req_bank = 3'(bank); req_row = {3'(sa), 12'(lrow)};
    req_col = 7'(col); req_id = 8'(id); req_wdata = 32'(id * 3);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic set_open(int b, int s, int lrow);
    open[b][s] = 1; open_row[b][s] = 12'(lrow);
    n_open[b] = n_open[b] + 1;
  endtask

  task automatic expect_cmd(string name, cmd_e c, int sa, int id);
    #1;
    checks++;
    if (cmd !== c || (c != CMD_NOP && int'(cmd_sa) != sa) ||
        ((c == CMD_RD || c == CMD_WR) && int'(cmd_id) != id)) begin
      failures++;
      $display("%s: got %s sa %0d id %0d, expected %s sa %0d id %0d", name, cmd.name(), cmd_sa,
               cmd_id, c.name(), sa, id);
    end
  endtask

  task automatic reset_state();
    open = '0; open_row = '0; desig_valid = '0; desig_sa = '0; n_open = '0;
    act_ok = '1; col_ok = '1; pre_ok = '1; sel_ok = '1;
    rrd_ok = 1; rd_ok = 1; wr_ok = 1;
  endtask

  initial begin
    req_valid = 0; req_we = 0; req_bank = '0; req_row = '0; req_col = '0; req_id = '0;
    req_wdata = '0;
    reset_state();
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1-3: one read through ACT, SA_SEL, READ
    enq(0, 0, 0, 5, 1, 10);
    expect_cmd("closed -> ACT", CMD_ACT, 0, 0);
    checks++;
    if (cmd_lrow !== 12'd5 || cmd_bank !== 3'd0) begin failures++; $display("ACT address wrong"); end
    set_open(0, 0, 5);
    col_ok[0][0] = 0;
    expect_cmd("hit, not designated -> SA_SEL", CMD_SASEL, 0, 0);
    desig_valid[0] = 1; desig_sa[0] = 0;
    expect_cmd("designated, tRCD running -> none", CMD_NOP, 0, 0);
    // 4: a younger request to another subarray activates meanwhile
    enq(0, 0, 1, 7, 2, 11);
    expect_cmd("younger to closed subarray overlaps -> ACT", CMD_ACT, 1, 0);
    // 5: a younger conflict in subarray 0 must not precharge it
    enq(1, 0, 0, 9, 3, 12);
    rrd_ok = 0;
    expect_cmd("conflict behind older hit -> held", CMD_NOP, 0, 0);
    // 6: a younger hit on subarray 1 must not steal the designation
    set_open(0, 1, 7);
    col_ok[0][1] = 0;
    expect_cmd("SA_SEL behind older hit -> held", CMD_NOP, 0, 0);
    // tRCD done: the oldest request reads
    col_ok[0][0] = 1;
    expect_cmd("designated and ready -> READ", CMD_RD, 0, 10);
    @(negedge clk);
    // now the oldest is the hit on subarray 1: SA_SEL before the conflict's PRE
    expect_cmd("oldest first -> SA_SEL to subarray 1", CMD_SASEL, 1, 0);
    desig_sa[0] = 1; col_ok[0][1] = 1;
    expect_cmd("READ subarray 1", CMD_RD, 1, 11);
    @(negedge clk);
    open[0][1] = 0; n_open[0] = 1;
    expect_cmd("conflict, nothing older -> PRE", CMD_PRE, 0, 0);
    pre_ok[0][0] = 0;
    expect_cmd("tRAS running -> none", CMD_NOP, 0, 0);
    // 7: oldest-first between two legal commands, other bank
    enq(0, 3, 2, 1, 0, 13);
    rrd_ok = 1;
    expect_cmd("older waits on tRAS, younger activates", CMD_ACT, 2, 0);
    pre_ok[0][0] = 1;
    expect_cmd("older PRE (bank 0) beats younger ACT", CMD_PRE, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
