// tb_salp_timing: directed cycle-count checks of the timing counters.
// Each test issues one command, then counts the cycles until the relevant
// *_ok flag rises and compares with the DDR3 values the design uses:
// tRCD, tRAS, tRP (only on the same subarray: an ACTIVATE to another subarray
// of the same bank is allowed in the very next cycle), write recovery
// (tCWL + tBL + tWR), tRTP, tCCD, tRRD, tSA and the write-to-read and
// read-to-write turnarounds.
module tb_salp_timing;
  import salp_pkg::*;
  localparam int unsigned BANKS = 8, SUBARRAYS = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cmd_e cmd;
  logic [2:0] bank, sa;
  logic [BANKS-1:0][SUBARRAYS-1:0] act_ok, col_ok, pre_ok;
  logic [BANKS-1:0] sel_ok;
  logic rrd_ok, rd_ok, wr_ok;

  salp_timing #(.BANKS(BANKS), .SUBARRAYS(SUBARRAYS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue one command at the next negedge, held for one cycle
  task automatic issue(cmd_e c, int b, int s);
    @(negedge clk);
    cmd = c; bank = 3'(b); sa = 3'(s);
    @(negedge clk);
    cmd = CMD_NOP;
  endtask

  // cycles from the command (cycle 0) until `which` is true; samples at negedges
  task automatic expect_after(string name, int which, int b, int s, int exp);
    int n = 1;
    logic f;
    forever begin
      case (which)
        0: f = act_ok[b][s];
        1: f = col_ok[b][s];
        2: f = pre_ok[b][s];
        3: f = rrd_ok;
        4: f = rd_ok;
        5: f = wr_ok;
        default: f = sel_ok[b];
      endcase
      if (f || n > 60) break;
      @(negedge clk);
      n++;
    end
    checks++;
    if (n != exp) begin
      failures++;
      $display("%s: ready after %0d cycles, expected %0d", name, n, exp);
    end
  endtask

  task automatic settle();
    repeat (40) @(negedge clk);
  endtask

  initial begin
    cmd = CMD_NOP; bank = '0; sa = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    settle();
    issue(CMD_ACT, 1, 2);
    expect_after("tRCD", 1, 1, 2, T_RCD_DEF);
    settle();
    issue(CMD_ACT, 1, 2);
    expect_after("tRAS", 2, 1, 2, T_RAS_DEF);
    settle();
    issue(CMD_ACT, 1, 2);
    expect_after("tRRD", 3, 0, 0, T_RRD_DEF);
    settle();
    issue(CMD_PRE, 3, 4);
    expect_after("tRP other subarray", 0, 3, 5, 1);
    expect_after("tRP other bank", 0, 2, 4, 1);
    settle();
    issue(CMD_PRE, 3, 4);
    expect_after("tRP same subarray", 0, 3, 4, T_RP_DEF);
    settle();
    issue(CMD_WR, 5, 6);
    expect_after("write recovery", 2, 5, 6, T_CWL_DEF + T_BL_DEF + T_WR_DEF);
    settle();
    issue(CMD_WR, 5, 6);
    expect_after("write recovery other subarray", 2, 5, 7, 1);
    settle();
    issue(CMD_RD, 5, 6);
    expect_after("tRTP", 2, 5, 6, T_RTP_DEF);
    settle();
    issue(CMD_RD, 5, 6);
    expect_after("tCCD read-read", 4, 0, 0, T_CCD_DEF);
    settle();
    issue(CMD_WR, 5, 6);
    expect_after("write-to-read", 4, 0, 0, T_CWL_DEF + T_BL_DEF + 4);
    settle();
    issue(CMD_RD, 5, 6);
    expect_after("read-to-write", 5, 0, 0, T_CL_DEF + T_BL_DEF + 2 - T_CWL_DEF);
    settle();
    issue(CMD_SASEL, 6, 1);
    expect_after("tSA", 6, 6, 0, T_SA_DEF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
