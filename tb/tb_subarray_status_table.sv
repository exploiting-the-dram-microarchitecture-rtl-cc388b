// tb_subarray_status_table: feeds one random command stream to a MASA table
// and a SALP-1 table and compares every cycle with a reference model:
// activated subarrays, their rows, the designated subarray and the per-bank
// count.  In SALP-1 a PRECHARGE closes the whole bank.
module tb_subarray_status_table;
  import salp_pkg::*;
  localparam int unsigned BANKS = 8, SUBARRAYS = 8, LROW_W = 12;
  localparam int unsigned BANK_W = 3, SA_W = 3, CNT_W = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cmd_e cmd;
  logic [BANK_W-1:0] bank;
  logic [SA_W-1:0]   sa;
  logic [LROW_W-1:0] lrow;
  logic [1:0][BANKS-1:0][SUBARRAYS-1:0]             open;
  logic [1:0][BANKS-1:0][SUBARRAYS-1:0][LROW_W-1:0] open_row;
  logic [1:0][BANKS-1:0]                            desig_valid;
  logic [1:0][BANKS-1:0][SA_W-1:0]                  desig_sa;
  logic [1:0][BANKS-1:0][CNT_W-1:0]                 n_open;

  subarray_status_table #(.MODE(MODE_MASA), .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .LROW_W(LROW_W)) u_m (
    .clk, .rst_n, .cmd, .bank, .sa, .lrow, .open(open[0]), .open_row(open_row[0]),
    .desig_valid(desig_valid[0]), .desig_sa(desig_sa[0]), .n_open(n_open[0]));
  subarray_status_table #(.MODE(MODE_SALP1), .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .LROW_W(LROW_W)) u_1 (
    .clk, .rst_n, .cmd, .bank, .sa, .lrow, .open(open[1]), .open_row(open_row[1]),
    .desig_valid(desig_valid[1]), .desig_sa(desig_sa[1]), .n_open(n_open[1]));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit             m_open [2][BANKS][SUBARRAYS];
  logic [LROW_W-1:0] m_row [2][BANKS][SUBARRAYS];
  bit             m_dv [2][BANKS];
  int             m_ds [2][BANKS];

  initial begin
    cmd = CMD_NOP; bank = '0; sa = '0; lrow = '0;
    for (int t = 0; t < 2; t++)
      for (int b = 0; b < BANKS; b++) begin
        m_dv[t][b] = 0; m_ds[t][b] = 0;
        for (int s = 0; s < SUBARRAYS; s++) m_open[t][b][s] = 0;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      case ($urandom_range(5))
        0, 1:    cmd = CMD_ACT;
        2:       cmd = CMD_PRE;
        3:       cmd = CMD_SASEL;
        4:       cmd = CMD_RD;
        default: cmd = CMD_NOP;
      endcase
      bank = BANK_W'($urandom);
      sa   = SA_W'($urandom);
      lrow = LROW_W'($urandom);
      for (int t = 0; t < 2; t++) begin
        case (cmd)
          CMD_ACT: begin m_open[t][bank][sa] = 1; m_row[t][bank][sa] = lrow; end
          CMD_PRE: begin
            if (t == 1) for (int s = 0; s < SUBARRAYS; s++) m_open[t][bank][s] = 0;
            else m_open[t][bank][sa] = 0;
            if (t == 1 || m_ds[t][bank] == int'(sa)) m_dv[t][bank] = 0;
          end
          CMD_SASEL: begin m_dv[t][bank] = 1; m_ds[t][bank] = int'(sa); end
          default: ;
        endcase
      end
      @(posedge clk);
      #1;
      for (int t = 0; t < 2; t++)
        for (int b = 0; b < BANKS; b++) begin
          int c;
          c = 0;
          for (int s = 0; s < SUBARRAYS; s++) begin
            c += int'(m_open[t][b][s]);
            checks++;
            if (open[t][b][s] !== m_open[t][b][s] ||
                (m_open[t][b][s] && open_row[t][b][s] !== m_row[t][b][s])) begin
              failures++;
              $display("table %0d bank %0d sa %0d: open %b row %h", t, b, s, open[t][b][s], open_row[t][b][s]);
            end
          end
          checks++;
          if (int'(n_open[t][b]) != c || desig_valid[t][b] !== m_dv[t][b] ||
              (m_dv[t][b] && int'(desig_sa[t][b]) != m_ds[t][b])) begin
            failures++;
            $display("table %0d bank %0d: count %0d/%0d designated %b:%0d", t, b, n_open[t][b], c,
                     desig_valid[t][b], desig_sa[t][b]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
