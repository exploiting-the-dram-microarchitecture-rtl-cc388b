// tb_subarray_latch: drives random ACT / PRE / SA_SEL strobes into one
// subarray latch and compares active, latched row and designated bit with a
// reference model every cycle.
module tb_subarray_latch;
  localparam int unsigned LROW_W = 12;
  logic clk = 0, rst_n = 0;
  logic act, pre, sel, desel;
  logic [LROW_W-1:0] row_in, row;
  logic active, designated;
  int checks = 0, failures = 0;
  logic m_active, m_desig;
  logic [LROW_W-1:0] m_row;

  subarray_latch #(.LROW_W(LROW_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {act, pre, sel, desel} = '0;
    row_in = '0;
    m_active = 0; m_desig = 0; m_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      act   = ($urandom_range(3) == 0);
      pre   = !act && ($urandom_range(3) == 0);
      sel   = ($urandom_range(3) == 0);
      desel = !sel && ($urandom_range(3) == 0);
      row_in = LROW_W'($urandom);
      @(posedge clk);
      if (act) begin m_active = 1; m_row = row_in; end
      else if (pre) m_active = 0;
      if (pre) m_desig = 0; else if (sel) m_desig = 1; else if (desel) m_desig = 0;
      #1;
      checks++;
      if (active !== m_active || designated !== m_desig || (m_active && row !== m_row)) begin
        failures++;
        $display("mismatch at %0d: active %b/%b desig %b/%b row %h/%h", n, active, m_active,
                 designated, m_desig, row, m_row);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
