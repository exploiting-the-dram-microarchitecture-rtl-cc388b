// subarray_latch: the per-subarray state that SALP-2 and MASA add to a DRAM
// bank.
//
// An unmodified bank holds the row address of its one open row in a single
// global row-address latch.  SALP-2 moves that latch into every subarray so
// that two subarrays can keep different wordlines raised at once; MASA adds
// a one-bit "designated" latch per subarray that records whether this
// subarray's local row buffer is the one that drives the global bitlines on
// the next column command.
//
// Interface: `act` latches `row_in` and raises the wordline (active = 1);
// `pre` lowers it and also clears the designated bit.  `sel` sets the
// designated bit (SA_SEL to this subarray) and `desel` clears it (SA_SEL to
// another subarray of the bank).  All updates take effect on the rising clock
// edge after the command cycle.  Reset clears everything.  When `act` and
// `pre` arrive together `act` wins; the bank never sends both.
module subarray_latch #(
  parameter int unsigned LROW_W = 12   // local row address width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              act,
  input  logic              pre,
  input  logic              sel,
  input  logic              desel,
  input  logic [LROW_W-1:0] row_in,
  output logic              active,
  output logic [LROW_W-1:0] row,
  output logic              designated
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      row    <= '0;
    end else if (act) begin
      active <= 1'b1;
      row    <= row_in;
    end else if (pre) begin
      active <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          designated <= 1'b0;
    else if (pre)        designated <= 1'b0;
    else if (sel)        designated <= 1'b1;
    else if (desel)      designated <= 1'b0;
  end

endmodule
