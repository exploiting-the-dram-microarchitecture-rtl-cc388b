// tb_salp_modes: runs the end-to-end harness once per mechanism (SALP-1,
// SALP-2, MASA) and checks what distinguishes them:
//  * all three return correct data and never send a bank an illegal command;
//  * SALP-1 activates a subarray less than tRP after precharging another
//    subarray of the same bank, but never has two subarrays of a bank open;
//  * SALP-2 activates a subarray while another of the bank is still open
//    (ACTIVATE before PRECHARGE), but never has three open;
//  * MASA keeps three or more open and issues SA_SEL;
//  * MASA needs fewer ACTIVATEs than the other two (fewer row-buffer
//    misses);
//  * the four-request example finishes faster with each step:
//    MASA < SALP-2 < SALP-1, as the timelines show.
module tb_salp_modes;
  import salp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0] done;
  int ck [3], fl [3], tex [3], act [3], pre [3], sel [3], col [3], stall [3];
  int m2 [3], m3 [3], abp [3], fast [3];

  salp_tb_harness #(.MODE(MODE_SALP1), .N_RAND(600)) h1 (.clk, .rst_n, .done(done[0]),
    .checks(ck[0]), .failures(fl[0]), .t_example(tex[0]), .n_act(act[0]), .n_pre(pre[0]),
    .n_sasel(sel[0]), .n_col(col[0]), .n_stall(stall[0]), .n_multi2(m2[0]), .n_multi3(m3[0]),
    .n_act_before_pre(abp[0]), .n_fast_act(fast[0]));
  salp_tb_harness #(.MODE(MODE_SALP2), .N_RAND(600)) h2 (.clk, .rst_n, .done(done[1]),
    .checks(ck[1]), .failures(fl[1]), .t_example(tex[1]), .n_act(act[1]), .n_pre(pre[1]),
    .n_sasel(sel[1]), .n_col(col[1]), .n_stall(stall[1]), .n_multi2(m2[1]), .n_multi3(m3[1]),
    .n_act_before_pre(abp[1]), .n_fast_act(fast[1]));
  salp_tb_harness #(.MODE(MODE_MASA), .N_RAND(600)) h3 (.clk, .rst_n, .done(done[2]),
    .checks(ck[2]), .failures(fl[2]), .t_example(tex[2]), .n_act(act[2]), .n_pre(pre[2]),
    .n_sasel(sel[2]), .n_col(col[2]), .n_stall(stall[2]), .n_multi2(m2[2]), .n_multi3(m3[2]),
    .n_act_before_pre(abp[2]), .n_fast_act(fast[2]));

  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done == 3'b111);
    for (int m = 0; m < 3; m++) begin
      $display("mode %0d: example %0d cycles; ACT %0d PRE %0d SA_SEL %0d col %0d stall %0d multi2 %0d multi3 %0d act-before-pre %0d fast-act %0d",
               m, tex[m], act[m], pre[m], sel[m], col[m], stall[m], m2[m], m3[m], abp[m], fast[m]);
      checks += ck[m];
      failures += fl[m];
      chk(stall[m] > 0, "full queue never stalled a request");
    end
    chk(fast[0] > 0, "SALP-1 never overlapped a precharge with an activation");
    chk(m2[0] == 0, "SALP-1 had two subarrays of a bank open");
    chk(abp[1] > 0, "SALP-2 never activated before precharging");
    chk(m3[1] == 0, "SALP-2 had three subarrays of a bank open");
    chk(m3[2] > 0, "MASA never had three subarrays open");
    chk(sel[2] > 0, "MASA never issued SA_SEL");
    chk(sel[0] == 0 && sel[1] == 0, "SA_SEL outside MASA");
    chk(col[2] > act[2], "MASA had no row-buffer hits");
    chk(act[2] < act[0] && act[2] < act[1], "MASA did not save activations");
    chk(tex[2] < tex[1], "MASA not faster than SALP-2 on the example");
    chk(tex[1] < tex[0], "SALP-2 not faster than SALP-1 on the example");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
