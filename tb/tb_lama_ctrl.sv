// tb_lama_ctrl: runs the scheduler for tmax = 1, 3 and 8 and checks, cycle
// by cycle, the slot plan: per problem tmax MV passes and tmax IC passes of
// the right kind (first flag on the first), MV and IC of the same slot on
// different problems, U issues per pass, one load and one capture per IC
// slot, U+1 MAC steps, the LLR passes of problem 0 then 1, and that done
// comes (2*tmax+2)*TS cycles after start. Also checks that start is ignored
// while busy, and chains several pairs back to back with start held high:
// each start must be taken exactly at the end of the previous pair's slot
// 2*tmax-1, the input bank must flip per pair, the closing IC slots must be
// flagged ic_tail, and done must then come every 2*tmax*TS cycles.
module tb_lama_ctrl;
  import lama_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [4:0] tmax = 0;
  logic busy, done, mv_issue, mv_prob, mv_first, ic_load, ic_prob, ic_first, ic_step_valid, ic_capture;
  logic llr_issue, llr_prob, accept, bank, ic_tail;
  logic [4:0] mv_ue, llr_ue;
  logic [5:0] ic_step;
  int checks = 0, failures = 0;

  lama_ctrl dut (.clk, .rst_n, .start, .tmax_i(tmax), .busy, .done, .accept, .bank, .ic_tail, .tail_bank(), .mv_issue, .mv_prob, .mv_ue, .mv_first,
                 .ic_load, .ic_prob, .ic_first, .ic_step_valid, .ic_step, .ic_capture,
                 .llr_issue, .llr_prob, .llr_ue);

  task automatic chk(input string w, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  task automatic run(input int t);
    int mv_n [2], mvf_n [2], ic_n [2], icf_n [2], step_n, cap_n, llr_n [2], cycles, llr_first_prob, same;
    int next_mv_ue, next_llr_ue;
    mv_n = '{0, 0}; mvf_n = '{0, 0}; ic_n = '{0, 0}; icf_n = '{0, 0}; llr_n = '{0, 0};
    step_n = 0; cap_n = 0; cycles = 0; llr_first_prob = -1; same = 0; next_mv_ue = 0; next_llr_ue = 0;
    @(negedge clk); start = 1; tmax = 5'(t);
    @(negedge clk); start = 0;
    while (1) begin
      cycles++;
      if (cycles == 50) begin start = 1; tmax = 5'(t + 1); end   // must be ignored
      if (cycles == 51) start = 0;
      if (mv_issue) begin
        chk("mv ue order", int'(mv_ue), next_mv_ue); next_mv_ue = (next_mv_ue + 1) % U;
        if (mv_ue == 0) begin mv_n[mv_prob]++; if (mv_first) mvf_n[mv_prob]++; end
      end
      if (ic_load) begin ic_n[ic_prob]++; if (ic_first) icf_n[ic_prob]++;
        if (mv_issue && mv_prob == ic_prob) same++; end
      if (ic_step_valid) step_n++;
      if (ic_capture) cap_n++;
      if (llr_issue) begin
        chk("llr ue order", int'(llr_ue), next_llr_ue); next_llr_ue = (next_llr_ue + 1) % U;
        if (llr_ue == 0) begin llr_n[llr_prob]++; if (llr_first_prob < 0) llr_first_prob = llr_prob; end
      end
      if (done) break;
      @(negedge clk);
    end
    chk("cycles", cycles, (2 * t + 2) * TS);
    for (int p = 0; p < 2; p++) begin
      chk("mv passes", mv_n[p], t);   chk("mv first", mvf_n[p], 1);
      chk("ic passes", ic_n[p], t);   chk("ic first", icf_n[p], 1);
      chk("llr passes", llr_n[p], 1);
    end
    chk("mac steps", step_n, 2 * t * (U + 1));
    chk("captures", cap_n, 2 * t);
    chk("llr order", llr_first_prob, 0);
    chk("mv/ic same problem", same, 0);
    @(negedge clk);
    chk("idle after done", int'(busy), 0);
  endtask

  // n pairs back to back; start held high until n have been taken
  task automatic chain(input int t, input int n);
    int takes, dones, cycles, last_done, mvp, icl, tails, llrp, bank0;
    takes = 0; dones = 0; cycles = 0; last_done = 0; mvp = 0; icl = 0; tails = 0; llrp = 0;
    @(negedge clk); start = 1; tmax = 5'(t); bank0 = int'(bank);
    while (dones < n) begin
      if (start && accept) begin
        // an idle start is taken at once; later ones only when the running
        // pair reaches the end of its slot 2*tmax-1
        chk("take time", cycles, takes * 2 * t * TS);
        takes++;
      end
      if (mv_issue && mv_ue == 0) mvp++;
      if (ic_load) begin icl++; if (ic_tail) begin tails++; chk("tail prob", int'(ic_prob), 1); end end
      if (llr_issue && llr_ue == 0) llrp++;
      @(negedge clk); cycles++;
      if (takes == n) start = 0;
      if (takes > 0) chk("bank", int'(bank), (bank0 + takes) % 2);
      if (done) begin
        dones++;
        chk("done time", cycles, (dones == 1) ? (2 * t + 2) * TS : last_done + 2 * t * TS);
        last_done = cycles;
      end
    end
    chk("takes", takes, n);
    chk("mv passes chained", mvp, 2 * t * n);
    chk("ic passes chained", icl, 2 * t * n);
    chk("tail ic passes", tails, n);
    chk("llr passes chained", llrp, 2 * n);
    @(negedge clk);
    chk("idle after chain", int'(busy), 0);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1);
    run(3);
    run(8);
    chain(8, 3);
    chain(1, 3);
    chain(2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
