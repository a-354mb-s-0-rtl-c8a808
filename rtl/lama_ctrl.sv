// lama_ctrl: slot scheduler for two pipeline-interleaved detection problems.
//
// Time is cut into slots of TS cycles. In slot k the MV unit works on problem
// k mod 2 and the IC unit on the other one, so the two units never wait for
// each other: problem 0 runs MV in slots 0, 2, ..., 2*tmax-2 and IC in slots
// 1, 3, ..., 2*tmax-1; problem 1 is one slot behind. After its last IC slot a
// problem's result goes through the LLR unit in the following slot (slots
// 2*tmax and 2*tmax+1). A pair therefore takes (2*tmax+2)*TS cycles from
// start to done. These two closing slots (the "tail") leave the MV unit free,
// so if start is high in the last cycle of slot 2*tmax-1 the next pair starts
// right away and runs its slots 0 and 1 alongside the tail: back to back,
// one pair leaves every 2*tmax*TS cycles, i.e. one problem per tmax*TS.
// Within a slot (cycle c):
//   MV : issue UE c for c = 0..U-1 (first-iteration flag in slots 0 and 1)
//   IC : load the operand registers and start the SINR update at c = 0,
//        MAC steps 0..U at c = 1..U+1, capture z at c = TS-1
//   LLR: issue UE c for c = 0..U-1
// `start` is taken when nothing runs or in the last cycle of slot 2*tmax-1
// (`accept` shows when); it latches tmax and flips `bank`, the input-buffer
// bank the new pair reads. `done` pulses in the last cycle of a pair's tail;
// ic_tail marks the IC slot that belongs to the closing pair, whose input
// bank is tail_bank (`bank` may already have flipped to the next pair).
// The interleaving and Ts = 36 follow the paper; the exact slot schedule,
// the cycle positions and the chaining of pairs are this design's choices.
module lama_ctrl
  import lama_pkg::*;
#(
  parameter int NU  = U,
  parameter int NTS = TS,
  localparam int AW = $clog2(NU),
  localparam int CW = $clog2(NTS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [4:0]    tmax_i,
  output logic          busy,
  output logic          done,
  output logic          accept,    // a start in this cycle would be taken
  output logic          bank,      // input bank of the running pair
  output logic          ic_tail,   // the IC slot belongs to the closing pair
  output logic          tail_bank, // input bank of the closing pair
  // MV
  output logic          mv_issue,
  output logic          mv_prob,
  output logic [AW-1:0] mv_ue,
  output logic          mv_first,
  // IC
  output logic          ic_load,
  output logic          ic_prob,
  output logic          ic_first,
  output logic          ic_step_valid,
  output logic [AW:0]   ic_step,
  output logic          ic_capture,
  // LLR
  output logic          llr_issue,
  output logic          llr_prob,
  output logic [AW-1:0] llr_ue
);
  logic [6:0]    slot;
  logic [CW-1:0] cyc;
  logic [4:0]    tmax;
  logic [6:0]    two_t;
  logic          run;          // slots 0 .. 2*tmax-1 of the current pair
  logic          tail;         // the two closing slots of the previous pair
  logic          tail_slot;    // 0: last IC of problem 1 and LLR of problem 0; 1: LLR of problem 1
  logic          tail_first;   // the tail's IC is also problem 1's first (tmax = 1)
  logic          slot_end, run_end, take;

  assign two_t    = {1'b0, tmax, 1'b0};
  assign slot_end = (cyc == CW'(NTS - 1));
  assign run_end  = run && slot_end && (slot == two_t - 7'd1);
  // a new pair starts when idle, or chained onto the end of the running one
  assign take     = start && ((!run && !tail) || run_end);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      tail       <= 1'b0;
      tail_slot  <= 1'b0;
      tail_first <= 1'b0;
      slot       <= '0;
      cyc        <= '0;
      tmax       <= 5'd1;
      bank       <= 1'b1;
      tail_bank  <= 1'b0;
    end else begin
      if (run || tail) cyc <= slot_end ? '0 : cyc + 1'b1;
      else             cyc <= '0;
      // closing slots of a pair
      if (run_end) begin
        tail       <= 1'b1;
        tail_slot  <= 1'b0;
        tail_first <= (tmax == 5'd1);
        tail_bank  <= bank;
      end else if (tail && slot_end) begin
        if (tail_slot) tail <= 1'b0;
        tail_slot <= 1'b1;
      end
      // main slots
      if (take) begin
        run  <= 1'b1;
        slot <= '0;
        tmax <= (tmax_i == '0) ? 5'd1 : tmax_i;
        bank <= ~bank;
        if (!run && !tail) cyc <= '0;
      end else if (run_end) begin
        run <= 1'b0;
      end else if (run && slot_end) begin
        slot <= slot + 7'd1;
      end
    end
  end

  logic mv_act, ic_run, llr_act;
  assign mv_act  = run;
  assign ic_run  = run && (slot >= 7'd1);
  assign llr_act = tail;

  assign busy          = run || tail;
  assign done          = tail && tail_slot && slot_end;
  assign accept        = (!run && !tail) || run_end;
  assign mv_issue      = mv_act && (cyc < CW'(NU));
  assign mv_prob       = slot[0];
  assign mv_ue         = AW'(cyc);
  assign mv_first      = (slot < 7'd2);
  assign ic_tail       = tail && !tail_slot;
  assign ic_load       = (ic_run || ic_tail) && (cyc == '0);
  assign ic_prob       = ic_tail ? 1'b1 : ~slot[0];
  assign ic_first      = ic_tail ? tail_first : (slot <= 7'd2);
  assign ic_step_valid = (ic_run || ic_tail) && (cyc >= CW'(1)) && (cyc <= CW'(NU + 1));
  assign ic_step       = (AW+1)'(cyc - CW'(1));
  assign ic_capture    = (ic_run || ic_tail) && slot_end;
  assign llr_issue     = llr_act && (cyc < CW'(NU));
  assign llr_prob      = tail_slot;
  assign llr_ue        = AW'(cyc);

  // the IC unit needs NU+1 MAC steps plus capture inside one slot
  initial assert (NTS >= NU + 3) else $error("slot too short for the MAC array");
endmodule
