// sparsity_monitor: adaptive on/off control of sparsity detection.
//
// Sparsity detection costs power, and is wasted when the data holds no zeros.
// The monitor counts consecutive monitored cycles in which no bank raised SpEn
// (SpCnt).  When the count reaches the programmed window (SP_WIN + 1 cycles,
// 512 by default, up to 2^16) without a single sparse operand, it drops Mon_En,
// which shuts all detectors off, and pulses sp_off so that SP_ACT is cleared in
// the programmable registers.  Any SpEn restarts the count.  Writing SP_ACT
// again (arm) re-enables monitoring.
//
// The 512-cycle default, the 2^16 limit, the counter SpCnt -> UpdSpCnt and the
// shutdown of detection and of SP_ACT follow the paper; the paper builds the
// increment as a transmission-gate circuit with SpCnt+1 precomputed, here it is
// an ordinary adder.  That the count restarts on every SpEn, and the re-arm
// on a write of SP_ACT, are this design's choices.
//
// Timing: one register stage; Mon_En falls on the clock edge that ends the
// window's last cycle.
module sparsity_monitor (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sp_act,     // SP_ACT
  input  logic        arm,        // SP_ACT was (re)written
  input  logic        active,     // a compute cycle is being monitored
  input  logic        any_spen,   // OR of all banks' SpEn
  input  logic [15:0] win,        // window length minus one
  output logic        mon_en,     // Mon_En to the detectors
  output logic        sp_off,     // one-cycle pulse: clear SP_ACT
  output logic [15:0] sp_cnt      // SpCnt
);

  logic [15:0] upd_sp_cnt;

  assign upd_sp_cnt = sp_cnt + 16'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_cnt <= '0;
      mon_en <= 1'b1;
      sp_off <= 1'b0;
    end else begin
      sp_off <= 1'b0;
      if (arm) begin
        sp_cnt <= '0;
        mon_en <= 1'b1;
      end else if (mon_en && sp_act && active) begin
        if (any_spen) begin
          sp_cnt <= '0;
        end else if (sp_cnt == win) begin
          sp_cnt <= '0;
          mon_en <= 1'b0;
          sp_off <= 1'b1;
        end else begin
          sp_cnt <= upd_sp_cnt;
        end
      end
    end
  end

endmodule
