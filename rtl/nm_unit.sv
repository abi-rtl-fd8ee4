// nm_unit: one block of near-memory (NM) or near-register-file (NRF) logic.
//
// NB memory sub-banks each carry a REG, a sparsity detector and a
// reconfigurable compute engine (RCE); a central adder (CA), a scaler (S) and
// the thresholding block (TH, with the light-weight softmax) are shared, as is a
// sparsity monitor.  One VMAC operation fuses what a GPU would issue as separate
// load, multiply-accumulate, reduce, scale and threshold instructions:
//   every bank reads word `addr`, multiplies it by its REG (St0..St3, either
//   bit-parallel in one cycle or bit-serial over BIT_WID cycles), optionally
//   multiplies by REG'' (St4); the CA reduces the bank results (all at once,
//   element-parallel, or one bank per cycle, element-serial); S divides by
//   REG''; TH applies ReLU / comparison / softmax.
// Stage X is bypassed when St[X]Dis (programmed) or OP[X]DIS (from the
// instruction) is set: Se[X] = St[X]Dis | OP[X]DIS, and SpEn gates St1..St3 of a
// bank whose operand is zero.  St3 keeps its sum across operations unless the
// instruction sets acc_clr, so dot products longer than NB elements take
// several operations.  With wb_en the result is also written into the REG of
// sub-bank wb_bank, the data path that lets a result feed the next operation
// (GCN aggregation multiplies the combination results, held in REG, with the
// adjacency matrix).
//
// The block structure and the Se[X] function follow the paper.  The sequencing
// below, the latency per level and the operation format are this design's.
//
// Timing, from the clock edge that samples `start` to the edge that raises
// `done` (result valid with done, held until the next operation):
//   RD_LAT                       memory read
//   + 1        (bit-parallel)  or  + BIT_WID (bit-serial)
//   + NB                         only when element-serial
// With RD_LAT = 1 (NRF) a bit-parallel, element-parallel VMAC takes 2 cycles;
// with RD_LAT = 3 (L1) 4 cycles and RD_LAT = 9 (L2) 10 cycles.
// `start` is accepted only when `busy` is low.
module nm_unit
  import abi_pkg::*;
#(
  parameter int unsigned NB     = 16,
  parameter int unsigned DEPTH  = 8192,
  parameter int unsigned RD_LAT = 1,
  parameter int unsigned SMW    = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pr_t                      pr,
  input  logic                     sp_arm,
  input  logic                     sm_clr,
  output logic                     sp_off,
  // memory fill (GPU store path)
  input  logic                     mem_we,
  input  logic [$clog2(NB)-1:0]    mem_bank,
  input  logic [$clog2(DEPTH)-1:0] mem_addr,
  input  logic [DW-1:0]            mem_wdata,
  // REG load
  input  logic                     reg_we,
  input  logic [$clog2(NB)-1:0]    reg_bank,
  input  logic [DW-1:0]            reg_wdata,
  // operation
  input  logic                     start,
  input  logic [NSE-1:0]           op_dis,
  input  logic                     acc_clr,
  input  logic                     wb_en,     // write the result into a REG
  input  logic [$clog2(NB)-1:0]    wb_bank,   // ... of this sub-bank
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic                     busy,
  output logic                     done,
  output logic signed [AW-1:0]     result,
  output logic                     gt0,
  // observation
  output logic                     spen_any,
  output logic                     mon_en
);

  localparam int unsigned BKW = $clog2(NB);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_MAC, S_RED} state_e;

  state_e               state;
  logic [3:0]           wcnt;
  logic [3:0]           bit_idx;
  logic [BKW-1:0]       red_idx;
  logic [NSE-1:0]       op_dis_q;
  logic                 acc_clr_q;
  logic                 wb_en_q;
  logic [BKW-1:0]       wb_bank_q;
  logic [DW-1:0]        wb_val;
  logic [NSE-1:0]       se;
  logic                 bs, es, mac_last, step, commit, capture;

  logic [DW-1:0]        regq   [NB];
  logic [DW-1:0]        rdata  [NB];
  logic                 spen   [NB];
  logic signed [AW-1:0] s3_unused [NB];
  logic signed [AW-1:0] s4_now [NB];
  logic signed [AW-1:0] s4_reg [NB];
  logic signed [AW-1:0] s4_ca  [NB];
  logic signed [AW-1:0] ca_sum, s_out, th_out;
  logic                 th_gt0;
  logic [15:0]          sp_cnt_unused;

  assign se       = op_dis_q | pr.st_dis;
  assign bs       = pr.bit_elser[0];
  assign es       = pr.bit_elser[1];
  assign mac_last = !bs || (bit_idx == 4'(pr.bit_wid - 5'd1));
  assign step     = (state == S_MAC) && bs;
  assign commit   = (state == S_MAC) && mac_last;
  assign capture  = (state == S_MAC && mac_last && !es) ||
                    (state == S_RED && red_idx == BKW'(NB - 1));
  assign busy     = (state != S_IDLE);

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      wcnt      <= '0;
      bit_idx   <= '0;
      red_idx   <= '0;
      op_dis_q  <= '0;
      acc_clr_q <= 1'b0;
      wb_en_q   <= 1'b0;
      wb_bank_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          op_dis_q  <= op_dis;
          acc_clr_q <= acc_clr;
          wb_en_q   <= wb_en;
          wb_bank_q <= wb_bank;
          bit_idx   <= '0;
          red_idx   <= '0;
          wcnt      <= 4'(RD_LAT >= 2 ? RD_LAT - 2 : 0);
          state     <= (RD_LAT == 1) ? S_MAC : S_WAIT;
        end
        S_WAIT: begin
          if (wcnt == '0) state <= S_MAC;
          else            wcnt  <= wcnt - 4'd1;
        end
        S_MAC: begin
          if (mac_last) state <= es ? S_RED : S_IDLE;
          else          bit_idx <= bit_idx + 4'd1;
        end
        S_RED: begin
          if (red_idx == BKW'(NB - 1)) state <= S_IDLE;
          else                         red_idx <= red_idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- REGs ----------------
  // Loaded by REG-write instructions, or by the write-back of a finished
  // operation (result saturated to the signed DW-bit range).  The two never
  // meet: instructions for a busy slice are stalled.
  assign wb_val = sat_dw(th_out);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NB; i++) regq[i] <= '0;
    end else if (capture && wb_en_q) begin
      regq[wb_bank_q] <= wb_val;
    end else if (reg_we) begin
      regq[reg_bank] <= reg_wdata;
    end
  end

  // ---------------- sub-banks ----------------
  for (genvar b = 0; b < NB; b++) begin : g_bank
    nm_bank #(.DEPTH(DEPTH), .DWID(DW), .RD_LAT(RD_LAT)) u_mem (
      .clk   (clk),
      .we    (mem_we && mem_bank == BKW'(b)),
      .waddr (mem_addr),
      .wdata (mem_wdata),
      .re    (state == S_IDLE && start),
      .raddr (addr),
      .rdata (rdata[b])
    );

    sparsity_detect #(.DWID(DW)) u_sp (
      .m      (rdata[b]),
      .q      (regq[b]),
      .sp_act (pr.sp_act),
      .mon_en (mon_en),
      .spen   (spen[b])
    );

    rce #(.DWID(DW), .AWID(AW)) u_rce (
      .clk     (clk),
      .rst_n   (rst_n),
      .a       (rdata[b]),
      .q       (regq[b]),
      .bw      (pr.bit_wid),
      .bit_idx (bit_idx),
      .bs      (bs),
      .se      (se[4:0]),
      .reg2    (pr.reg2),
      .spen    (spen[b]),
      .step    (step),
      .commit  (commit),
      .acc_clr (acc_clr_q),
      .s3      (s3_unused[b]),
      .s4      (s4_now[b]),
      .s4_reg  (s4_reg[b])
    );

    assign s4_ca[b] = (state == S_RED) ? s4_reg[b] : s4_now[b];
  end

  always_comb begin
    spen_any = 1'b0;
    for (int i = 0; i < NB; i++) spen_any |= spen[i];
  end

  sparsity_monitor u_mon (
    .clk      (clk),
    .rst_n    (rst_n),
    .sp_act   (pr.sp_act),
    .arm      (sp_arm),
    .active   (state == S_MAC),
    .any_spen (spen_any),
    .win      (pr.sp_win),
    .mon_en   (mon_en),
    .sp_off   (sp_off),
    .sp_cnt   (sp_cnt_unused)
  );

  // ---------------- CA, S, TH ----------------
  central_adder #(.NB(NB), .AWID(AW)) u_ca (
    .clk      (clk),
    .rst_n    (rst_n),
    .s4       (s4_ca),
    .es       (es),
    .bank_sel (red_idx),
    .first    (red_idx == '0),
    .step     (state == S_RED),
    .sub      (pr.ca_sub),
    .bias     (pr.ca_bias),
    .sum      (ca_sum)
  );

  scaler #(.DWID(DW), .AWID(AW)) u_s (
    .din    (ca_sum),
    .reg2   (pr.reg2),
    .bypass (se[5]),
    .dout   (s_out)
  );

  threshold #(.AWID(AW), .SMW(SMW)) u_th (
    .clk       (clk),
    .rst_n     (rst_n),
    .s         (s_out),
    .th_act    (pr.th_act),
    .sm_act    (pr.sm_act),
    .sm_acc    (pr.sm_acc),
    .sm_commit (capture),
    .sm_clr    (sm_clr),
    .out       (th_out),
    .gt0       (th_gt0)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done   <= 1'b0;
      result <= '0;
      gt0    <= 1'b0;
    end else begin
      done <= capture;
      if (capture) begin
        result <= th_out;
        gt0    <= th_gt0;
      end
    end
  end

endmodule
