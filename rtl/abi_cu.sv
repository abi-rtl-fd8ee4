// abi_cu: the ABI additions of one slice of the GPU.
//
// A compute-unit slice (L2_SLICE = 0) holds near-register-file logic next to the
// vector register file (NRF, 1-cycle sub-bank reads) and near-L1 logic in the
// load/store unit (NM, 3-cycle reads).  The L2 slice (L2_SLICE = 1) holds the
// near-L2 logic (9-cycle reads).  Each slice has the decode additions and its own
// programmable registers.  NRF_M chooses which of the slice's units a VMAC runs
// on, which lets a problem be computed next to the smallest memory it fits in.
//
// Follows the paper: NRF in the register file and NM in L1 of every CU, NM at L2,
// PRs shared by the NM/NRF logic, NRF_M selecting NRF or NM.  This design's
// choices: the latencies and bank depths (see nm_bank), one PR set per slice,
// and the mapping of levels a slice does not hold (the L2 slice always uses its
// L2 unit; a CU runs NRF_M = L2 on its NRF unit).  REG loads and memory fills go
// to the unit named by the instruction's level field with the same mapping.
//
// Results can also reach the register file, beside the ALUs' own writes, as
// the described design adds: a VMAC may ask for its result, saturated to 16
// bits, to be written into a word of a VRF sub-bank, whichever unit of the
// slice computed it (this write port and its timing are this design's).  The
// L2 slice has no register file and ignores that request.
//
// Timing: see nm_unit; the decode is combinational, results are registered.
// A register-file write-back happens in the cycle `done` is high; `busy` stays
// high in that cycle.
module abi_cu
  import abi_pkg::*;
#(
  parameter int unsigned SLICE_ID = 0,
  parameter bit          L2_SLICE = 1'b0,
  parameter int unsigned NB       = 16,
  parameter int unsigned RF_DEPTH = 8192,
  parameter int unsigned L1_DEPTH = 4096,
  parameter int unsigned L2_DEPTH = 131072,
  parameter int unsigned RF_LAT   = 1,
  parameter int unsigned L1_LAT   = 3,
  parameter int unsigned L2_LAT   = 9,
  parameter int unsigned SMW      = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  inst_t                inst,
  input  logic                 inst_valid,
  output logic                 inst_ready,
  output logic                 stall,
  output logic                 busy,
  output logic                 done,
  output logic signed [AW-1:0] result,
  output logic                 gt0,
  output logic                 spen_any,
  output logic                 mon_en,
  output pr_t                  pr
);

  localparam int unsigned NU  = L2_SLICE ? 1 : 2;
  localparam int unsigned BKW = $clog2(NB);

  logic           pr_we, reg_we, mem_we, op_start, op_acc_clr, op_wb, op_wbv;
  logic [17:0]    op_wbv_addr;
  pr_addr_e       pr_addr;
  logic [31:0]    pr_wdata;
  level_e         wr_lvl;
  logic [4:0]     wr_bank;
  logic [17:0]    wr_addr, op_addr;
  logic [DW-1:0]  wr_data;
  logic [NSE-1:0] op_dis;
  logic           sp_arm, sm_clr;

  logic [NU-1:0]        u_busy, u_done, u_gt0, u_spen, u_mon, u_spoff;
  logic signed [AW-1:0] u_res [NU];
  logic                 op_u, wr_u;   // unit index (0 = RF or L2, 1 = L1)

  assign op_u = !L2_SLICE && (pr.nrf_m == LVL_L1);
  assign wr_u = !L2_SLICE && (wr_lvl == LVL_L1);
  // register-file write-back of a finished VMAC (compute-unit slices only):
  // the request is kept from the start of the operation and performed in the
  // cycle `done` is raised, through the RF unit's fill port.  The slice counts
  // as busy in that cycle so that no fill from the decoder meets it.
  logic           wbv_q, wbv_we;
  logic [4:0]     wbv_bank_q;
  logic [17:0]    wbv_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbv_q      <= 1'b0;
      wbv_bank_q <= '0;
      wbv_addr_q <= '0;
    end else if (op_start) begin
      wbv_q      <= op_wbv && !L2_SLICE;
      wbv_bank_q <= wr_bank;
      wbv_addr_q <= op_wbv_addr;
    end else if (done) begin
      wbv_q      <= 1'b0;
    end
  end

  assign wbv_we = wbv_q && done;
  assign busy   = (|u_busy) || wbv_we;

  abi_decode #(.SLICE_ID(SLICE_ID)) u_dec (
    .inst       (inst),
    .inst_valid (inst_valid),
    .nm_busy    (busy),
    .inst_ready (inst_ready),
    .stall      (stall),
    .pr_we      (pr_we),
    .pr_addr    (pr_addr),
    .pr_wdata   (pr_wdata),
    .reg_we     (reg_we),
    .mem_we     (mem_we),
    .wr_lvl     (wr_lvl),
    .wr_bank    (wr_bank),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .op_start   (op_start),
    .op_dis     (op_dis),
    .op_acc_clr (op_acc_clr),
    .op_wb      (op_wb),
    .op_wbv     (op_wbv),
    .op_wbv_addr(op_wbv_addr),
    .op_addr    (op_addr)
  );

  prog_regs u_pr (
    .clk    (clk),
    .rst_n  (rst_n),
    .we     (pr_we),
    .addr   (pr_addr),
    .wdata  (pr_wdata),
    .sp_off (|u_spoff),
    .pr     (pr),
    .sp_arm (sp_arm),
    .sm_clr (sm_clr)
  );

  for (genvar u = 0; u < NU; u++) begin : g_unit
    localparam int unsigned DEPTH = L2_SLICE ? L2_DEPTH : (u == 0 ? RF_DEPTH : L1_DEPTH);
    localparam int unsigned LAT   = L2_SLICE ? L2_LAT   : (u == 0 ? RF_LAT   : L1_LAT);
    localparam int unsigned MAW   = $clog2(DEPTH);

    localparam bit  IS_RF = !L2_SLICE && u == 0;
    logic           f_we;
    logic [BKW-1:0] f_bank;
    logic [MAW-1:0] f_addr;
    logic [DW-1:0]  f_data;

    // fill port: decoder fills, or (RF unit) the register-file write-back
    always_comb begin
      f_we   = mem_we && wr_u == 1'(u);
      f_bank = wr_bank[BKW-1:0];
      f_addr = wr_addr[MAW-1:0];
      f_data = wr_data;
      if (IS_RF && wbv_we) begin
        f_we   = 1'b1;
        f_bank = wbv_bank_q[BKW-1:0];
        f_addr = wbv_addr_q[MAW-1:0];
        f_data = sat_dw(result);
      end
    end

    nm_unit #(.NB(NB), .DEPTH(DEPTH), .RD_LAT(LAT), .SMW(SMW)) u_nm (
      .clk       (clk),
      .rst_n     (rst_n),
      .pr        (pr),
      .sp_arm    (sp_arm),
      .sm_clr    (sm_clr),
      .sp_off    (u_spoff[u]),
      .mem_we    (f_we),
      .mem_bank  (f_bank),
      .mem_addr  (f_addr),
      .mem_wdata (f_data),
      .reg_we    (reg_we && wr_u == 1'(u)),
      .reg_bank  (wr_bank[BKW-1:0]),
      .reg_wdata (wr_data),
      .start     (op_start && op_u == 1'(u)),
      .op_dis    (op_dis),
      .acc_clr   (op_acc_clr),
      .wb_en     (op_wb),
      .wb_bank   (wr_bank[BKW-1:0]),
      .addr      (op_addr[MAW-1:0]),
      .busy      (u_busy[u]),
      .done      (u_done[u]),
      .result    (u_res[u]),
      .gt0       (u_gt0[u]),
      .spen_any  (u_spen[u]),
      .mon_en    (u_mon[u])
    );
  end

  // only one unit of a slice runs at a time (the decode stalls while busy)
  always_comb begin
    done   = 1'b0;
    result = u_res[0];
    gt0    = u_gt0[0];
    for (int u = 0; u < NU; u++) begin
      if (u_done[u]) begin
        done   = 1'b1;
        result = u_res[u];
        gt0    = u_gt0[u];
      end
    end
  end

  assign spen_any = |u_spen;
  assign mon_en   = &u_mon;

endmodule
