// abi_top: the ABI near-memory compute of the whole GPU.
//
// NUM_CU compute-unit slices (each with near-register-file and near-L1 logic)
// and one L2 slice (near-L2 logic) receive ABI instructions over one broadcast
// bus; an instruction's `cu` field picks the slice (0..NUM_CU-1 for the CUs,
// NUM_CU for L2).  Instructions come either from the GPU's issue stage (the
// parallel port) or from the test chip's scan interface (SE/SI/UPD/SO); a
// scanned instruction goes first.  The result of every finished operation is
// presented on the result port and loaded into the scan-out register.
//
// Follows the paper: 8 CUs, each with NRF and near-L1 logic, plus near-L2 logic,
// 16-bit operands, scan access with SE/SI/UPD/SO.  Not built here, because the
// design reuses them from an existing GPU without change: thread dispatcher,
// wavefront fetch and arbitration, the baseline decode/issue, ALUs, the L1/L2
// cache controllers and the load/store unit; their connection points are the
// instruction port and the memory-fill path (OP_MEMWR).  This design's choices:
// the bus, the instruction format and the slice numbering.
//
// Timing: an instruction is taken when inst_valid and inst_ready are high (the
// scan path has its own pending flag).  `done` pulses one cycle with `result`.
// All slices share the result port: when two finish in the same cycle the
// higher-numbered slice is shown, so operations should be issued so that they
// do not end together.
module abi_top
  import abi_pkg::*;
#(
  parameter int unsigned NUM_CU   = 8,
  parameter int unsigned NB       = 16,
  parameter int unsigned RF_DEPTH = 8192,
  parameter int unsigned L1_DEPTH = 4096,
  parameter int unsigned L2_DEPTH = 131072,
  parameter int unsigned SMW      = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // scan interface of the test chip
  input  logic                 se,
  input  logic                 si,
  input  logic                 upd,
  output logic                 so,
  // instruction port from the GPU issue stage
  input  inst_t                inst,
  input  logic                 inst_valid,
  output logic                 inst_ready,
  // results
  output logic                 done,
  output logic signed [AW-1:0] result,
  output logic                 gt0,
  output logic [NUM_CU:0]      slice_busy,
  output logic                 stall,
  output logic                 spen_any,
  output logic [NUM_CU:0]      mon_en
);

  localparam int unsigned NS = NUM_CU + 1;
  localparam int unsigned OW = AW + 1;

  logic [INST_W-1:0]    scan_inst;
  logic                 scan_valid;
  inst_t                bus_inst;
  logic                 bus_valid, bus_ready;

  logic [NS-1:0]        s_ready, s_stall, s_done, s_gt0, s_spen;
  logic signed [AW-1:0] s_res [NS];
  logic [OW-1:0]        out_word;

  scan_if #(.IW(INST_W), .OW(OW)) u_scan (
    .clk        (clk),
    .rst_n      (rst_n),
    .se         (se),
    .si         (si),
    .upd        (upd),
    .so         (so),
    .inst       (scan_inst),
    .inst_valid (scan_valid),
    .inst_ready (bus_ready),
    .out_load   (done),
    .out_data   (out_word)
  );

  assign bus_inst   = scan_valid ? inst_t'(scan_inst) : inst;
  assign bus_valid  = scan_valid || inst_valid;
  assign bus_ready  = &s_ready;
  assign inst_ready = bus_ready && !scan_valid;

  for (genvar s = 0; s < NS; s++) begin : g_slice
    pr_t pr_unused;
    abi_cu #(
      .SLICE_ID (s),
      .L2_SLICE (s == NUM_CU),
      .NB       (NB),
      .RF_DEPTH (RF_DEPTH),
      .L1_DEPTH (L1_DEPTH),
      .L2_DEPTH (L2_DEPTH),
      .SMW      (SMW)
    ) u_cu (
      .clk        (clk),
      .rst_n      (rst_n),
      .inst       (bus_inst),
      .inst_valid (bus_valid),
      .inst_ready (s_ready[s]),
      .stall      (s_stall[s]),
      .busy       (slice_busy[s]),
      .done       (s_done[s]),
      .result     (s_res[s]),
      .gt0        (s_gt0[s]),
      .spen_any   (s_spen[s]),
      .mon_en     (mon_en[s]),
      .pr         (pr_unused)
    );
  end

  always_comb begin
    done   = 1'b0;
    result = s_res[0];
    gt0    = s_gt0[0];
    for (int s = 0; s < NS; s++) begin
      if (s_done[s]) begin
        done   = 1'b1;
        result = s_res[s];
        gt0    = s_gt0[s];
      end
    end
  end

  assign out_word = {gt0, result};
  assign stall    = |s_stall;
  assign spen_any = |s_spen;

endmodule
