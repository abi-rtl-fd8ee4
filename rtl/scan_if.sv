// scan_if: the test chip's serial interface (SE, SI, UPD, SO).
//
// The measured chip receives its inputs serially from an FPGA harness and
// returns the near-memory results serially: while SE is high, SI is shifted in
// (first bit = most significant bit of an instruction) and the output word is
// shifted out on SO (most significant bit first).  A rising edge of UPD hands
// the scanned-in word over as one instruction; it stays pending until the design
// accepts it.  When an operation finishes, its result is loaded into the
// scan-out register.
// The pin names SE, SI, UPD, SO and the scan-in / update / scan-out use follow the
// paper's measurement description; the word widths, the bit order and the
// pending/accept handshake are this design's choices.
//
// Timing: all pins are sampled on the rising clock edge (synchronous to CLK).
module scan_if #(
  parameter int unsigned IW = 72,   // instruction width
  parameter int unsigned OW = 33    // scan-out word width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          se,
  input  logic          si,
  input  logic          upd,
  output logic          so,
  output logic [IW-1:0] inst,
  output logic          inst_valid,
  input  logic          inst_ready,
  input  logic          out_load,
  input  logic [OW-1:0] out_data
);

  logic [IW-1:0] in_sr;
  logic [OW-1:0] out_sr;
  logic          upd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_sr      <= '0;
      out_sr     <= '0;
      upd_q      <= 1'b0;
      inst       <= '0;
      inst_valid <= 1'b0;
    end else begin
      upd_q <= upd;
      if (se) in_sr <= {in_sr[IW-2:0], si};
      if (out_load)  out_sr <= out_data;
      else if (se)   out_sr <= {out_sr[OW-2:0], 1'b0};
      if (inst_valid && inst_ready) inst_valid <= 1'b0;
      if (upd && !upd_q) begin
        inst       <= in_sr;
        inst_valid <= 1'b1;
      end
    end
  end

  assign so = out_sr[OW-1];

endmodule
