// tb_abi_decode: each opcode raises its own strobe for the slice it names and
// none for another slice; the fields reach the outputs; an instruction for a
// busy slice is stalled (not ready, no strobe) while one for another slice is
// not.
module tb_abi_decode;
  import abi_pkg::*;
  inst_t inst;
  logic inst_valid, nm_busy, inst_ready, stall, pr_we, reg_we, mem_we, op_start, op_acc_clr, op_wb, op_wbv;
  pr_addr_e pr_addr;
  logic [31:0] pr_wdata;
  level_e wr_lvl;
  logic [4:0] wr_bank;
  logic [17:0] wr_addr, op_addr, op_wbv_addr;
  logic [15:0] wr_data;
  logic [5:0] op_dis;
  int checks = 0, failures = 0;

  abi_decode #(.SLICE_ID(3)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    inst_valid = 0; nm_busy = 0; inst = '0;
    for (int t = 0; t < 200; t++) begin
      inst = inst_t'({$urandom, $urandom, $urandom});
      inst.op = opcode_e'($urandom_range(0, 4));
      inst.cu = ($urandom_range(0, 1)) ? 4'd3 : 4'($urandom_range(0, 8));
      inst_valid = 1'($urandom_range(0, 3) != 0);
      nm_busy = 1'($urandom_range(0, 2) == 0);
      #1;
      begin
        automatic logic sel = (inst.cu == 3) && (inst.op != OP_NOP);
        automatic logic fire = inst_valid && sel && !nm_busy;
        check("ready", inst_ready, !sel || !nm_busy);
        check("stall", stall, inst_valid && sel && nm_busy);
        check("pr_we", pr_we, fire && inst.op == OP_PRWR);
        check("reg_we", reg_we, fire && inst.op == OP_REGWR);
        check("mem_we", mem_we, fire && inst.op == OP_MEMWR);
        check("op_start", op_start, fire && inst.op == OP_VMAC);
        if (fire) begin
          check("op_dis", op_dis, inst.op_dis);
          check("op_wb", op_wb, inst.data[0]);
          check("op_wbv", op_wbv, inst.data[1]);
          check("op_wbv_addr", op_wbv_addr, inst.data[31:14]);
          check("acc_clr", op_acc_clr, inst.acc_clr);
          check("addr", op_addr, inst.addr);
          check("wr_data", wr_data, inst.data[15:0]);
          check("bank", wr_bank, inst.bank);
          check("pr_addr", pr_addr, inst.addr[3:0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
