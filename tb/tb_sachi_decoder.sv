// tb_sachi_decoder: the opcode table (FIST 0xDB with SO 0x00/0x01/0x10, XNORM 0x30),
// the mode register, the compute-mode-only operations, the BIT range of XNORM and
// operand forwarding, against expectations written out in the testbench.
module tb_sachi_decoder;
  import sachi_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, spr_we, spr_mode, mode_compute, ins_valid, cmd_valid;
  logic [7:0] ins_po, ins_so;
  logic [31:0] ins_src1, ins_src2;
  logic [5:0] ins_bits;
  logic [4:0] ins_dest;
  sachi_cmd_t cmd;
  int checks = 0, failures = 0;
  sachi_decoder #(.R(8)) dut (.*);

  task automatic issue(input logic [7:0] po, so, input logic [5:0] b, input sachi_op_e exp);
    @(negedge clk);
    ins_valid = 1; ins_po = po; ins_so = so; ins_bits = b;
    ins_src1 = $urandom; ins_src2 = $urandom; ins_dest = 5'($urandom);
    @(negedge clk);
    ins_valid = 0;
    checks++;
    if (!cmd_valid || cmd.op != exp || cmd.src1 != ins_src1 || cmd.src2 != ins_src2 ||
        cmd.bits != ins_bits || cmd.dest != ins_dest) begin
      failures++;
      $display("FAIL po=%h so=%h bits=%0d mode=%0d got %s exp %s", po, so, b, mode_compute,
               cmd.op.name(), exp.name());
    end
  endtask

  task automatic set_mode(input logic m);
    @(negedge clk); spr_we = 1; spr_mode = m;
    @(negedge clk); spr_we = 0;
    checks++;
    if (mode_compute != m) begin failures++; $display("FAIL mode"); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; spr_we = 0; spr_mode = 0; ins_valid = 0; ins_po = 0; ins_so = 0;
    ins_src1 = 0; ins_src2 = 0; ins_bits = 0; ins_dest = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (mode_compute) begin failures++; $display("FAIL reset mode"); end
    // normal mode
    issue(8'hDB, 8'h00, 6'd0, OP_DRAM_WRITE);
    issue(8'hDB, 8'h01, 6'd0, OP_DRAM_TO_STORAGE);
    issue(8'hDB, 8'h10, 6'd0, OP_ILLEGAL);
    issue(8'h30, 8'h00, 6'd8, OP_ILLEGAL);
    set_mode(1'b1);
    issue(8'hDB, 8'h00, 6'd0, OP_DRAM_WRITE);
    issue(8'hDB, 8'h01, 6'd0, OP_DRAM_TO_STORAGE);
    issue(8'hDB, 8'h10, 6'd0, OP_STORAGE_TO_COMP);
    issue(8'hDB, 8'h02, 6'd0, OP_ILLEGAL);
    issue(8'hDB, 8'h11, 6'd0, OP_ILLEGAL);
    for (int b = 0; b < 12; b++)
      issue(8'h30, 8'($urandom), 6'(b), (b >= 1 && b <= 8) ? OP_XNORM : OP_ILLEGAL);
    issue(8'h31, 8'h00, 6'd8, OP_ILLEGAL);
    issue(8'hDA, 8'h01, 6'd8, OP_ILLEGAL);
    set_mode(1'b0);
    issue(8'h30, 8'h00, 6'd4, OP_ILLEGAL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
