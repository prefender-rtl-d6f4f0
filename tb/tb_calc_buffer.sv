// tb_calc_buffer - self-checking test of the calculation buffer.
//
// Runs the pseudo code that accesses array[secret*0x200] (secret loaded
// from memory, array base and 0x200 as immediates, then mul and add) and
// checks that the scale 0x200 reaches the address register, then walks
// the other rows of the update table: immediate add/sub on fixed and
// variable registers, multiply and shift by immediates, the minimum rule
// for two variable registers, fixed-times-variable, and reinitialisation
// by other instructions. Expected values are worked out by hand from the
// rule table. A watchdog ends the run after 2000 cycles.
module tb_calc_buffer;
  import prefender_pkg::*;

  logic clk = 0, rst_n = 0;
  logic ex_valid = 0;
  ex_instr_t ex_instr = '0;
  reg_idx_t rd_idx = '0;
  val_t rd_sc, rd_fva;
  logic rd_fva_v;
  int checks = 0, failures = 0;

  calc_buffer dut (.*);

  always #5 clk = ~clk;

  function automatic ex_instr_t mk(op_e op, int rd, int rs0, int rs1, bit bi, int imm);
    ex_instr_t x;
    x.op = op; x.rd = reg_idx_t'(rd); x.rs0 = reg_idx_t'(rs0); x.rs1 = reg_idx_t'(rs1);
    x.b_imm = bi; x.imm = val_t'(imm);
    return x;
  endfunction

  task automatic issue(ex_instr_t x);
    @(negedge clk);
    ex_valid = 1; ex_instr = x;
    @(negedge clk);
    ex_valid = 0;
  endtask

  task automatic expect_reg(int r, bit fv, int fva, int sc, string what);
    rd_idx = reg_idx_t'(r);
    #1;
    checks++;
    if (rd_fva_v !== fv || (fv && rd_fva !== val_t'(fva)) || rd_sc !== val_t'(sc)) begin
      failures++;
      $display("FAIL %s: r%0d fva_v=%0d fva=%h sc=%h, expected fva_v=%0d fva=%h sc=%h",
               what, r, rd_fva_v, rd_fva, rd_sc, fv, fva, sc);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect_reg(25, 0, 0, 1, "reset");
    // array[secret*0x200]
    issue(mk(OP_LOAD_MEM, 0, 30, 0, 1, 4));        // load r0, 4(sp)
    issue(mk(OP_LOAD_MEM, 1, 0, 0, 1, 0));         // load r1, 0(r0)
    issue(mk(OP_LOAD_IMM, 2, 0, 0, 1, 'h1000));    // load r2, arr_addr
    issue(mk(OP_LOAD_IMM, 3, 0, 0, 1, 'h200));     // load r3, 0x200
    issue(mk(OP_MUL, 4, 1, 3, 0, 0));              // mul r4, r1, r3
    issue(mk(OP_ADD, 5, 2, 4, 0, 0));              // add r5, r2, r4
    expect_reg(0, 0, 0, 1, "load r0");
    expect_reg(1, 0, 0, 1, "load r1");
    expect_reg(2, 1, 'h1000, 1, "load imm r2");
    expect_reg(3, 1, 'h200, 1, "load imm r3");
    expect_reg(4, 0, 0, 'h200, "mul NA x valid");
    expect_reg(5, 0, 0, 'h200, "add valid + NA");
    // further rows
    issue(mk(OP_ADD, 7, 2, 0, 1, 'h40));           // fixed + imm
    expect_reg(7, 1, 'h1040, 1, "add valid + imm");
    issue(mk(OP_SUB, 8, 5, 0, 1, 8));              // NA - imm
    expect_reg(8, 0, 0, 'h200, "sub NA - imm");
    issue(mk(OP_MUL, 9, 5, 0, 1, 3));              // NA * imm
    expect_reg(9, 0, 0, 'h600, "mul NA x imm");
    issue(mk(OP_ADD, 10, 9, 5, 0, 0));             // NA + NA -> min
    expect_reg(10, 0, 0, 'h200, "add NA + NA min");
    issue(mk(OP_ADD, 21, 5, 9, 0, 0));             // NA + NA -> min, other order
    expect_reg(21, 0, 0, 'h200, "add NA + NA min (swapped)");
    issue(mk(OP_SHL, 11, 5, 0, 1, 2));
    expect_reg(11, 0, 0, 'h800, "shl NA << imm");
    issue(mk(OP_SHR, 12, 11, 0, 1, 3));
    expect_reg(12, 0, 0, 'h100, "shr NA >> imm");
    issue(mk(OP_ADD, 13, 2, 3, 0, 0));             // valid + valid
    expect_reg(13, 1, 'h1200, 1, "add valid + valid");
    issue(mk(OP_LOAD_IMM, 15, 0, 0, 1, 4));
    issue(mk(OP_MUL, 14, 15, 5, 0, 0));            // valid x NA
    expect_reg(14, 0, 0, 'h800, "mul valid x NA");
    issue(mk(OP_SUB, 16, 5, 15, 0, 0));            // NA - valid
    expect_reg(16, 0, 0, 'h200, "sub NA - valid");
    issue(mk(OP_SUB, 22, 15, 5, 0, 0));            // valid - NA
    expect_reg(22, 0, 0, 'h200, "sub valid - NA");
    issue(mk(OP_LOAD_MEM, 19, 0, 0, 1, 0));
    issue(mk(OP_MUL, 20, 19, 0, 1, 3));
    issue(mk(OP_MUL, 17, 20, 12, 0, 0));           // NA x NA
    expect_reg(17, 0, 0, 'h300, "mul NA x NA");
    issue(mk(OP_MUL, 18, 3, 15, 0, 0));            // valid x valid
    expect_reg(18, 1, 'h800, 1, "mul valid x valid");
    issue(mk(OP_OTHER, 5, 1, 2, 0, 0));
    expect_reg(5, 0, 0, 1, "other reinitialises");
    issue(mk(OP_LOAD_MEM, 9, 9, 0, 1, 0));
    expect_reg(9, 0, 0, 1, "load reinitialises");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
