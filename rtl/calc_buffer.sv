// calc_buffer - the scale tracker's Calculation Buffer.
//
// For every architectural register r it keeps a fixed value fva_r (valid
// only while r depends on immediates alone; "NA" otherwise) and a scale
// sc_r, the step by which r's value can change when its variables change.
// Each instruction leaving the execute stage updates its destination
// register rd by the published rule table:
//   load rd imm          fva=imm            sc=1
//   load rd imm(rs)      fva=NA             sc=1
//   add/sub rd rs0 imm   rs0 NA:  sc=sc_rs0   rs0 valid: fva=fva_rs0 +/- imm
//   add/sub rd rs0 rs1   both valid: fva=fva0 +/- fva1; one NA: sc of the NA
//                        register; both NA: sc=min(sc_rs0, sc_rs1)
//   mul/shl/shr          as add, with x / << / >> in place of +, and the
//                        scale multiplied by the other operand's fva (or
//                        sc when both are NA)
//   anything else        fva=NA sc=1
// Reset gives every register fva=NA, sc=1, as at program start.
//
// A scale that the table marks "NA" (destination with a valid fva) is
// stored as 1: the table never reads the scale of a register whose fva is
// valid, and a scale of 1 never triggers a prefetch, so the two are
// equivalent. All arithmetic is 16 bits wide and wraps. Shift amounts of
// 16 or more give 0.
//
// Interface: ex_valid/ex_instr write on the rising clock edge. The read
// port (rd_idx -> rd_sc, rd_fva_v, rd_fva) is combinational and returns
// the value before this cycle's write.
module calc_buffer
  import prefender_pkg::*;
#(
  parameter int NUM_REGS = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      ex_valid,
  input  ex_instr_t ex_instr,
  input  reg_idx_t  rd_idx,
  output val_t      rd_sc,
  output logic      rd_fva_v,
  output val_t      rd_fva
);

  val_t fva   [NUM_REGS];
  logic fva_v [NUM_REGS];
  val_t sc    [NUM_REGS];

  logic a_v, b_v;
  val_t a_f, a_s, b_f, b_s;
  logic n_v;
  val_t n_f, n_s;

  function automatic val_t arith(op_e op, val_t x, val_t y);
    case (op)
      OP_ADD:  return x + y;
      OP_SUB:  return x - y;
      OP_MUL:  return x * y;
      OP_SHL:  return x << y;
      OP_SHR:  return x >> y;
      default: return x;
    endcase
  endfunction

  always_comb begin
    a_v = fva_v[ex_instr.rs0];
    a_f = fva[ex_instr.rs0];
    a_s = sc[ex_instr.rs0];
    if (ex_instr.b_imm) begin
      b_v = 1'b1;
      b_f = ex_instr.imm;
      b_s = 16'd1;
    end else begin
      b_v = fva_v[ex_instr.rs1];
      b_f = fva[ex_instr.rs1];
      b_s = sc[ex_instr.rs1];
    end

    n_v = 1'b0;
    n_f = '0;
    n_s = 16'd1;
    unique case (ex_instr.op)
      OP_LOAD_IMM: begin
        n_v = 1'b1;
        n_f = ex_instr.imm;
      end
      OP_ADD, OP_SUB: begin
        if (a_v && b_v) begin
          n_v = 1'b1;
          n_f = arith(ex_instr.op, a_f, b_f);
        end else if (!a_v && b_v) n_s = a_s;
        else if (a_v && !b_v)     n_s = b_s;
        else                      n_s = (a_s < b_s) ? a_s : b_s;
      end
      OP_MUL, OP_SHL, OP_SHR: begin
        if (a_v && b_v) begin
          n_v = 1'b1;
          n_f = arith(ex_instr.op, a_f, b_f);
        end else if (!a_v && b_v) n_s = arith(ex_instr.op, a_s, b_f);
        else if (a_v && !b_v)     n_s = arith(ex_instr.op, a_f, b_s);
        else                      n_s = arith(ex_instr.op, a_s, b_s);
      end
      default: ;  // OP_LOAD_MEM and OP_OTHER reinitialise rd
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGS; i++) begin
        fva[i]   <= '0;
        fva_v[i] <= 1'b0;
        sc[i]    <= 16'd1;
      end
    end else if (ex_valid) begin
      fva[ex_instr.rd]   <= n_f;
      fva_v[ex_instr.rd] <= n_v;
      sc[ex_instr.rd]    <= n_s;
    end
  end

  assign rd_sc    = sc[rd_idx];
  assign rd_fva_v = fva_v[rd_idx];
  assign rd_fva   = fva[rd_idx];

endmodule
