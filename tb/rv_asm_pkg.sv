// rv_asm_pkg: instruction encoders for the RISC-V subset the NDP sub-cores
// execute, so that testbenches can write kernels as readable assembly.
package rv_asm_pkg;
  function automatic logic [31:0] r_t(input logic [6:0] f7, input int rs2, input int rs1,
                                      input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] i_t(input int imm, input int rs1, input logic [2:0] f3,
                                      input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] lui (input int rd, input int imm20); return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] addi(input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'd0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] andi(input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'd7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli(input int rd, input int rs1, input int sh); return i_t(sh, rs1, 3'd1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add (input int rd, input int rs1, input int rs2); return r_t(7'd0, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub (input int rd, input int rs1, input int rs2); return r_t(7'h20, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] mul (input int rd, input int rs1, input int rs2); return r_t(7'd1, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] ld  (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'd3, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lw  (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'd2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sd  (input int rs2, input int rs1, input int imm);
    logic [11:0] i; i = 12'(imm); return {i[11:5], 5'(rs2), 5'(rs1), 3'd3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] sw  (input int rs2, input int rs1, input int imm);
    logic [11:0] i; i = 12'(imm); return {i[11:5], 5'(rs2), 5'(rs1), 3'd2, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] br(input logic [2:0] f3, input int rs1, input int rs2, input int off);
    logic [12:0] i; i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] beq(input int rs1, input int rs2, input int off); return br(3'd0, rs1, rs2, off); endfunction
  function automatic logic [31:0] bne(input int rs1, input int rs2, input int off); return br(3'd1, rs1, rs2, off); endfunction
  function automatic logic [31:0] blt(input int rs1, input int rs2, input int off); return br(3'd4, rs1, rs2, off); endfunction
  function automatic logic [31:0] jal(input int rd, input int off);
    logic [20:0] i; i = 21'(off); return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] amoadd_d(input int rd, input int rs2, input int rs1);
    return {5'b00000, 2'b00, 5'(rs2), 5'(rs1), 3'd3, 5'(rd), 7'b0101111};
  endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction
  function automatic logic [31:0] vle64(input int vd, input int rs1); return {3'd0, 1'b0, 2'b00, 1'b1, 5'd0, 5'(rs1), 3'b111, 5'(vd), 7'b0000111}; endfunction
  function automatic logic [31:0] vse64(input int vs3, input int rs1); return {3'd0, 1'b0, 2'b00, 1'b1, 5'd0, 5'(rs1), 3'b111, 5'(vs3), 7'b0100111}; endfunction
  function automatic logic [31:0] opv(input logic [5:0] f6, input int vs2, input int s1, input logic [2:0] f3, input int vd);
    return {f6, 1'b1, 5'(vs2), 5'(s1), f3, 5'(vd), 7'b1010111};
  endfunction
  function automatic logic [31:0] vadd_vv(input int vd, input int vs2, input int vs1); return opv(6'b000000, vs2, vs1, 3'b000, vd); endfunction
  function automatic logic [31:0] vadd_vx(input int vd, input int vs2, input int rs1); return opv(6'b000000, vs2, rs1, 3'b100, vd); endfunction
  function automatic logic [31:0] vmul_vv(input int vd, input int vs2, input int vs1); return opv(6'b100101, vs2, vs1, 3'b010, vd); endfunction
  function automatic logic [31:0] vmv_v_i(input int vd, input int imm); return opv(6'b010111, 0, imm, 3'b011, vd); endfunction
  function automatic logic [31:0] vmv_v_x(input int vd, input int rs1); return opv(6'b010111, 0, rs1, 3'b100, vd); endfunction
  function automatic logic [31:0] vredsum_vs(input int vd, input int vs2, input int vs1); return opv(6'b000000, vs2, vs1, 3'b010, vd); endfunction
  function automatic logic [31:0] vmv_x_s(input int rd, input int vs2); return opv(6'b010000, vs2, 0, 3'b010, rd); endfunction
endpackage
