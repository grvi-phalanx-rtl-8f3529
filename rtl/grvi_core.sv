// grvi_core: the GRVI RV32I processing element (PE).
//
// A two-stage pipeline in front of a synchronous instruction RAM:
//   fetch   - the core presents imem_addr with imem_en; the IRAM's registered
//             read returns the instruction in the next cycle (if imem_gnt).
//   decode  - decodes the instruction, reads the 2R/1W register file, and
//             forms the two operands through the operand multiplexers, which
//             also forward the result being written back by execute. The
//             operands, store data and branch target (PC unit adder) are
//             captured in the operand registers.
//   execute - ALU, dedicated comparator (branches, SLT/SLTU), PC unit for
//             jumps and branches, and the result multiplexer (ALU, compare,
//             return address, load data, shift). Writes the register file.
// Shifts are not done in the core: execute sends them to a shifter shared by
// the two PEs of a pair (sh_*), and waits for sh_gnt. Loads and stores leave
// through dreq to the cluster's 2:1 concentrator, which also does the shared
// byte/halfword handling; execute holds a store until dgnt and a load until
// drvalid (one cycle after dgnt at the earliest). A held execute stage stalls
// decode and fetch. A taken branch or jump is resolved in execute and
// squashes the one instruction behind it, so it costs one bubble; an
// ordinary ALU instruction takes one cycle, a load at least two.
//
// The pipeline shape, the datapath units and moving the shifter and sub-word
// memory logic out of the core follow the paper. The optional third stage
// (instruction fetch latch) is not built. FENCE and SYSTEM instructions
// execute as no-ops; there are no CSRs or traps. These are this design's
// choices, as is the request/grant handshake.
module grvi_core
  import grvi_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic        clk,
  input  logic        rst,
  // instruction RAM
  output logic        imem_en,
  output logic [9:0]  imem_addr,
  input  logic        imem_gnt,
  input  logic [31:0] imem_rdata,
  // data memory (through the 2:1 concentrator)
  output core_req_t   dreq,
  input  logic        dgnt,
  input  logic        drvalid,
  input  logic [31:0] drdata,
  // shared shifter
  output logic        sh_req,
  output logic [31:0] sh_a,
  output logic [4:0]  sh_amt,
  output sh_op_e      sh_op,
  input  logic        sh_gnt,
  input  logic [31:0] sh_y
);
  // ---------------- fetch / decode state ----------------
  logic        dc_valid;
  logic [31:0] dc_pc, fpc;

  // ---------------- execute state ----------------
  logic        ex_valid, ex_wen, ex_br, ex_jal, ex_jalr, ex_ld, ex_st, ex_sh;
  logic [31:0] ex_pc, ex_a, ex_b, ex_sd, ex_target;
  logic [4:0]  ex_rd;
  logic [2:0]  ex_f3;
  alu_op_e     ex_alu_op;
  res_sel_e    ex_res;
  sh_op_e      ex_sh_op;
  logic        ld_wait;

  // ---------------- execute stage ----------------
  logic [31:0] alu_y, result, jalr_target, redirect_pc;
  logic        cmp_take, cmp_lt, ex_done, stall, redirect, wb_en;

  grvi_alu u_alu (.op(ex_alu_op), .a(ex_a), .b(ex_b), .y(alu_y));
  grvi_cmp u_cmp (.a(ex_a), .b(ex_b), .funct3(ex_f3), .take(cmp_take), .lt(cmp_lt));

  assign jalr_target = {alu_y[31:1], 1'b0};

  always_comb begin
    dreq       = '0;
    dreq.we    = ex_st;
    dreq.addr  = alu_y;
    dreq.wdata = ex_sd;
    dreq.size  = size_e'(ex_f3[1:0]);
    dreq.uns   = ex_f3[2];
    sh_req     = 1'b0;
    ex_done    = 1'b1;
    if (ex_valid) begin
      if (ex_ld) begin
        dreq.valid = !ld_wait;
        ex_done    = ld_wait && drvalid;
      end else if (ex_st) begin
        dreq.valid = 1'b1;
        ex_done    = dgnt;
      end else if (ex_sh) begin
        sh_req  = 1'b1;
        ex_done = sh_gnt;
      end
    end
  end

  assign sh_a   = ex_a;
  assign sh_amt = ex_b[4:0];
  assign sh_op  = ex_sh_op;

  always_comb begin
    unique case (ex_res)
      RES_ALU:   result = alu_y;
      RES_CMP:   result = {31'd0, cmp_lt};
      RES_LINK:  result = ex_pc + 32'd4;
      RES_LOAD:  result = drdata;
      RES_SHIFT: result = sh_y;
      default:   result = alu_y;
    endcase
  end

  assign stall       = ex_valid && !ex_done;
  assign wb_en       = ex_valid && ex_done && ex_wen;
  assign redirect    = ex_valid && ex_done && (ex_jal || ex_jalr || (ex_br && cmp_take));
  assign redirect_pc = ex_jalr ? jalr_target : ex_target;

  always_ff @(posedge clk)
    if (rst)                     ld_wait <= 1'b0;
    else if (ex_valid && ex_ld)  ld_wait <= ld_wait ? !drvalid : dgnt;

  // ---------------- fetch ----------------
  assign imem_en   = !stall;
  assign imem_addr = redirect ? redirect_pc[11:2] : fpc[11:2];

  always_ff @(posedge clk) begin
    if (rst) begin
      dc_valid <= 1'b0;
      dc_pc    <= RESET_PC;
      fpc      <= RESET_PC;
    end else if (!stall) begin
      dc_valid <= imem_gnt;
      if (imem_gnt) begin
        dc_pc <= redirect ? redirect_pc : fpc;
        fpc   <= (redirect ? redirect_pc : fpc) + 32'd4;
      end else if (redirect) begin
        fpc   <= redirect_pc;
      end
    end
  end

  // ---------------- decode ----------------
  logic [31:0] ins;
  logic [6:0]  opc;
  logic [4:0]  rs1, rs2, rd;
  logic [2:0]  f3;
  logic        f7b5;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  logic [31:0] rf1, rf2, op1, op2;

  assign ins  = imem_rdata;
  assign opc  = ins[6:0];
  assign rd   = ins[11:7];
  assign f3   = ins[14:12];
  assign rs1  = ins[19:15];
  assign rs2  = ins[24:20];
  assign f7b5 = ins[30];
  assign imm_i = {{20{ins[31]}}, ins[31:20]};
  assign imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
  assign imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
  assign imm_u = {ins[31:12], 12'd0};
  assign imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};

  grvi_regfile u_rf (.clk(clk), .ra1(rs1), .ra2(rs2), .rd1(rf1), .rd2(rf2),
                     .we(wb_en), .wa(ex_rd), .wd(result));

  // Operand muxes: result forwarding from execute.
  assign op1 = (wb_en && ex_rd == rs1 && rs1 != 5'd0) ? result : rf1;
  assign op2 = (wb_en && ex_rd == rs2 && rs2 != 5'd0) ? result : rf2;

  always_ff @(posedge clk) begin
    if (rst) begin
      ex_valid <= 1'b0;
    end else if (!stall) begin
      ex_valid  <= dc_valid && !redirect;
      ex_pc     <= dc_pc;
      ex_rd     <= rd;
      ex_f3     <= f3;
      ex_sd     <= op2;
      ex_a      <= op1;
      ex_b      <= op2;
      ex_target <= dc_pc + ((opc == OP_JAL) ? imm_j : imm_b);   // PC unit
      ex_wen    <= 1'b0;
      ex_br     <= 1'b0;
      ex_jal    <= 1'b0;
      ex_jalr   <= 1'b0;
      ex_ld     <= 1'b0;
      ex_st     <= 1'b0;
      ex_sh     <= 1'b0;
      ex_alu_op <= ALU_ADD;
      ex_res    <= RES_ALU;
      ex_sh_op  <= SH_SLL;
      unique case (opc)
        OP_LUI: begin
          ex_b <= imm_u; ex_alu_op <= ALU_PASSB; ex_wen <= 1'b1;
        end
        OP_AUIPC: begin
          ex_a <= dc_pc; ex_b <= imm_u; ex_wen <= 1'b1;
        end
        OP_JAL: begin
          ex_jal <= 1'b1; ex_res <= RES_LINK; ex_wen <= 1'b1;
        end
        OP_JALR: begin
          ex_b <= imm_i; ex_jalr <= 1'b1; ex_res <= RES_LINK; ex_wen <= 1'b1;
        end
        OP_BRANCH: begin
          ex_br <= 1'b1;
        end
        OP_LOAD: begin
          ex_b <= imm_i; ex_ld <= 1'b1; ex_res <= RES_LOAD; ex_wen <= 1'b1;
        end
        OP_STORE: begin
          ex_b <= imm_s; ex_st <= 1'b1;
        end
        OP_IMM, OP_OP: begin
          ex_wen <= 1'b1;
          if (opc == OP_IMM) ex_b <= imm_i;
          unique case (f3)
            3'b000: ex_alu_op <= (opc == OP_OP && f7b5) ? ALU_SUB : ALU_ADD;
            3'b001: begin ex_sh <= 1'b1; ex_res <= RES_SHIFT; ex_sh_op <= SH_SLL; end
            3'b010, 3'b011: ex_res <= RES_CMP;
            3'b100: ex_alu_op <= ALU_XOR;
            3'b101: begin
              ex_sh <= 1'b1; ex_res <= RES_SHIFT; ex_sh_op <= f7b5 ? SH_SRA : SH_SRL;
            end
            3'b110: ex_alu_op <= ALU_OR;
            3'b111: ex_alu_op <= ALU_AND;
            default: ;
          endcase
        end
        default: ;   // FENCE, SYSTEM and unknown opcodes: no-op
      endcase
    end
  end
endmodule
