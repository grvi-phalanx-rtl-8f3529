// tb_grvi_core: self-checking testbench of one GRVI core.
//
// The testbench plays the core's surroundings: a 1K-word instruction RAM with
// a synchronous read whose grant is withheld at random, a data memory that
// does its own byte/halfword handling and grants requests and returns load
// data after random delays, and a shifter that grants at random. The program
// exercises every RV32I instruction class, forwarding (including load-use),
// taken and untaken branches of all six kinds, JAL/JALR/AUIPC and sub-word
// loads and stores; the stored results are compared with hand-computed
// values. A first run with every grant immediate also checks the pipeline
// timing: a ten-iteration three-instruction loop takes 42 cycles from the
// store before it to the store after it (one bubble per taken branch).
`timescale 1ns/1ps
module tb_grvi_core;
  import grvi_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        imem_en, imem_gnt;
  logic [9:0]  imem_addr;
  logic [31:0] imem_rdata;
  core_req_t   dreq;
  logic        dgnt, drvalid;
  logic [31:0] drdata;
  logic        sh_req, sh_gnt;
  logic [31:0] sh_a, sh_y;
  logic [4:0]  sh_amt;
  sh_op_e      sh_op;

  grvi_core dut (.*);

  int checks = 0, failures = 0;
  bit random_mode = 0;
  logic [31:0] prog [1024];
  logic [31:0] dmem [1024];

  // instruction RAM model
  always_comb imem_gnt = !random_mode || ($urandom_range(3) != 0);
  always_ff @(posedge clk) if (imem_en && imem_gnt) imem_rdata <= prog[imem_addr];

  // shifter model
  always_comb begin
    sh_gnt = sh_req && (!random_mode || ($urandom_range(2) != 0));
    unique case (sh_op)
      SH_SLL:  sh_y = sh_a << sh_amt;
      SH_SRL:  sh_y = sh_a >> sh_amt;
      default: sh_y = 32'($signed(sh_a) >>> sh_amt);
    endcase
  end

  // data memory model: grant after a random wait, load data one or more cycles later
  int  wait_q;
  logic        pend;
  int          pend_dly;
  logic [31:0] pend_data;
  always_comb dgnt = dreq.valid && (wait_q == 0);
  always_ff @(posedge clk) begin
    drvalid <= 1'b0;
    if (dreq.valid && !dgnt) wait_q <= wait_q - 1;
    if (dgnt) begin
      wait_q <= random_mode ? $urandom_range(2) : 0;
      if (dreq.we) store(dreq.addr, dreq.wdata, dreq.size);
      else begin
        pend      <= 1'b1;
        pend_dly  <= random_mode ? $urandom_range(2) : 0;
        pend_data <= load(dreq.addr, dreq.size, dreq.uns);
      end
    end else if (pend) begin
      if (pend_dly == 0) begin
        drvalid <= 1'b1;
        drdata  <= pend_data;
        pend    <= 1'b0;
      end else pend_dly <= pend_dly - 1;
    end
  end

  function automatic logic [31:0] load(logic [31:0] a, size_e sz, logic uns);
    logic [31:0] w = dmem[a[11:2]];
    logic [31:0] s = w >> (8 * a[1:0]);
    unique case (sz)
      SZ_B:    return uns ? {24'd0, s[7:0]} : {{24{s[7]}}, s[7:0]};
      SZ_H:    return uns ? {16'd0, s[15:0]} : {{16{s[15]}}, s[15:0]};
      default: return w;
    endcase
  endfunction

  task automatic store(logic [31:0] a, logic [31:0] d, size_e sz);
    unique case (sz)
      SZ_B:    dmem[a[11:2]][8*a[1:0] +: 8] = d[7:0];
      SZ_H:    dmem[a[11:2]][16*a[1] +: 16] = d[15:0];
      default: dmem[a[11:2]] = d;
    endcase
  endtask

  // marker timing
  longint cyc = 0, t_m1 = -1, t_m2 = -1;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (dgnt && dreq.we && dreq.addr == 32'h13C) t_m1 <= cyc;
    if (dgnt && dreq.we && dreq.addr == 32'h140) t_m2 <= cyc;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  task automatic load_program();
    int n = 0;
    foreach (prog[i]) prog[i] = ADDI(0, 0, 0);
    prog[n++] = LUI(1, 32'h12345);
    prog[n++] = ADDI(1, 1, 32'h678);
    prog[n++] = SW(1, 0, 32'h100);
    prog[n++] = ADDI(2, 0, -5);
    prog[n++] = SRAI(3, 2, 1);
    prog[n++] = SRLI(4, 2, 28);
    prog[n++] = SLLI(5, 4, 4);
    prog[n++] = SW(3, 0, 32'h104);
    prog[n++] = SW(4, 0, 32'h108);
    prog[n++] = SW(5, 0, 32'h10C);
    prog[n++] = SLT(6, 2, 4);
    prog[n++] = SLTU(7, 2, 4);
    prog[n++] = SUB(8, 4, 5);
    prog[n++] = XOR(9, 1, 2);
    prog[n++] = OR(10, 4, 5);
    prog[n++] = AND(11, 1, 5);
    prog[n++] = SW(6, 0, 32'h110);
    prog[n++] = SW(7, 0, 32'h114);
    prog[n++] = SW(8, 0, 32'h118);
    prog[n++] = SW(9, 0, 32'h11C);
    prog[n++] = SW(10, 0, 32'h120);
    prog[n++] = SW(11, 0, 32'h124);
    prog[n++] = SB(1, 0, 32'h129);
    prog[n++] = SH(1, 0, 32'h12E);
    prog[n++] = LB(12, 0, 32'h100);
    prog[n++] = LBU(13, 0, 32'h103);
    prog[n++] = LH(14, 0, 32'h104);
    prog[n++] = LHU(15, 0, 32'h106);
    prog[n++] = ADD(16, 12, 13);
    prog[n++] = SW(16, 0, 32'h130);
    prog[n++] = SW(14, 0, 32'h134);
    prog[n++] = SW(15, 0, 32'h138);
    prog[n++] = SW(0, 0, 32'h13C);        // 32: marker 1
    prog[n++] = ADDI(17, 0, 10);
    prog[n++] = ADDI(18, 0, 0);
    prog[n++] = ADDI(18, 18, 3);          // 35: loop
    prog[n++] = ADDI(17, 17, -1);
    prog[n++] = BNE(17, 0, -8);
    prog[n++] = SW(18, 0, 32'h140);       // 38: marker 2
    prog[n++] = BEQ(0, 0, 8);             // 39
    prog[n++] = SW(1, 0, 32'h144);        // skipped
    prog[n++] = BLT(2, 0, 8);             // 41
    prog[n++] = SW(1, 0, 32'h148);        // skipped
    prog[n++] = BGE(2, 0, 8);             // 43 not taken
    prog[n++] = ADDI(19, 0, 1);
    prog[n++] = BLTU(0, 2, 8);            // 45 taken
    prog[n++] = ADDI(19, 19, 100);        // skipped
    prog[n++] = BGEU(4, 5, 8);            // 47 not taken
    prog[n++] = ADDI(19, 19, 2);
    prog[n++] = BNE(0, 0, 8);             // 49 not taken
    prog[n++] = ADDI(19, 19, 4);
    prog[n++] = SW(19, 0, 32'h14C);       // 51
    prog[n++] = JAL(20, 12);              // 52 -> 55
    prog[n++] = SW(1, 0, 32'h150);
    prog[n++] = SW(1, 0, 32'h150);
    prog[n++] = SW(20, 0, 32'h154);       // 55
    prog[n++] = AUIPC(21, 0);             // 56
    prog[n++] = JALR(22, 21, 16);         // 57 -> 60
    prog[n++] = SW(1, 0, 32'h158);
    prog[n++] = SW(1, 0, 32'h158);
    prog[n++] = SW(22, 0, 32'h15C);       // 60
    prog[n++] = SW(21, 0, 32'h160);
    prog[n++] = XORI(23, 2, 32'hFF);
    prog[n++] = ORI(24, 4, 32'h100);
    prog[n++] = ANDI(25, 1, -16);
    prog[n++] = SLTI(26, 2, -4);
    prog[n++] = SLTIU(27, 4, 16);
    prog[n++] = SLL(28, 4, 4);
    prog[n++] = SRA(29, 2, 6);
    prog[n++] = SRL(30, 1, 6);
    for (int r = 23; r <= 30; r++) prog[n++] = SW(5'(r), 0, 32'h164 + 4 * (r - 23));
    prog[n++] = ADDI(31, 0, 1);
    prog[n++] = SW(31, 0, 32'h184);       // done flag
    prog[n++] = JAL(0, 0);
  endtask

  task automatic run_once(bit rnd);
    random_mode = rnd;
    foreach (dmem[i]) dmem[i] = '0;
    rst = 1; wait_q = 0; pend = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    fork
      begin : wait_done
        while (dmem[32'h184 >> 2] != 1) @(posedge clk);
      end
      begin
        repeat (3000) @(posedge clk);
        $display("FAIL program did not finish");
        failures++;
      end
    join_any
    disable fork;
    repeat (5) @(posedge clk);
    chk("lui/addi", dmem[32'h100 >> 2], 32'h12345678);
    chk("srai",     dmem[32'h104 >> 2], 32'hFFFFFFFD);
    chk("srli",     dmem[32'h108 >> 2], 32'h0000000F);
    chk("slli",     dmem[32'h10C >> 2], 32'h000000F0);
    chk("slt",      dmem[32'h110 >> 2], 32'd1);
    chk("sltu",     dmem[32'h114 >> 2], 32'd0);
    chk("sub",      dmem[32'h118 >> 2], 32'hFFFFFF1F);
    chk("xor",      dmem[32'h11C >> 2], 32'hEDCBA983);
    chk("or",       dmem[32'h120 >> 2], 32'h000000FF);
    chk("and",      dmem[32'h124 >> 2], 32'h00000070);
    chk("sb",       dmem[32'h128 >> 2], 32'h00007800);
    chk("sh",       dmem[32'h12C >> 2], 32'h56780000);
    chk("lb+lbu",   dmem[32'h130 >> 2], 32'h0000008A);
    chk("lh",       dmem[32'h134 >> 2], 32'hFFFFFFFD);
    chk("lhu",      dmem[32'h138 >> 2], 32'h0000FFFF);
    chk("loop",     dmem[32'h140 >> 2], 32'd30);
    chk("beq",      dmem[32'h144 >> 2], 32'd0);
    chk("blt",      dmem[32'h148 >> 2], 32'd0);
    chk("branches", dmem[32'h14C >> 2], 32'd7);
    chk("jal skip", dmem[32'h150 >> 2], 32'd0);
    chk("jal link", dmem[32'h154 >> 2], 32'hD4);
    chk("jalr skip",dmem[32'h158 >> 2], 32'd0);
    chk("jalr link",dmem[32'h15C >> 2], 32'hE8);
    chk("auipc",    dmem[32'h160 >> 2], 32'hE0);
    chk("xori",     dmem[32'h164 >> 2], 32'hFFFFFF04);
    chk("ori",      dmem[32'h168 >> 2], 32'h0000010F);
    chk("andi",     dmem[32'h16C >> 2], 32'h12345670);
    chk("slti",     dmem[32'h170 >> 2], 32'd1);
    chk("sltiu",    dmem[32'h174 >> 2], 32'd1);
    chk("sll",      dmem[32'h178 >> 2], 32'h00078000);
    chk("sra",      dmem[32'h17C >> 2], 32'hFFFFFFFD);
    chk("srl",      dmem[32'h180 >> 2], 32'h091A2B3C);
    if (!rnd) chk("loop cycles", 32'(t_m2 - t_m1), 32'd42);
  endtask

  initial begin
    load_program();
    run_once(0);
    run_once(1);
    run_once(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
