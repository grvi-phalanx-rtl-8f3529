// tb_grvi_concentrator: two PE request streams (random word, halfword and byte
// loads and stores) through the 2:1 concentrator into a word memory modelled
// by the testbench, with the crossbar grant withheld at random. Checks the
// forwarded word request (lane-steered data, byte enables, PE index), that the
// load data reaches the right PE aligned and sign/zero extended, the final
// memory contents against a byte-level reference, and round-robin alternation
// when both PEs ask every cycle.
`timescale 1ns/1ps
module tb_grvi_concentrator;
  import grvi_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  core_req_t [1:0] creq;
  logic [1:0]  cgnt, crvalid;
  logic [31:0] crdata;
  mem_req_t    mreq;
  logic        mgnt, mrvalid;
  logic [31:0] mrdata;
  int checks = 0, failures = 0, contention = 0;
  bit always_gnt = 1;

  grvi_concentrator #(.PAIR(1)) dut (.*);

  logic [31:0] mem [64];      // memory behind the crossbar
  logic [7:0]  refb [256];    // byte reference
  logic [31:0] exp_rd [2];
  logic [1:0]  waiting;       // load outstanding per PE


  always_ff @(posedge clk) begin
    mrvalid <= 1'b0;
    if (rst) begin
      mrvalid <= 1'b0;
    end else if (mreq.valid && mgnt) begin
      if (mreq.we) begin
        for (int j = 0; j < 4; j++) if (mreq.be[j]) mem[mreq.addr[7:2]][8*j +: 8] <= mreq.wdata[8*j +: 8];
      end else begin
        mrvalid <= 1'b1;
        mrdata  <= mem[mreq.addr[7:2]];
      end
    end
  end

  function automatic core_req_t rnd_req();
    core_req_t r;
    r.valid = 1;
    r.we    = $urandom_range(1);
    r.size  = size_e'($urandom_range(2));
    r.uns   = $urandom_range(1);
    r.addr  = {24'd0, 8'($urandom)};
    if (r.size == SZ_H) r.addr[0] = 0;
    if (r.size == SZ_W) r.addr[1:0] = 0;
    r.wdata = $urandom;
    return r;
  endfunction

  function automatic logic [31:0] ref_load(core_req_t r);
    logic [31:0] w;
    for (int j = 0; j < 4; j++) w[8*j +: 8] = refb[{r.addr[7:2], 2'(j)}];
    w = w >> (8 * r.addr[1:0]);
    case (r.size)
      SZ_B: return r.uns ? {24'd0, w[7:0]} : {{24{w[7]}}, w[7:0]};
      SZ_H: return r.uns ? {16'd0, w[15:0]} : {{16{w[15]}}, w[15:0]};
      default: return w;
    endcase
  endfunction

  task automatic ref_store(core_req_t r);
    int n = (r.size == SZ_B) ? 1 : (r.size == SZ_H) ? 2 : 4;
    for (int j = 0; j < n; j++) refb[r.addr[7:0] + 8'(j)] = r.wdata[8*j +: 8];
  endtask

  logic [1:0] last_g;
  initial begin
    for (int i = 0; i < 64; i++) mem[i] = 0;
    for (int i = 0; i < 256; i++) refb[i] = 0;
    creq = '0; waiting = 0; mgnt = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      if (n == 1000) always_gnt = 0;
      for (int p = 0; p < 2; p++)
        if (!creq[p].valid && !waiting[p] && (n < 500 || $urandom_range(1))) creq[p] = rnd_req();
      mgnt = always_gnt || ($urandom_range(2) != 0);
      #1;
      // forwarded request
      for (int p = 0; p < 2; p++) if (cgnt[p]) begin
        logic [3:0] be; logic [31:0] wd;
        case (creq[p].size)
          SZ_B: begin be = 4'b0001 << creq[p].addr[1:0]; wd = {4{creq[p].wdata[7:0]}}; end
          SZ_H: begin be = creq[p].addr[1] ? 4'b1100 : 4'b0011; wd = {2{creq[p].wdata[15:0]}}; end
          default: begin be = 4'b1111; wd = creq[p].wdata; end
        endcase
        checks++;
        if (mreq.addr[7:2] !== creq[p].addr[7:2] || mreq.we !== creq[p].we || mreq.pe !== 3'(2 + p) ||
            (creq[p].we && (mreq.be !== be || (mreq.wdata & {{8{be[3]}},{8{be[2]}},{8{be[1]}},{8{be[0]}}}) !==
                                               (wd & {{8{be[3]}},{8{be[2]}},{8{be[1]}},{8{be[0]}}}))))
        begin failures++; $display("FAIL forwarded request of PE %0d", p); end
      end
      checks++;
      if ((cgnt & ~{creq[1].valid, creq[0].valid}) != 0 || cgnt == 2'b11) begin
        failures++; $display("FAIL grant %b", cgnt);
      end
      if (n < 500 && creq[0].valid && creq[1].valid) begin
        contention++;
        checks++;
        if (cgnt == last_g) begin failures++; $display("FAIL round robin"); end
      end
      last_g = cgnt;
      // load data of earlier grants
      for (int p = 0; p < 2; p++) if (crvalid[p]) begin
        checks++;
        if (!waiting[p] || crdata !== exp_rd[p]) begin
          failures++; $display("FAIL load data PE %0d: %h vs %h w=%0d n=%0d", p, crdata, exp_rd[p], waiting[p], n);
        end
        waiting[p] = 0;
      end
      for (int p = 0; p < 2; p++) if (cgnt[p]) begin
        if (creq[p].we) ref_store(creq[p]);
        else begin waiting[p] = 1; exp_rd[p] = ref_load(creq[p]); end
      end
      @(posedge clk); #1;
      for (int p = 0; p < 2; p++) if (cgnt[p]) creq[p].valid = 0;
    end
    repeat (2) @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (mem[i] !== {refb[4*i+3], refb[4*i+2], refb[4*i+1], refb[4*i]}) begin
        failures++; $display("FAIL memory word %0d", i);
      end
    end
    checks++;
    if (contention < 50) begin failures++; $display("FAIL contention %0d", contention); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
