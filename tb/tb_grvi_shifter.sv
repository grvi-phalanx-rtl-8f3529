// tb_grvi_shifter: two requesters share the shifter. Checks the result of
// every granted shift, that exactly one requester is granted when any asks,
// and that under constant contention the grants alternate (round robin).
`timescale 1ns/1ps
module tb_grvi_shifter;
  import grvi_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [1:0]       req, gnt;
  logic [1:0][31:0] a;
  logic [1:0][4:0]  amt;
  sh_op_e [1:0]     op;
  logic [31:0]      y, e;
  int checks = 0, failures = 0, alternations = 0;
  logic [1:0] last_gnt;
  grvi_shifter #(.N(2)) dut (.*);
  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      req = (n < 1000) ? 2'b11 : 2'($urandom);
      for (int i = 0; i < 2; i++) begin
        a[i] = $urandom; amt[i] = 5'($urandom); op[i] = sh_op_e'($urandom_range(2));
      end
      #1;
      checks++;
      if (req != 0 && !$onehot(gnt)) begin failures++; $display("FAIL grant %b for %b", gnt, req); end
      if ((gnt & ~req) != 0) begin failures++; $display("FAIL grant without request"); end
      for (int i = 0; i < 2; i++) if (gnt[i]) begin
        case (op[i])
          SH_SLL: e = a[i] << amt[i];
          SH_SRL: e = a[i] >> amt[i];
          default: e = 32'($signed(a[i]) >>> amt[i]);
        endcase
        checks++;
        if (y !== e) begin failures++; $display("FAIL shift op %0d %h by %0d -> %h", op[i], a[i], amt[i], y); end
      end
      if (n > 0 && n < 1000) begin
        checks++;
        if (gnt == last_gnt) begin failures++; $display("FAIL no alternation at %0d", n); end
      end
      last_gnt = gnt;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
