// tb_dphls_tb_mem: self-checking test of the banked traceback memory.
//
// Writes whole wavefronts (one address, random per-bank enables and
// pointers) and reads every bank/address back against a shadow copy;
// disabled banks must keep their old contents.
module tb_dphls_tb_mem;
  import dphls_pkg::*;

  localparam int N_PE = 8;
  localparam int DEPTH = 100;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_PE-1:0] we;
  logic [AW-1:0] waddr, raddr;
  tb_ptr_e wdata [N_PE];
  logic [$clog2(N_PE)-1:0] rbank;
  tb_ptr_e rdata;
  tb_ptr_e shadow [N_PE][DEPTH];

  dphls_tb_mem #(.N_PE(N_PE), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .rbank, .raddr, .rdata);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    rbank = '0; raddr = '0;
    for (int a = 0; a < DEPTH; a++) begin
      we = '1; waddr = AW'(a);
      for (int p = 0; p < N_PE; p++) begin wdata[p] = tb_ptr_e'($urandom); shadow[p][a] = wdata[p]; end
      @(posedge clk); #1;
    end
    for (int t = 0; t < 300; t++) begin
      we = N_PE'($urandom); waddr = AW'($urandom % DEPTH);
      for (int p = 0; p < N_PE; p++) wdata[p] = tb_ptr_e'($urandom);
      @(posedge clk); #1;
      for (int p = 0; p < N_PE; p++) if (we[p]) shadow[p][waddr] = wdata[p];
      we = '0;
      for (int k = 0; k < 8; k++) begin
        rbank = $clog2(N_PE)'($urandom); raddr = (k == 0) ? waddr : AW'($urandom % DEPTH);
        #1;
        check(rdata == shadow[rbank][raddr], $sformatf("bank %0d addr %0d: %0d exp %0d", rbank, raddr, rdata, shadow[rbank][raddr]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
