// tb_dphls_row_buffer: self-checking test of the preserved row buffer.
//
// Writes random scores to random entries while reading others, checks each
// read against a shadow array, and checks that a read of the entry being
// written in the same cycle returns the old score.
module tb_dphls_row_buffer;
  import dphls_pkg::*;

  localparam int D = 64;
  localparam int AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [AW-1:0] waddr, raddr;
  score_t wdata, rdata;
  score_t shadow [D];

  dphls_row_buffer #(.MAX_REFERENCE_LENGTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < D; a++) begin
      we = 1; waddr = AW'(a); wdata = score_t'($urandom); shadow[a] = wdata;
      @(posedge clk); #1;
    end
    for (int t = 0; t < 2000; t++) begin
      we = ($urandom % 2) == 1; waddr = AW'($urandom); wdata = score_t'($urandom);
      raddr = (t % 5 == 0) ? waddr : AW'($urandom);
      #1;
      check(rdata == shadow[raddr], $sformatf("read [%0d] %0d exp %0d", raddr, rdata, shadow[raddr]));
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
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
