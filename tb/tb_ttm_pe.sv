// tb_ttm_pe: self-checking test of one TTM processing element.
// Random operand sequences are fed with random New-Batch marks and idle
// cycles; a reference sum, computed with 64-bit integer arithmetic in the
// testbench, is compared with the result buffer after every cycle.
module tb_ttm_pe;
  import tucker_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en, new_batch;
  fx_t  y_in, u_in, acc;
  int   checks = 0, failures = 0;
  longint ref_acc;

  ttm_pe dut (.clk, .rst_n, .en, .new_batch, .y_in, .u_in, .acc);

  always #5 clk = ~clk;

  function automatic longint ref_mul(input int a, input int b);
    longint p;
    p = longint'(a) * longint'(b);
    return longint'(int'(p >>> 16));
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; new_batch = 0; y_in = '0; u_in = '0; ref_acc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    if (acc !== '0) failures++;
    checks++;
    for (int n = 0; n < 2000; n++) begin
      en        = ($urandom % 4) != 0;
      new_batch = ($urandom % 8) == 0 || n == 0;
      y_in      = fx_t'($urandom % 32'h0008_0000) - fx_t'(32'h0004_0000);
      u_in      = fx_t'($urandom % 32'h0008_0000) - fx_t'(32'h0004_0000);
      if (en) ref_acc = (new_batch ? 0 : ref_acc) + ref_mul(y_in, u_in);
      ref_acc = longint'(int'(ref_acc));
      @(negedge clk);
      checks++;
      if (acc !== fx_t'(ref_acc)) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d: got %0d want %0d", n, acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
