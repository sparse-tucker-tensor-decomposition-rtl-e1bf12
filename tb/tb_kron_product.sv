// tb_kron_product: self-checking test of the Kronecker row step.
// Random row vectors a (R2 = 32) and b (R3 = 32) are fed one element of a
// per cycle; the collected segments must equal c[R3*i + j] = a[i]*b[j],
// computed here with 64-bit integer arithmetic, and the whole product must
// come out R2 cycles after its first step plus the one-cycle latency.
module tb_kron_product;
  import tucker_pkg::*;

  localparam int R2 = 32, R3 = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic step_valid, c_valid;
  logic [7:0] step_i, c_i;
  fx_t a_i;
  fx_t b_vec [R3];
  fx_t c_seg [R3];
  fx_t a [R2];
  fx_t c [R2*R3];
  int  checks = 0, failures = 0, seen;
  longint cyc, first_cyc, last_cyc;

  kron_product #(.R3(R3), .IW(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (c_valid) begin
    for (int j = 0; j < R3; j++) c[R3 * int'(c_i) + j] = c_seg[j];
    if (seen == 0) first_cyc = cyc;
    last_cyc = cyc;
    seen++;
  end

  function automatic int ref_mul(input int x, input int y);
    longint p;
    p = longint'(x) * longint'(y);
    return int'(p >>> 16);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; step_valid = 0; step_i = '0; a_i = '0; seen = 0;
    for (int j = 0; j < R3; j++) b_vec[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < R2; i++) a[i] = fx_t'($urandom);
      for (int j = 0; j < R3; j++) b_vec[j] = fx_t'($urandom % 32'h0010_0000) - fx_t'(32'h0008_0000);
      if (rep == 3) begin a[5] = fx_t'(32'h0001_0000); b_vec[7] = fx_t'(32'hFFFF_0000); end
      seen = 0;
      @(negedge clk);
      for (int i = 0; i < R2; i++) begin
        step_valid = 1'b1; step_i = 8'(i); a_i = a[i];
        @(negedge clk);
      end
      step_valid = 1'b0;
      repeat (3) @(negedge clk);
      checks++;
      if (seen != R2 || last_cyc - first_cyc != longint'(R2) - 64'sd1) begin
        failures++;
        $display("rep %0d: %0d segments over %0d cycles", rep, seen, last_cyc - first_cyc + 1);
      end
      for (int i = 0; i < R2; i++)
        for (int j = 0; j < R3; j++) begin
          checks++;
          if (c[R3*i + j] !== fx_t'(ref_mul(a[i], b_vec[j]))) begin
            failures++;
            if (failures < 5) $display("c[%0d] got %0d want %0d", R3*i+j, c[R3*i+j], ref_mul(a[i], b_vec[j]));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
