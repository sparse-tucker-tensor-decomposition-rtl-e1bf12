// tb_y_accumulator: self-checking test of the Y(n) store.
// Clears the store (checking the I_MAX*R-cycle clear time), then applies a
// stream of accumulations - often to the same word on consecutive cycles -
// and compares every word read back with a shadow model. A second clear must
// return every word to zero.
module tb_y_accumulator;
  import tucker_pkg::*;

  localparam int I_MAX = 200, R = 16, DEPTH = I_MAX * R;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear_start, clear_busy, acc_en, rd_en;
  logic [11:0] acc_addr, rd_addr;
  fx_t acc_data [R];
  fx_t rd_data [R];
  fx_t shadow [DEPTH][R];
  int checks = 0, failures = 0;
  longint cyc;

  y_accumulator #(.I_MAX(I_MAX), .R(R)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic do_clear();
    longint t0;
    @(negedge clk);
    clear_start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    clear_start = 1'b0;
    while (clear_busy) @(negedge clk);
    checks++;
    if (cyc - t0 != longint'(DEPTH) + 64'sd1) begin
      failures++;
      $display("clear took %0d cycles, expected %0d", cyc - t0, DEPTH + 1);
    end
    for (int a = 0; a < DEPTH; a++) for (int c = 0; c < R; c++) shadow[a][c] = '0;
  endtask

  task automatic check_all();
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1'b1; rd_addr = 12'(a);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      for (int c = 0; c < R; c++)
        if (rd_data[c] !== shadow[a][c]) begin
          failures++;
          if (failures < 5) $display("word %0d lane %0d: got %0d want %0d", a, c, rd_data[c], shadow[a][c]);
          break;
        end
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addr;
    cyc = 0; clear_start = 0; acc_en = 0; rd_en = 0; acc_addr = '0; rd_addr = '0;
    for (int c = 0; c < R; c++) acc_data[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    do_clear();
    check_all();
    addr = 0;
    for (int n = 0; n < 6000; n++) begin
      if (($urandom % 3) != 0) addr = $urandom % DEPTH;   // else: same word again
      acc_en = 1'b1; acc_addr = 12'(addr);
      for (int c = 0; c < R; c++) begin
        acc_data[c] = fx_t'($urandom % 32'h0010_0000) - fx_t'(32'h0008_0000);
        shadow[addr][c] = shadow[addr][c] + acc_data[c];
      end
      @(negedge clk);
    end
    acc_en = 1'b0;
    check_all();
    do_clear();
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
