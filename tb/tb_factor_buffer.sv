// tb_factor_buffer: self-checking test of the factor store.
// Fills U_1..U_3 (200 x 16 each) with random rows, then reads random rows on
// ports A and B at once and compares with a shadow copy, checking the
// one-cycle latency and that data holds while no read is issued. Writes and
// reads of other rows are interleaved.
module tb_factor_buffer;
  import tucker_pkg::*;

  localparam int I_MAX = 200, R = 16;

  logic clk = 1'b0;
  logic wr_en, a_rd_en, b_rd_en;
  logic [1:0] wr_mode, a_rd_mode, b_rd_mode;
  logic [7:0] wr_row, a_rd_row, b_rd_row;
  fx_t wr_data [R];
  fx_t a_rd_data [R];
  fx_t b_rd_data [R];
  fx_t shadow [3][I_MAX][R];
  int checks = 0, failures = 0;

  factor_buffer #(.I_MAX(I_MAX), .R(R)) dut (.*);

  always #5 clk = ~clk;

  task automatic write_row(input int m, input int r);
    for (int c = 0; c < R; c++) begin
      wr_data[c] = fx_t'($urandom);
      shadow[m][r][c] = wr_data[c];
    end
    wr_en = 1'b1; wr_mode = 2'(m); wr_row = 8'(r);
  endtask

  task automatic compare(input string port, input fx_t got [R], input int m, input int r);
    checks++;
    for (int c = 0; c < R; c++)
      if (got[c] !== shadow[m][r][c]) begin
        failures++;
        $display("port %s U%0d row %0d col %0d: got %h want %h", port, m + 1, r, c, got[c], shadow[m][r][c]);
        break;
      end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int am, ar, bm, br;
    wr_en = 0; a_rd_en = 0; b_rd_en = 0;
    wr_mode = '0; wr_row = '0; a_rd_mode = '0; a_rd_row = '0; b_rd_mode = '0; b_rd_row = '0;
    for (int c = 0; c < R; c++) wr_data[c] = '0;
    @(negedge clk);
    for (int m = 0; m < 3; m++)
      for (int r = 0; r < I_MAX; r++) begin
        write_row(m, r);
        @(negedge clk);
      end
    wr_en = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      am = $urandom % 3; ar = $urandom % I_MAX;
      bm = $urandom % 3; br = $urandom % I_MAX;
      a_rd_en = 1'b1; a_rd_mode = 2'(am); a_rd_row = 8'(ar);
      b_rd_en = 1'b1; b_rd_mode = 2'(bm); b_rd_row = 8'(br);
      @(negedge clk);
      a_rd_en = 1'b0; b_rd_en = 1'b0;
      compare("A", a_rd_data, am, ar);
      compare("B", b_rd_data, bm, br);
      // idle cycle with a write elsewhere: outputs must hold
      if (n % 3 == 0) begin
        int wm, wr;
        wm = $urandom % 3; wr = $urandom % I_MAX;
        if (!((wm == am && wr == ar) || (wm == bm && wr == br))) write_row(wm, wr);
      end
      @(negedge clk);
      wr_en = 1'b0;
      compare("A", a_rd_data, am, ar);
      compare("B", b_rd_data, bm, br);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
