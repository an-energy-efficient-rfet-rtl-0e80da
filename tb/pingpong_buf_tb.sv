// pingpong_buf_tb: fills both banks through the off-chip port (8 rows per beat,
// the last beat wrapping around the end of the bank), overwrites some rows
// through the output-buffer port, including one written by both ports in the
// same cycle, and compares row-port and host-port reads with a model of the
// two banks. Reads are checked one cycle after the address.
module pingpong_buf_tb;
  localparam int R = 64, RB = 25, XR = 8;
  typedef logic [RB-1:0][7:0] row_t;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic ext_we = 0, ext_bank = 0; logic [5:0] ext_addr = 0; logic [XR-1:0][RB-1:0][7:0] ext_data;
  logic int_we = 0, int_bank = 0; logic [5:0] int_addr = 0; row_t int_data;
  logic rd_en = 0, rd_bank = 0;   logic [5:0] rd_addr = 0;  row_t rd_row;
  logic hr_bank = 0; logic [5:0] hr_addr = 0; row_t hr_row;
  row_t model [2][R];
  pingpong_buf dut (.*);
  always #5 clk = ~clk;

  function automatic row_t rand_row();
    row_t r;
    for (int i = 0; i < RB; i++) r[i] = 8'($urandom);
    return r;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    @(negedge clk);
    // 9 beats per bank starting at row 0: the ninth wraps onto rows 0..7
    for (int b = 0; b < 2; b++)
      for (int k = 0; k < 9; k++) begin
        ext_we = 1; ext_bank = b[0]; ext_addr = 6'(k * XR);
        for (int i = 0; i < XR; i++) begin
          ext_data[i] = rand_row();
          model[b][(k * XR + i) % R] = ext_data[i];
        end
        @(negedge clk);
      end
    ext_we = 0;
    // output-buffer writes into bank 1, the first one together with an ext beat
    for (int k = 0; k < 4; k++) begin
      int_we = 1; int_bank = 1; int_addr = 6'(20 + k);
      int_data = rand_row();
      if (k == 0) begin
        ext_we = 1; ext_bank = 1; ext_addr = 6'(16);
        for (int i = 0; i < XR; i++) begin
          ext_data[i] = rand_row();
          model[1][16 + i] = ext_data[i];
        end
      end else ext_we = 0;
      model[1][20 + k] = int_data;
      @(negedge clk);
    end
    int_we = 0; ext_we = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(0, R - 1);
      automatic int h = $urandom_range(0, R - 1);
      rd_en = 1; rd_bank = k[0]; rd_addr = 6'(a);
      hr_bank = ~k[0]; hr_addr = 6'(h);
      @(negedge clk);
      rd_en = 0;
      checks += 2;
      if (rd_row != model[k % 2][a]) begin failures++; $display("FAIL row bank %0d row %0d", k % 2, a); end
      if (hr_row != model[1 - k % 2][h]) begin failures++; $display("FAIL host read row %0d", h); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
