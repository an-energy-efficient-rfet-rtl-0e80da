// output_buffer_tb: captures random 8x16 result sets with 16, 4 and 1 results
// per channel and checks every write: the results laid out as bytes j*8 + c,
// cut into 25-byte rows (zero padded) written to rows o_addr, o_addr+1, ...,
// busy while writing, done with the last row, and the right number of rows.
module output_buffer_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cap = 0;
  logic [7:0][15:0][7:0] vals;
  logic [4:0] nout;
  logic [5:0] o_addr;
  logic wr_en, busy, done;
  logic [5:0] wr_addr;
  logic [24:0][7:0] wr_data;
  output_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    automatic int ns [3] = '{16, 4, 1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy || wr_en) begin failures++; $display("FAIL busy after reset"); end
    for (int it = 0; it < 9; it++) begin
      logic [7:0][15:0][7:0] v;
      logic [7:0] flat [150];
      automatic int n = ns[it % 3], a = $urandom_range(0, 63), writes = 0;
      automatic int nrows = (n * 8 + 24) / 25;
      for (int c = 0; c < 8; c++) for (int m = 0; m < 16; m++) v[c][m] = 8'($urandom);
      for (int f = 0; f < 150; f++) flat[f] = (f / 8 < n) ? v[f % 8][f / 8] : 8'd0;
      vals = v; nout = 5'(n); o_addr = 6'(a); cap = 1;
      @(negedge clk);
      cap = 0; vals = '0;
      for (int j = 0; j < 12; j++) begin
        if (wr_en) begin
          checks += 3;
          if (int'(wr_addr) != (a + writes) % 64) begin failures++; $display("FAIL addr"); end
          for (int b = 0; b < 25; b++)
            if (wr_data[b] != flat[writes * 25 + b]) begin
              failures++; $display("FAIL row %0d byte %0d", writes, b); break;
            end
          if (done != (writes == nrows - 1)) begin failures++; $display("FAIL done flag"); end
          writes++;
        end
        @(negedge clk);
      end
      checks++;
      if (writes != nrows || busy) begin failures++; $display("FAIL %0d rows for nout %0d", writes, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
