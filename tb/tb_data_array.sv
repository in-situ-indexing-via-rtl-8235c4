// tb_data_array: random row writes to the 128 x 128 normal-cell array, then every row
// read back and every column read compared with a reference copy; also checks the
// cleared state after reset.
module tb_data_array;
  localparam int ROWS = 128, DW = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [6:0] wr_row, rd_row, col_sel;
  logic [DW-1:0] wr_data, rd_data;
  logic [ROWS-1:0] colb;
  logic [DW-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  data_array #(.ROWS(ROWS), .DW(DW)) dut (.clk, .rst_n, .wr_en, .wr_row, .wr_data,
    .rd_row, .rd_data, .col_sel, .col_bits(colb));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endtask

  initial begin
    wr_en = 0; wr_row = 0; rd_row = 0; col_sel = 0; wr_data = 0;
    for (int r = 0; r < ROWS; r++) ref_mem[r] = '0;
    #12 rst_n = 1;
    rd_row = 7'd5; #1 chk(rd_data == '0, "reset row");
    for (int n = 0; n < 400; n++) begin
      int r;
      logic [DW-1:0] d;
      r = $urandom % ROWS;
      d = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); wr_en = 1; wr_row = 7'(r); wr_data = d;
      @(negedge clk); wr_en = 0; ref_mem[r] = d;
    end
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 7'(r); #1 chk(rd_data == ref_mem[r], $sformatf("row %0d", r));
    end
    for (int c = 0; c < DW; c++) begin
      col_sel = 7'(c); #1;
      for (int r = 0; r < ROWS; r++) chk(colb[r] == ref_mem[r][c], $sformatf("col %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
