// tb_move_ctrl: loads random indicator and valid columns (512 rows) and walks the move
// control; it must present exactly the valid rows, in ascending order, each with its
// own indicator bit, and then report nothing pending.
module tb_move_ctrl;
  localparam int N = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, next, cur_valid, cur_to_z;
  logic [N-1:0] ind, vld;
  logic [8:0] cur_row;
  int checks = 0, failures = 0;

  move_ctrl #(.NROWS(N)) dut (.clk, .rst_n, .load, .ind_col(ind), .valid_col(vld),
    .next, .cur_valid, .cur_row, .cur_to_z);

  initial begin
    load = 0; next = 0; ind = '0; vld = '0;
    #12 rst_n = 1;
    @(negedge clk); checks++; if (cur_valid) failures++;
    for (int t = 0; t < 6; t++) begin
      for (int i = 0; i < N / 32; i++) begin
        ind[i*32 +: 32] = $urandom;
        vld[i*32 +: 32] = (t == 0) ? '0 : (t == 1 ? '1 : $urandom & $urandom);
      end
      load = 1; @(negedge clk); load = 0;
      for (int r = 0; r < N; r++) begin
        if (vld[r]) begin
          checks++;
          if (!cur_valid || int'(cur_row) != r || cur_to_z != ind[r]) begin
            failures++;
            if (failures < 5) $display("FAIL t=%0d exp row %0d got v=%b row=%0d z=%b", t, r, cur_valid, cur_row, cur_to_z);
          end
          next = 1; @(negedge clk); next = 0;
        end
      end
      checks++;
      if (cur_valid) begin failures++; $display("FAIL rows left after walk"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
