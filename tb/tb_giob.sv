// tb_giob: random push/pop traffic through the 2-entry response buffer. Every word
// must come out once and in order; the buffer must refuse a third word while full
// and must be readable the cycle after a push.
module tb_giob;
  localparam int W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0, full_seen = 0;
  logic [W-1:0] q [$];
  int sent = 0, got = 0;

  giob #(.W(W), .DEPTH(2)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data);

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    #12 rst_n = 1;
    @(negedge clk);
    checks++; if (out_valid || !in_ready) failures++;
    // one push, readable next cycle
    in_valid = 1; in_data = 32'hA5A5_0001;
    @(negedge clk); in_valid = 0;
    checks++; if (!out_valid || out_data != 32'hA5A5_0001) failures++;
    out_ready = 1; @(negedge clk); out_ready = 0;
    checks++; if (out_valid) failures++;
    // random traffic
    while (got < 300) begin
      in_valid  = (sent < 300) && ($urandom % 3 != 0);
      in_data   = $urandom;
      out_ready = ($urandom % 4 == 0) ? 1'b0 : (got > 100 ? 1'b1 : ($urandom % 2 == 0));
      @(posedge clk);
      if (in_valid && !in_ready) full_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin
          failures++;
          if (failures < 5) $display("FAIL got %h", out_data);
        end
        if (q.size() != 0) void'(q.pop_front());
        got++;
      end
      if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
      checks++;
      if (q.size() > 2) failures++;
      @(negedge clk);
    end
    checks++; if (full_seen == 0) begin failures++; $display("FAIL buffer never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
