// tb_sync_fifo: random push/pop against a queue model on a 5-deep FIFO (not a
// power of two), checking data order, count, full and empty flags.
module tb_sync_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.W(W), .DEPTH(D)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid = ($urandom % 100) < (cyc < 1500 ? 70 : 30);
      out_ready = ($urandom % 100) < (cyc < 1500 ? 30 : 70);
      in_data = W'($urandom);
      checks++;
      if (count != q.size() || in_ready != (q.size() < D) || out_valid != (q.size() > 0)) begin
        failures++;
        $display("flag mismatch count=%0d model=%0d", count, q.size());
      end
      if (q.size() == D) fulls++;
      if (out_valid && q.size() > 0) begin
        checks++;
        if (out_data != q[0]) begin
          failures++;
          $display("data mismatch %h vs %h", out_data, q[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
