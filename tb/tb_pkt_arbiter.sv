// tb_pkt_arbiter: three sources send numbered packets of random length with
// random gaps into a 3-input arbiter under random back-pressure. Checks that
// packets are never interleaved, that every word arrives in order per source,
// that out_sel names the source, and that with all inputs busy the grants
// rotate 0, 1, 2.
module tb_pkt_arbiter;
  import apenet_pkg::*;
  localparam int N = 3, NPK = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [N-1:0] in_valid, in_ready, in_last;
  word_t in_data [N];
  logic out_valid, out_ready, out_last;
  word_t out_data;
  logic [1:0] out_sel;
  pkt_arbiter #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pk [N], wd [N], len [N];
  int rx_pk [N], rx_wd [N];
  // sources: word = {source, packet, word}
  for (genvar s = 0; s < N; s++) begin : g_src
    initial begin pk[s] = 0; wd[s] = 0; len[s] = 1 + $urandom % 5; end
    always @(negedge clk) begin
      in_valid[s] = rst_n && pk[s] < NPK && (($urandom % 4) != 0 || wd[s] != 0);
      in_data[s]  = {8{8'(s), 8'(pk[s]), 16'(wd[s])}};
      in_last[s]  = (wd[s] == len[s] - 1);
    end
    always @(posedge clk) if (rst_n && in_valid[s] && in_ready[s]) begin
      if (in_last[s]) begin
        pk[s] <= pk[s] + 1; wd[s] <= 0; len[s] <= 1 + $urandom % 5;
      end else wd[s] <= wd[s] + 1;
    end
  end
  always @(negedge clk) out_ready = ($urandom % 5) != 0;

  int cur = -1, total = 0, seq_ok = 0, prev_src = -1;
  int all_busy_grants = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s, p, w;
    s = int'(out_data[31:24]); p = int'(out_data[23:16]); w = int'(out_data[15:0]);
    checks++;
    if (s >= N || int'(out_sel) != s || (cur >= 0 && s != cur) || p != rx_pk[s] || w != rx_wd[s]) begin
      failures++;
      $display("bad word src=%0d pkt=%0d w=%0d sel=%0d cur=%0d", s, p, w, out_sel, cur);
    end
    if (w == 0 && prev_src >= 0 && s == (prev_src + 1) % N) seq_ok++;
    if (out_last) begin
      cur = -1; rx_pk[s]++; rx_wd[s] = 0; prev_src = s; total++;
    end else begin
      cur = s; rx_wd[s]++;
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin rx_pk[s] = 0; rx_wd[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (total == N * NPK);
    checks++;
    if (seq_ok < N * NPK / 3) begin failures++; $display("grants did not rotate: %0d", seq_ok); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
