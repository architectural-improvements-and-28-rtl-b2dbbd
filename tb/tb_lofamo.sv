// tb_lofamo: fault monitor with two links and a 20-cycle watchdog period.
// Link 0's outgoing messages are looped back to its own input, link 1 hears
// nothing. Checks: a message leaves on every link each period carrying the
// heartbeat; while the host writes its watchdog every 10 cycles no host fault
// is raised; once the writes stop, the fault is raised at the end of the
// first period without a write (within 2 periods of the last write) and it
// is seen on link 0 as a neighbour host fault; link 1, silent, is declared
// dead after two periods while link 0 is not; the fault clears when writes
// resume; the heartbeat in the APEnet watchdog register counts periods.
module tb_lofamo;
  localparam int NL = 2, PER = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] wd_period;
  logic host_wd_wr, host_fault, tick;
  logic [NL-1:0] dtv, dtr, drv, nbf, nbd;
  logic [31:0] dtd, apenet_wd, neigh_status;
  logic [31:0] drd [NL];
  lofamo #(.N_LINKS(NL)) dut (
    .clk, .rst_n, .wd_period, .host_wd_wr, .diag_tx_valid(dtv), .diag_tx_ready(dtr),
    .diag_tx_data(dtd), .diag_rx_valid(drv), .diag_rx_data(drd), .host_fault,
    .nb_host_fault(nbf), .nb_dead(nbd), .apenet_wd, .neigh_status, .tick);

  // link 0 accepts after 3 cycles and loops back; link 1 accepts and drops
  logic [31:0] drd0;
  assign drd[0] = drd0;
  int wait0 = 0, msgs0 = 0, msgs1 = 0;
  always @(posedge clk) begin
    drv <= 0;
    if (rst_n && dtv[0]) begin
      wait0 <= wait0 + 1;
      if (dtr[0]) begin drv[0] <= 1; drd0 <= dtd; msgs0 <= msgs0 + 1; wait0 <= 0; end
    end
    if (rst_n && dtv[1] && dtr[1]) msgs1 <= msgs1 + 1;
  end
  assign dtr[0] = dtv[0] && wait0 >= 3;
  assign dtr[1] = dtv[1];
  assign drd[1] = 0;

  logic wr_en = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) host_wd_wr = wr_en && (cyc % 10 == 0);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  initial begin
    int t_stop, t_fault;
    wd_period = PER;
    drd0 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr_en = 1;
    repeat (PER * 6) begin
      @(posedge clk);
      #1 chk(!host_fault, "no fault while host alive");
    end
    chk(nbd[1] && !nbd[0], "silent link 1 dead, link 0 alive");
    chk(msgs0 >= 5 && msgs1 >= 5, "one message per period per link");
    chk(apenet_wd[31:16] >= 5 && apenet_wd[31:16] <= 7, "heartbeat counts periods");
    chk(neigh_status[9] && !neigh_status[8] && neigh_status[1:0] == 0, "neighbour status layout");
    @(negedge clk); wr_en = 0; t_stop = cyc;
    while (!host_fault) @(posedge clk);
    t_fault = cyc;
    chk(t_fault - t_stop <= 2 * PER, "fault raised within two periods");
    chk(dtd[16] == 1'b1, "message carries host fault");
    repeat (2 * PER) @(posedge clk);
    #1 chk(nbf[0] && neigh_status[0], "looped neighbour reports host fault");
    @(negedge clk); wr_en = 1;
    repeat (2 * PER + 2) @(posedge clk);
    #1 chk(!host_fault, "fault cleared after writes resume");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
