// tb_ext_regs: AXI4-Lite writes and reads of every register, with address and
// data presented in different cycles and a response held back by the master.
// Checks read values, the HOST_WD write pulse, the TLB flush pulse, the
// CTRL multiplexer bit, the WD_PERIOD reset value and that responses stay
// valid until accepted.
module tb_ext_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [7:0] awaddr, araddr;
  logic [31:0] wdata, rdata, wd_period;
  logic [1:0] bresp, rresp;
  logic rx_sel_nios, host_wd_wr, tlb_flush;
  logic [31:0] apenet_wd = 32'h0005_0001, neigh_status = 32'h0000_2004;
  logic [31:0] tlb_stats = 32'h0003_0009, link_status = 32'h0000_0102;
  ext_regs #(.WD_PERIOD_RST(32'd1234)) dut (.*);

  int wd_pulses = 0, flush_pulses = 0;
  always @(posedge clk) if (rst_n) begin
    if (host_wd_wr) wd_pulses++;
    if (tlb_flush) flush_pulses++;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axw(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awvalid = 1; awaddr = a;
    @(negedge clk); wvalid = 1; wdata = d;
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (!bvalid || bresp != 0) begin failures++; $display("no write response"); end
    bready = 1; @(negedge clk); bready = 0;
    checks++;
    if (bvalid) begin failures++; $display("bvalid stuck"); end
  endtask

  task automatic axr(input logic [7:0] a, input logic [31:0] exp);
    @(negedge clk); arvalid = 1; araddr = a;
    @(negedge clk); arvalid = 0;
    @(negedge clk);
    checks++;
    if (!rvalid || rdata != exp) begin failures++; $display("read %h = %h exp %h", a, rdata, exp); end
    rready = 1; @(negedge clk); rready = 0;
  endtask

  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axr(8'h10, 32'd1234);
    axr(8'h00, 32'd0);
    axw(8'h00, 32'h1);
    checks++; if (!rx_sel_nios) begin failures++; $display("ctrl bit"); end
    axr(8'h00, 32'd1);
    axw(8'h04, 32'hCAFE);
    axw(8'h04, 32'hCAFF);
    axr(8'h04, 32'hCAFF);
    axw(8'h10, 32'd500);
    checks++; if (wd_period != 500) begin failures++; $display("wd_period"); end
    axr(8'h08, 32'h0005_0001);
    axr(8'h0C, 32'h0000_2004);
    axr(8'h14, 32'h0003_0009);
    axr(8'h1C, 32'h0000_0102);
    axr(8'h20, 32'h0);
    axw(8'h18, 32'h1);
    axw(8'h00, 32'h0);
    axr(8'h00, 32'd0);
    checks += 2;
    if (wd_pulses != 2) begin failures++; $display("wd pulses %0d", wd_pulses); end
    if (flush_pulses != 1) begin failures++; $display("flush pulses %0d", flush_pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
