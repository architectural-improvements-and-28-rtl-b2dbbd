// tb_tlb: directed test of a 4-entry TLB: misses on an empty table, hits with
// the right physical address, offset and memory type after registration,
// overwrite of an existing virtual page, round-robin replacement of the
// oldest entry when full, flush, the hit/miss counters and the one-cycle
// lookup latency.
module tb_tlb;
  import apenet_pkg::*;
  localparam int PS = 12, PW = ADDR_W - PS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid, res_valid, res_hit, res_gpu, reg_valid, reg_gpu, flush;
  logic [ADDR_W-1:0] lk_vaddr, res_paddr;
  logic [PW-1:0] reg_vpage, reg_ppage;
  logic [15:0] hit_cnt, miss_cnt;
  int checks = 0, failures = 0;

  tlb #(.ENTRIES(4), .PAGE_SHIFT(PS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic regp(input logic [PW-1:0] v, input logic [PW-1:0] p, input logic g);
    @(negedge clk);
    reg_valid = 1; reg_vpage = v; reg_ppage = p; reg_gpu = g;
    @(negedge clk);
    reg_valid = 0;
  endtask

  task automatic look(input logic [ADDR_W-1:0] va, input logic exp_hit,
                      input logic [PW-1:0] exp_pp, input logic exp_gpu);
    @(negedge clk);
    lk_valid = 1; lk_vaddr = va;
    @(negedge clk);
    lk_valid = 0;
    checks++;
    if (!res_valid || res_hit != exp_hit ||
        (exp_hit && (res_paddr != {exp_pp, va[PS-1:0]} || res_gpu != exp_gpu))) begin
      failures++;
      $display("lookup %h: valid=%b hit=%b pa=%h gpu=%b", va, res_valid, res_hit, res_paddr, res_gpu);
    end
  endtask

  initial begin
    lk_valid = 0; reg_valid = 0; flush = 0; lk_vaddr = 0; reg_vpage = 0; reg_ppage = 0; reg_gpu = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    look(64'h0000_1234_5678, 0, 0, 0);
    regp(52'h12345, 52'hAAAA1, 0);
    regp(52'h22222, 52'hBBBB2, 1);
    look(64'h1234_5678, 1, 52'hAAAA1, 0);
    look(64'h2222_2FFF, 1, 52'hBBBB2, 1);
    look(64'h3333_3000, 0, 0, 0);
    regp(52'h12345, 52'hCCCC3, 1);           // overwrite, no new entry
    look(64'h1234_5000, 1, 52'hCCCC3, 1);
    regp(52'h33333, 52'h00003, 0);
    regp(52'h44444, 52'h00004, 0);           // table full: 12345 22222 33333 44444
    regp(52'h55555, 52'h00005, 0);           // replaces entry 0 (12345)
    look(64'h1234_5000, 0, 0, 0);
    look(64'h5555_5ABC, 1, 52'h00005, 0);
    look(64'h4444_4010, 1, 52'h00004, 0);
    look(64'h2222_2000, 1, 52'hBBBB2, 1);
    checks++;
    if (hit_cnt != 6 || miss_cnt != 3) begin
      failures++;
      $display("counters hit=%0d miss=%0d", hit_cnt, miss_cnt);
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    look(64'h4444_4010, 0, 0, 0);
    look(64'h2222_2000, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
