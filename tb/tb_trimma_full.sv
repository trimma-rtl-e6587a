// tb_trimma_full: the Trimma controller at its default, full-size configuration
// (4 sets; per set 655360 fast and 20971520 slow 256 B blocks, i.e. 640 MB of
// fast and 20 GB of slow memory; 2048x6 NonIdCache and 256x16 IdCache). Runs
// the boot sequence (zeroing 4 x 165 index blocks and clearing the iRC), then a
// stream of reads and writes with a hot set, checking every read against a
// reference memory and counting how often each mechanism occurred. At this size
// the FIFO does not wrap around within a short run, so evictions are rare; the
// reduced-size tests cover them.
module tb_trimma_full;
  import trimma_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_done, req_valid, req_ready, req_we, rsp_valid;
  addr_t req_addr;
  word_t req_wdata, rsp_rdata;
  logic dat_req_valid, dat_req_ready, dat_fast, dat_we, dat_rsp_valid;
  addr_t dat_addr;
  word_t dat_wdata, dat_rdata;
  logic mig_req_valid, mig_req_ready, mig_done;
  mig_op_e mig_op;
  addr_t mig_fast_addr, mig_slow_addr;
  logic md_req_valid, md_req_ready, md_we, md_rsp_valid;
  addr_t md_addr;
  word_t md_wdata, md_rdata;
  events_t events;
  logic done;

  trimma_ctrl dut (.*);
  hybrid_mem_model mem (.*);
  trimma_driver #(.NSETS(4), .FAST(655360), .SLOW(20971520), .FLAT(0), .NREQ(3000)) drv (.*);

  int checks, failures;
  longint unsigned t_init;

  initial begin : watchdog
    repeat (5000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    t_init = 0;
    while (!init_done) begin @(posedge clk); t_init++; end
    checks = 0; failures = 0;
    // boot writes every word of every index block
    checks++;
    if (mem.md_writes != 4 * 165 * 64) begin
      failures++;
      $display("FAIL: boot wrote %0d index words, expected %0d", mem.md_writes, 4 * 165 * 64);
    end
    $display("boot took %0d cycles", t_init);
    wait (done);
    checks += drv.checks; failures += drv.failures;
    $display("  nonid_hit %0d  irt_walk %0d  fast %0d  slow %0d  migrate %0d  meta_slot %0d  leaf_alloc %0d",
             drv.cnt[12], drv.cnt[10], drv.cnt[9], drv.cnt[8], drv.cnt[7], drv.cnt[6], drv.cnt[3]);
    checks++;
    if (drv.cnt[7] == 0 || drv.cnt[12] == 0) begin failures++; $display("FAIL: no migration or no iRC hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
