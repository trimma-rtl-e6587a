// tb_trimma_ctrl: end-to-end test of the Trimma controller in cache mode
// (all fast memory outside the remap table is cache) on a reduced configuration:
// 2 sets of 128 fast and 2048 slow blocks (1 index block, 34 leaf blocks, 93
// cache slots per set) and a small iRC (8x2 NonIdCache, 4x2 IdCache) so that
// every mechanism occurs. Every read is checked against a reference memory, and
// each mechanism must occur at least once, except two that cache mode cannot
// produce: swaps (no flat area) and IdCache hits (every slow-memory access
// migrates its block, so an identity entry is invalidated right after its fill;
// tb_trimma_flat covers both).
module tb_trimma_ctrl;
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

  trimma_ctrl #(.NSETS(2), .FAST_PER_SET(128), .SLOW_PER_SET(2048), .FLAT_PER_SET(0),
                .NONID_SETS(8), .NONID_WAYS(2), .ID_SETS(4), .ID_WAYS(2)) dut (.*);
  hybrid_mem_model mem (.*);
  trimma_driver #(.NSETS(2), .FAST(128), .SLOW(2048), .FLAT(0), .NREQ(4000)) drv (.*);

  int checks, failures;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (done);
    checks = drv.checks; failures = drv.failures;
    // each mechanism, by its bit in events_t (MSB first)
    for (int i = 0; i < $bits(events_t); i++) begin
      string nm;
      int b;
      b = $bits(events_t) - 1 - i;
      case (i)
        0: nm = "idx_prefetch";
        1: nm = "nonid_hit";   2: nm = "id_hit";        3: nm = "irt_walk";
        4: nm = "fast_access"; 5: nm = "slow_access";   6: nm = "migrate";
        7: nm = "meta_slot_used"; 8: nm = "writeback";  9: nm = "swap_back";
       10: nm = "leaf_alloc"; 11: nm = "leaf_free";    12: nm = "meta_evict";
        default: nm = "victim_skip";
      endcase
      $display("  %-15s %0d", nm, drv.cnt[b]);
      if (nm != "swap_back" && nm != "id_hit") begin
        checks++;
        if (drv.cnt[b] == 0) begin failures++; $display("FAIL: %s never happened", nm); end
      end
    end
    $display("  %-15s %0d", "stall", drv.stalls);
    checks++;
    if (drv.stalls == 0) begin failures++; $display("FAIL: requester never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
