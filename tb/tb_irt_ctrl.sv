// tb_irt_ctrl: self-checking test of the iRT engine on a small configuration
// (2 sets, 256 fast + 4096 slow blocks per set: 68 leaf blocks, 1 index block).
// Fast memory is the behavioural model, whose unwritten words read as garbage.
// Checks, against addresses computed here from the table layout: an absent leaf
// reads as identity even over garbage, both levels are in flight together,
// allocation zeroes the leaf and sets the index bit, entry write/lookup, a clear
// frees the leaf only when its last entry goes, the on-chip index word saves the
// read of an update after a lookup, set separation, and a random sequence
// against a reference table.
module tb_irt_ctrl;
  import trimma_pkg::*;

  localparam int unsigned NSETS = 2, FAST = 256, SLOW = 4096;
  localparam int unsigned INT_BLKS = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    cmd_valid, cmd_ready, done, rsp_leaf, rsp_freed;
  irt_op_e cmd_op;
  logic [0:0] cmd_set;
  btag_t   cmd_tag;
  entry_t  cmd_entry, rsp_entry;
  logic    md_req_valid, md_req_ready, md_we, md_rsp_valid;
  addr_t   md_addr;
  word_t   md_wdata, md_rdata;

  irt_ctrl #(.NSETS(NSETS), .FAST_PER_SET(FAST), .SLOW_PER_SET(SLOW)) dut (.*);

  logic dat_req_ready, dat_rsp_valid, mig_req_ready, mig_done;
  word_t dat_rdata;
  hybrid_mem_model #(.FAST_LAT(4)) mem (
    .clk, .rst_n,
    .md_req_valid, .md_req_ready, .md_we, .md_addr, .md_wdata, .md_rsp_valid, .md_rdata,
    .dat_req_valid(1'b0), .dat_req_ready, .dat_fast(1'b0), .dat_we(1'b0), .dat_addr('0),
    .dat_wdata('0), .dat_rsp_valid, .dat_rdata,
    .mig_req_valid(1'b0), .mig_req_ready, .mig_op(MIG_FILL), .mig_fast_addr('0),
    .mig_slow_addr('0), .mig_done
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // independent layout arithmetic
  function automatic addr_t blk_addr(input int unsigned set, input longint unsigned slot);
    return addr_t'((slot * NSETS + set) * 256);
  endfunction
  function automatic addr_t entry_addr(input int unsigned set, input longint unsigned tag);
    return blk_addr(set, INT_BLKS + tag / 64) + addr_t'((tag % 64) * 4);
  endfunction
  function automatic bit index_bit(input int unsigned set, input longint unsigned tag);
    longint unsigned leaf;
    word_t w;
    leaf = tag / 64;
    w = mem.rd_fast(blk_addr(set, leaf / 2048) + addr_t'(((leaf / 32) % 64) * 4));
    return w[leaf % 32];
  endfunction

  task automatic run(input irt_op_e o, input int unsigned set, input longint unsigned tag,
                     input entry_t e);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = o; cmd_set = 1'(set); cmd_tag = btag_t'(tag); cmd_entry = e;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 1'b0;
    while (!done) begin @(posedge clk); #1; end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  entry_t ref_e [2][longint unsigned];
  int unsigned rd0;

  initial begin
    cmd_valid = 0; cmd_op = IRT_LOOKUP; cmd_set = 0; cmd_tag = '0; cmd_entry = '0;
    // the controller above zeroes the index blocks at boot; do it here
    for (int s = 0; s < NSETS; s++)
      for (int w = 0; w < 64; w++) mem.fast_mem[blk_addr(s, 0) + addr_t'(w * 4)] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // absent leaf over garbage
    check(mem.rd_fast(entry_addr(1, 1000)) != 0, "leaf area holds garbage before allocation");
    run(IRT_LOOKUP, 1, 1000, '0);
    check(!rsp_leaf && !rsp_entry.valid, "absent leaf reads as identity");
    check(mem.max_md_outstanding >= 2, "index and leaf reads are in flight together");

    // allocation right after the lookup reuses the buffered index word
    rd0 = mem.md_reads;
    run(IRT_ALLOC, 1, 1000, '0);
    check(mem.md_reads == rd0, "allocation after lookup needs no index read");
    check(index_bit(1, 1000), "allocation sets the index bit");
    begin
      bit allz = 1;
      for (int w = 0; w < 64; w++) if (mem.rd_fast(blk_addr(1, INT_BLKS + 1000/64) + addr_t'(w*4)) != 0) allz = 0;
      check(allz, "allocation zeroes the leaf block");
    end
    check(!index_bit(0, 1000), "other set untouched");

    run(IRT_WRITE, 1, 1000, '{valid: 1'b1, dirty: 1'b0, ptr: 30'd77});
    check(mem.rd_fast(entry_addr(1, 1000)) == 32'h8000_004d, "entry stored at its fixed address");
    run(IRT_LOOKUP, 1, 1000, '0);
    check(rsp_leaf && rsp_entry.valid && rsp_entry.ptr == 30'd77, "lookup returns written entry");
    run(IRT_WRITE, 1, 1001, '{valid: 1'b1, dirty: 1'b1, ptr: 30'd5});
    run(IRT_LOOKUP, 1, 1001, '0);
    check(rsp_entry.valid && rsp_entry.dirty && rsp_entry.ptr == 30'd5, "dirty bit kept");
    run(IRT_LOOKUP, 0, 1000, '0);
    check(!rsp_leaf && !rsp_entry.valid, "same tag in the other set is absent");

    run(IRT_CLEAR, 1, 1000, '0);
    check(!rsp_freed && index_bit(1, 1000), "clear keeps a leaf that still has entries");
    run(IRT_LOOKUP, 1, 1000, '0);
    check(rsp_leaf && !rsp_entry.valid, "cleared entry is invalid");
    run(IRT_CLEAR, 1, 1001, '0);
    check(rsp_freed && !index_bit(1, 1000), "last clear frees the leaf");
    run(IRT_LOOKUP, 1, 1001, '0);
    check(!rsp_leaf && !rsp_entry.valid, "freed leaf reads as identity");

    // random sequence over 3 leaves per set
    for (int n = 0; n < 300; n++) begin
      int unsigned s;
      longint unsigned t;
      s = $urandom_range(0, 1);
      t = 64 * (10 + $urandom_range(0, 2)) + $urandom_range(0, 7);
      case ($urandom_range(0, 2))
        0: begin
          entry_t e;
          e = '{valid: 1'b1, dirty: 1'($urandom), ptr: btag_t'($urandom_range(0, 4000))};
          run(IRT_LOOKUP, s, t, '0);
          if (!rsp_leaf) run(IRT_ALLOC, s, t, '0);
          run(IRT_WRITE, s, t, e);
          ref_e[s][t] = e;
        end
        1: begin
          bit leaf_has;
          run(IRT_LOOKUP, s, t, '0);
          if (rsp_leaf) begin
            ref_e[s].delete(t);
            leaf_has = 0;
            foreach (ref_e[s][k]) if (k / 64 == t / 64) leaf_has = 1;
            run(IRT_CLEAR, s, t, '0);
            check(rsp_freed == !leaf_has, "freed exactly when the leaf empties");
            check(index_bit(s, t) == leaf_has, "index bit follows leaf occupancy");
          end
        end
        default: begin
          run(IRT_LOOKUP, s, t, '0);
          if (ref_e[s].exists(t))
            check(rsp_entry == ref_e[s][t], "random lookup returns reference entry");
          else
            check(!rsp_entry.valid, "random lookup of absent entry");
        end
      endcase
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
