// tb_nonid_cache: self-checking test of the NonIdCache at its default size
// (2048 sets x 6 ways). Checks the one-cycle lookup latency, fill/lookup/
// invalidate, refill of a present address, the set/tag split of the address
// (bits [18:8] select the set), FIFO replacement in a full set, and a random
// run against a reference map that allows misses only after a set overflowed.
module tb_nonid_cache;
  import trimma_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       req_valid;
  logic [1:0] req_op;
  addr_t      req_addr;
  btag_t      fill_ptr;
  logic       ready;
  logic       rsp_valid, rsp_hit;
  btag_t      rsp_ptr;

  nonid_cache dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic addr_t mk(input int unsigned set, input longint unsigned tag);
    return addr_t'((tag << 19) | (longint'(set) << 8) | 8'h40);
  endfunction

  task automatic op(input logic [1:0] o, input addr_t a, input btag_t p);
    @(negedge clk);
    req_valid = 1'b1; req_op = o; req_addr = a; fill_ptr = p;
    @(posedge clk);
    #1 req_valid = 1'b0;
  endtask

  // lookup; the answer must appear exactly one cycle after the request
  task automatic lookup(input addr_t a, output bit hit, output btag_t p);
    op(2'd0, a, '0);
    check(rsp_valid === 1'b1, "lookup answers after one cycle");
    hit = rsp_hit; p = rsp_ptr;
    @(posedge clk);
    #1;
    check(rsp_valid === 1'b0, "single response pulse");
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit    hit;
  btag_t p;
  btag_t ref_ptr [addr_t];
  int    fills_in_set [2048];

  initial begin
    req_valid = 0; req_op = 0; req_addr = '0; fill_ptr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    @(posedge clk);

    // empty cache misses
    lookup(mk(5, 123), hit, p);
    check(!hit, "empty cache misses");

    // fill and hit
    op(2'd1, mk(5, 123), 30'h1234);
    lookup(mk(5, 123), hit, p);
    check(hit && p == 30'h1234, "fill then hit with pointer");
    // same tag, other set: miss; same set, other tag: miss
    lookup(mk(6, 123), hit, p);
    check(!hit, "other set misses");
    lookup(mk(5, 124), hit, p);
    check(!hit, "other tag misses");
    // every tag bit takes part in the match, up to address bit 47
    for (int b = 0; b < 29; b++) begin
      lookup(mk(5, 123 ^ (64'd1 << b)), hit, p);
      check(!hit, $sformatf("tag differing in bit %0d misses", b + 19));
    end
    // offset bits are ignored
    lookup(mk(5, 123) | 48'hbf, hit, p);
    check(hit, "offset bits ignored");
    // refill replaces the pointer
    op(2'd1, mk(5, 123), 30'h777);
    lookup(mk(5, 123), hit, p);
    check(hit && p == 30'h777, "refill updates pointer");
    // invalidate
    op(2'd2, mk(5, 123), '0);
    lookup(mk(5, 123), hit, p);
    check(!hit, "invalidated entry misses");

    // FIFO: fill 6 ways of set 9, then a 7th evicts the first
    for (int i = 0; i < 6; i++) op(2'd1, mk(9, 1000 + i), btag_t'(i + 1));
    for (int i = 0; i < 6; i++) begin
      lookup(mk(9, 1000 + i), hit, p);
      check(hit && p == btag_t'(i + 1), "six ways hold six entries");
    end
    op(2'd1, mk(9, 2000), 30'h55);
    lookup(mk(9, 1000), hit, p);
    check(!hit, "seventh fill evicts the oldest way");
    for (int i = 1; i < 6; i++) begin
      lookup(mk(9, 1000 + i), hit, p);
      check(hit, "younger ways survive");
    end
    lookup(mk(9, 2000), hit, p);
    check(hit && p == 30'h55, "new entry present");
    op(2'd1, mk(9, 2001), 30'h56);
    lookup(mk(9, 1001), hit, p);
    check(!hit, "FIFO continues with the next oldest");

    // random run in 8 sets with 10 tags each
    for (int s = 0; s < 2048; s++) fills_in_set[s] = 0;
    for (int n = 0; n < 3000; n++) begin
      int unsigned s, t, o;
      addr_t a;
      s = 100 + $urandom_range(0, 7);
      t = $urandom_range(0, 9);
      a = mk(s, t);
      o = $urandom_range(0, 2);
      if (o == 1) begin
        p = btag_t'($urandom);
        op(2'd1, a, p);
        ref_ptr[a] = p;
        fills_in_set[s]++;
      end else if (o == 2) begin
        op(2'd2, a, '0);
        ref_ptr.delete(a);
      end else begin
        lookup(a, hit, p);
        if (hit) check(ref_ptr.exists(a) && ref_ptr[a] == p, "random hit returns last fill");
        else     check(!ref_ptr.exists(a) || fills_in_set[s] > 6, "random miss only after overflow");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
