// tb_irc: self-checking test of the identity-mapping-aware remap cache at its
// default size. Checks the 3-cycle lookup latency, that a NonIdCache fill gives
// a pointer hit, an IdCache fill an identity hit, that the two fills exclude each
// other for the same address, that an IdCache line covers a 32-block super-block
// bit by bit, and that invalidation empties both parts.
module tb_irc;
  import trimma_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       req_valid;
  logic [1:0] req_op;
  addr_t      req_addr;
  btag_t      fill_ptr;
  logic       ready;
  logic       rsp_valid, rsp_nonid_hit, rsp_id_hit;
  btag_t      rsp_ptr;

  irc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic op(input logic [1:0] o, input addr_t a, input btag_t p);
    @(negedge clk);
    req_valid = 1'b1; req_op = o; req_addr = a; fill_ptr = p;
    @(posedge clk);
    #1 req_valid = 1'b0;
  endtask

  // returns {nonid_hit, id_hit}; checks the answer comes exactly 3 cycles later
  task automatic lookup(input addr_t a, output bit nh, output bit ih, output btag_t p);
    int lat;
    op(2'd0, a, '0);
    lat = 1;
    while (!rsp_valid && lat < 10) begin @(posedge clk); #1 lat++; end
    check(rsp_valid && lat == 3, $sformatf("lookup latency %0d (expected 3)", lat));
    nh = rsp_nonid_hit; ih = rsp_id_hit; p = rsp_ptr;
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit nh, ih;
  btag_t p;
  addr_t a0, a1;

  initial begin
    req_valid = 0; req_op = 0; req_addr = '0; fill_ptr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    a0 = 48'h0000_1234_5600;
    a1 = 48'h0000_0777_0100;

    lookup(a0, nh, ih, p);
    check(!nh && !ih, "empty iRC misses in both parts");
    op(2'd1, a0, 30'h2abc);                      // valid iRT entry -> NonIdCache
    lookup(a0, nh, ih, p);
    check(nh && !ih && p == 30'h2abc, "NonIdCache hit with pointer");
    op(2'd2, a1, '0);                            // absent iRT entry -> IdCache
    lookup(a1, nh, ih, p);
    check(!nh && ih, "IdCache hit");
    // neighbours in the same super-block are not implied
    lookup(a1 + 48'h100, nh, ih, p);
    check(!nh && !ih, "neighbour block in super-block not implied");
    op(2'd2, a1 + 48'h100, '0);
    lookup(a1 + 48'h100, nh, ih, p);
    check(ih, "second block of super-block");
    // an address turning from identity to remapped moves between the parts
    op(2'd1, a1, 30'h11);
    lookup(a1, nh, ih, p);
    check(nh && !ih && p == 30'h11, "NonId fill clears identity bit");
    op(2'd2, a1, '0);
    lookup(a1, nh, ih, p);
    check(!nh && ih, "Id fill drops NonId entry");
    // invalidation
    op(2'd3, a1, '0);
    lookup(a1, nh, ih, p);
    check(!nh && !ih, "invalidated in both parts");
    op(2'd3, a0, '0);
    lookup(a0, nh, ih, p);
    check(!nh && !ih, "NonId entry invalidated");
    lookup(a1 + 48'h100, nh, ih, p);
    check(ih, "invalidation is per block");

    // random mix over 64 addresses against a reference state
    begin
      int st [64];  // 0 unknown, 1 remapped, 2 identity
      btag_t rp [64];
      for (int i = 0; i < 64; i++) st[i] = 0;
      for (int n = 0; n < 600; n++) begin
        int i, o;
        addr_t a;
        i = $urandom_range(0, 63);
        a = addr_t'(48'h40_0000_0000 + (i * 48'h100));
        o = $urandom_range(0, 3);
        if (o == 1) begin rp[i] = btag_t'($urandom); op(2'd1, a, rp[i]); st[i] = 1; end
        else if (o == 2) begin op(2'd2, a, '0); st[i] = 2; end
        else if (o == 3) begin op(2'd3, a, '0); st[i] = 0; end
        else begin
          lookup(a, nh, ih, p);
          check(nh == (st[i] == 1) && ih == (st[i] == 2) && (!nh || p == rp[i]),
                "random lookup matches reference");
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
