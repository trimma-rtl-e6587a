// trimma_env: one complete test system for end-to-end runs (testbench helper,
// not synthesizable): a trimma_ctrl, the behavioural two-tier memory behind it
// and a request driver with its reference memory, wired port to port. The
// parameters give the memory organisation, the iRC size and the driver's
// address pattern; results are read from env.drv (checks, failures, cnt[]).
module trimma_env
  import trimma_pkg::*;
#(
  parameter int unsigned NSETS       = 2,
  parameter int unsigned FAST        = 256,
  parameter int unsigned SLOW        = 8192,
  parameter int unsigned FLAT        = 0,
  parameter int unsigned NONID_SETS  = 32,
  parameter int unsigned NONID_WAYS  = 6,
  parameter int unsigned ID_SETS     = 4,
  parameter int unsigned ID_WAYS     = 16,
  parameter int unsigned NREQ        = 3000,
  parameter int unsigned PATTERN     = 0,
  parameter int unsigned STREAM_BLKS = 1024
) (
  input  logic clk,
  input  logic rst_n,
  output logic done
);
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

  trimma_ctrl #(.NSETS(NSETS), .FAST_PER_SET(FAST), .SLOW_PER_SET(SLOW), .FLAT_PER_SET(FLAT),
                .NONID_SETS(NONID_SETS), .NONID_WAYS(NONID_WAYS),
                .ID_SETS(ID_SETS), .ID_WAYS(ID_WAYS)) dut (.*);
  hybrid_mem_model mem (.*);
  trimma_driver #(.NSETS(NSETS), .FAST(FAST), .SLOW(SLOW), .FLAT(FLAT), .NREQ(NREQ),
                  .PATTERN(PATTERN), .STREAM_BLKS(STREAM_BLKS)) drv (.*);
endmodule
