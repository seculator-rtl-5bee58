// mem_model: behavioural model of the untrusted shared memory (DRAM), for
// testbenches only. One 64-byte block per request; a write is stored at once,
// a read returns its block LAT clocks after the request was accepted (the
// default of 100 clocks is the DRAM latency of the evaluated system). Requests
// are accepted every clock unless BUSY_PCT percent of them are refused at
// random, which exercises the requester's valid/ready handling. The array is
// public so that a testbench can preload and inspect or tamper with it.
//
// The paper only says data lives encrypted in untrusted DRAM; the latency, the
// refusals and the one-block bus are this design's own choices for testing.
module mem_model
  import seculator_pkg::*;
#(
  parameter int unsigned DEPTH    = 4096,
  parameter int unsigned LAT      = 100,
  parameter int unsigned BUSY_PCT = 0
) (
  input  logic               clk,
  input  logic               mem_req_valid,
  output logic               mem_req_ready,
  input  logic               mem_we,
  input  logic [MADDR_W-1:0] mem_addr,
  input  block_t             mem_wdata,
  output logic               mem_rvalid,
  output block_t             mem_rdata
);
  block_t mem [DEPTH];
  int unsigned reads = 0, writes = 0;

  typedef struct { longint due; block_t d; } pend_t;
  pend_t q[$];
  longint now = 0;

  initial begin
    foreach (mem[i]) mem[i] = '0;
    mem_req_ready = 1'b1;
    mem_rvalid = 1'b0;
    mem_rdata = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    mem_rvalid <= 1'b0;
    if (q.size() != 0 && q[0].due <= now) begin
      mem_rvalid <= 1'b1;
      mem_rdata  <= q[0].d;
      void'(q.pop_front());
    end
    if (mem_req_valid && mem_req_ready) begin
      if (mem_we) begin
        mem[mem_addr % DEPTH] <= mem_wdata;
        writes <= writes + 1;
      end else begin
        q.push_back('{now + longint'(LAT) - 1, mem[mem_addr % DEPTH]});
        reads <= reads + 1;
      end
    end
    mem_req_ready <= ($urandom_range(0, 99) >= BUSY_PCT);
  end
endmodule
