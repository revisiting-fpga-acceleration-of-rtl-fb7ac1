// md_mem_model: behavioural model of the external memory seen by the
// accelerator's memory ports (a stand-in for the host platform's DRAM
// system, which is not part of the design).
//
// NPORTS independent ports share one array of WORDS 128-bit words. Each port
// accepts a request when its ready is high; ready is random, high with
// probability READY_PCT percent, so the design sees request backpressure.
// A read returns its word LATENCY cycles after acceptance, in request order;
// a write updates the array at acceptance. Testbenches fill and inspect
// mem[] directly. req_stalls counts cycles with a request waiting.
module md_mem_model
  import md_pkg::*;
#(
  parameter int NPORTS    = 2,
  parameter int WORDS     = 4096,
  parameter int LATENCY   = 6,
  parameter int READY_PCT = 75
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic     [NPORTS-1:0]  req_valid,
  output logic     [NPORTS-1:0]  req_ready,
  input  mem_req_t [NPORTS-1:0]  req,
  output logic     [NPORTS-1:0]  rsp_valid,
  output atom_t    [NPORTS-1:0]  rsp_data
);

  atom_t mem [WORDS];
  int    req_stalls = 0;
  int    cycle = 0;
  int    bad_addr = 0;

  typedef struct {
    int    due;
    atom_t data;
  } pend_t;

  pend_t pend [NPORTS][$];

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (!rst_n) begin
        req_ready[p] <= 1'b0;
        rsp_valid[p] <= 1'b0;
      end else begin
        if (req_valid[p] && !req_ready[p]) req_stalls++;
        if (req_valid[p] && req_ready[p]) begin
          if (req[p].addr >= WORDS) bad_addr++;
          else if (req[p].we) mem[req[p].addr] = req[p].wdata;
          else begin
            pend_t e;
            e.due  = cycle + LATENCY;
            e.data = mem[req[p].addr];
            pend[p].push_back(e);
          end
        end
        req_ready[p] <= ($urandom_range(99) < READY_PCT);
        if (pend[p].size() != 0 && pend[p][0].due <= cycle) begin
          rsp_valid[p] <= 1'b1;
          rsp_data[p]  <= pend[p].pop_front().data;
        end else begin
          rsp_valid[p] <= 1'b0;
          rsp_data[p]  <= '0;
        end
      end
    end
  end

endmodule
