// dram_model -- behavioural model of the off-chip DRAM for simulation.
//
// 16-bit words, WORDS deep. Accepts one request per cycle (req_ready is 1
// except while rst_n is low and on cycles where the testbench raises stall,
// used to exercise back-pressure; ignoring requests during reset keeps the
// design's pre-reset register values from posting a phantom read),
// writes at once and returns read data LAT cycles later, in order. The
// testbench preloads and inspects mem[] hierarchically. Counts reads and
// writes.
module dram_model #(
  parameter int unsigned WORDS = 1 << 16,
  parameter int unsigned LAT   = 4
) (
  input  logic        clk,
  input  logic        rst_n,     // requests are ignored while low
  input  logic        stall,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  logic [15:0] req_wdata,
  output logic        rsp_valid,
  output logic [15:0] rsp_data
);
  logic [15:0] mem [WORDS];
  logic [LAT-1:0]       pv = '0;
  logic [LAT-1:0][15:0] pd;
  int unsigned reads = 0, writes = 0;

  assign req_ready = rst_n && !stall;
  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];

  always_ff @(posedge clk) begin
    pv <= {pv[LAT-2:0], req_valid && req_ready && !req_we};
    pd <= {pd[LAT-2:0], mem[req_addr[$clog2(WORDS)-1:0]]};
    if (req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr[$clog2(WORDS)-1:0]] <= req_wdata;
        writes <= writes + 1;
      end else
        reads <= reads + 1;
    end
  end
endmodule
