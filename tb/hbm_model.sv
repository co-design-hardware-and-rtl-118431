// hbm_model: behavioural stand-in for the HBM channels, testbench use only.
//
// The accelerator reads the PQ codes of a cell from NCH independent memory
// channels (one per PQDist PE). This model gives every channel a request port
// (valid/ready, one row address per request) and a response port (valid and
// data, no ready: the requester reserves room before it asks). A request
// accepted at a rising edge is answered LAT cycles later, in order per
// channel. When STALL is non-zero, ready is dropped at random in about STALL
// percent of the cycles, to exercise back-pressure.
//
// Contents live in one associative array, key = channel * 2^32 + address,
// written directly by the testbench (mem[key] = data). A row nobody wrote
// reads as zero. The real HBM's bandwidth and latency are not modelled; the
// paper gives no figures for them at the level of one channel.
module hbm_model #(
  parameter int unsigned NCH   = 4,
  parameter int unsigned AW    = 32,
  parameter int unsigned DW    = 160,
  parameter int unsigned LAT   = 6,
  parameter int unsigned STALL = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NCH-1:0]           req_valid,
  output logic [NCH-1:0]           req_ready,
  input  logic [NCH-1:0][AW-1:0]   req_addr,
  output logic [NCH-1:0]           rsp_valid,
  output logic [NCH-1:0][DW-1:0]   rsp_data
);
  logic [DW-1:0] mem [longint];
  longint        cyc = 0;
  longint        due  [NCH][$];
  logic [DW-1:0] data [NCH][$];

  function automatic logic [DW-1:0] rd(int unsigned ch, logic [AW-1:0] a);
    longint key;
    key = (longint'(ch) << 32) + longint'(a);
    return mem.exists(key) ? mem[key] : '0;
  endfunction

  initial begin
    req_ready = '0;
    rsp_valid = '0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < int'(NCH); c++) begin
      if (rst_n && req_valid[c] && req_ready[c]) begin
        due[c].push_back(cyc + LAT);
        data[c].push_back(rd(c, req_addr[c]));
      end
      if (rst_n && due[c].size() > 0 && due[c][0] <= cyc) begin
        rsp_valid[c] <= 1'b1;
        rsp_data[c]  <= data[c][0];
        void'(due[c].pop_front());
        void'(data[c].pop_front());
      end else begin
        rsp_valid[c] <= 1'b0;
      end
      req_ready[c] <= rst_n && ((STALL == 0) || ($urandom_range(99) >= STALL));
    end
  end
endmodule
