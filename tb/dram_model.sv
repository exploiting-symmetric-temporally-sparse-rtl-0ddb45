// dram_model: behavioural model of the external DRAM (not synthesizable
// intent; testbench only).
//
// Beat-addressed memory: one address holds P data words. Burst read requests
// (addr, len) are accepted while fewer than REQ_DEPTH are waiting; the first
// beat of a burst leaves no earlier than LAT cycles after its request was
// accepted, then one beat per cycle. This mimics DRAM column bursts: opening
// a burst is slow, streaming it is fast, and requests can be pipelined so the
// opening latency of the next burst hides behind the current one. Writes take
// effect at the clock edge on which wr_valid is high.
module dram_model
  import drnn_pkg::*;
#(
  parameter int unsigned P         = 16,
  parameter int unsigned ADDR_W    = 24,
  parameter int unsigned LEN_W     = 5,
  parameter int unsigned DEPTH     = 16384,
  parameter int unsigned LAT       = 8,
  parameter int unsigned REQ_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  input  logic [LEN_W-1:0]  rd_req_len,
  output logic              rd_data_valid,
  output data_t             rd_data [P],
  input  logic              wr_valid,
  input  logic [ADDR_W-1:0] wr_addr,
  input  data_t             wr_data [P]
);

  logic [P*DW-1:0] mem [DEPTH];

  typedef struct {
    longint unsigned ready_at;
    int unsigned     addr;
    int unsigned     len;
  } req_t;

  req_t            reqs[$];
  longint unsigned cyc;
  int unsigned     beat;

  assign rd_req_ready = reqs.size() < REQ_DEPTH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc           <= 0;
      beat          <= 0;
      rd_data_valid <= 1'b0;
      reqs.delete();
    end else begin
      cyc           <= cyc + 1;
      rd_data_valid <= 1'b0;
      if (reqs.size() > 0 && reqs[0].ready_at <= cyc) begin
        rd_data_valid <= 1'b1;
        for (int p = 0; p < P; p++)
          rd_data[p] <= data_t'(mem[(reqs[0].addr + beat) % DEPTH][p*DW +: DW]);
        if (beat + 1 == reqs[0].len) begin
          beat <= 0;
          void'(reqs.pop_front());
        end else begin
          beat <= beat + 1;
        end
      end
      if (rd_req_valid && rd_req_ready)
        reqs.push_back('{ready_at: cyc + 64'(LAT), addr: 32'(rd_req_addr), len: 32'(rd_req_len)});
      if (wr_valid)
        for (int p = 0; p < P; p++) mem[32'(wr_addr) % DEPTH][p*DW +: DW] <= wr_data[p];
    end
  end

endmodule
