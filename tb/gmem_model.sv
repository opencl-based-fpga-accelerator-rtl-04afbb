// gmem_model: behavioural model of the board's global memory for testbenches.
//
// A word-addressed 32-bit memory of 2**AW words with the two ports the
// accelerator uses: a read port (valid/ready request, response LAT cycles
// later, in order) and a write port (valid/ready). When STALL is set, both
// ready signals are randomly withheld, to exercise back-pressure. Testbenches
// fill and inspect `mem` directly through hierarchical references.
module gmem_model #(
  parameter int unsigned AW  = 12,
  parameter int unsigned LAT = 2
) (
  input  logic        clk,
  input  logic        stall,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_addr,
  output logic        rd_resp_valid,
  output logic [31:0] rd_resp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data
);
  logic [31:0] mem [2**AW];
  logic        pv [LAT];
  logic [31:0] pd [LAT];
  int          stalls = 0;

  initial for (int i = 0; i < LAT; i++) begin pv[i] = 0; pd[i] = '0; end

  always @(negedge clk) begin
    rd_req_ready <= !stall || ($urandom_range(0, 3) != 0);
    wr_ready     <= !stall || ($urandom_range(0, 3) != 0);
  end
  initial begin rd_req_ready = 0; wr_ready = 0; end

  always @(posedge clk) begin
    if ((rd_req_valid && !rd_req_ready) || (wr_valid && !wr_ready)) stalls++;
    pv[0] <= rd_req_valid && rd_req_ready;
    pd[0] <= mem[rd_addr[AW-1:0]];
    for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    if (wr_valid && wr_ready) mem[wr_addr[AW-1:0]] <= wr_data;
  end
  assign rd_resp_valid = pv[LAT-1];
  assign rd_resp_data  = pd[LAT-1];
endmodule
