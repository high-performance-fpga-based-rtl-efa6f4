// ddr_model: behavioural model of the off-chip DRAM seen through the
// accelerator's memory port (not synthesizable; for testbenches only).
//
// A word array of DEPTH words.  Read requests are granted on a random
// GNT_PCT percent of cycles and answered in order exactly LAT cycles after
// the grant; write requests are granted on a random wr_pct percent of cycles
// and take effect at the grant.  Testbenches load and inspect `mem`
// hierarchically and read the request counters.
module ddr_model #(
  parameter int unsigned BUS_W   = 512,
  parameter int unsigned DEPTH   = 32768,
  parameter int unsigned LAT     = 12,
  parameter int unsigned GNT_PCT = 70
) (
  input  logic             clk,
  input  logic             rd_req,
  input  logic [31:0]      rd_addr,
  output logic             rd_gnt,
  output logic             rd_valid,
  output logic [BUS_W-1:0] rd_data,
  input  logic             wr_req,
  input  logic [31:0]      wr_addr,
  input  logic [BUS_W-1:0] wr_data,
  output logic             wr_gnt
);
  logic [BUS_W-1:0] mem [DEPTH];
  logic             pv [LAT];
  logic [BUS_W-1:0] pd [LAT];
  int unsigned      n_reads = 0, n_writes = 0;
  int unsigned      gnt_pct = GNT_PCT;      // read grant rate, may be changed by the testbench
  int unsigned      wr_pct  = GNT_PCT;      // write grant rate, likewise

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    rd_gnt = 1'b0; wr_gnt = 1'b0;
  end

  assign rd_valid = pv[LAT-1];
  assign rd_data  = pd[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= rd_req && rd_gnt;
    pd[0] <= (rd_req && rd_gnt) ? mem[rd_addr % DEPTH] : '0;
    if (rd_req && rd_gnt) n_reads++;
    if (wr_req && wr_gnt) begin
      mem[wr_addr % DEPTH] <= wr_data;
      n_writes++;
    end
    rd_gnt <= ($urandom % 100) < gnt_pct;
    wr_gnt <= ($urandom % 100) < wr_pct;
  end
endmodule
