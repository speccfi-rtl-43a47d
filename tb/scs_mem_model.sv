// scs_mem_model -- behavioural model of the protected in-memory shadow call
// stack, for simulation only. It is a word-addressed memory of WORDS return
// addresses behind a valid/ready request port: requests are accepted on
// random cycles when READY_RANDOM is set, and read data returns LAT cycles
// after the read was accepted (one read outstanding at a time). Writes and
// reads are counted for the testbenches.
module scs_mem_model
  import speccfi_pkg::*;
#(
  parameter int unsigned WORDS        = 1024,
  parameter int unsigned LAT          = 2,
  parameter bit          READY_RANDOM = 1'b1
) (
  input  logic  clk,
  input  logic  req_valid,
  input  logic  req_we,
  input  addr_t req_addr,
  input  addr_t req_wdata,
  output logic  req_ready,
  output logic  rsp_valid,
  output addr_t rsp_rdata
);
  addr_t mem [WORDS];
  int    lat_cnt;
  addr_t pend;
  int    writes = 0, reads = 0;
  logic  rdy_q;

  initial begin
    for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
    lat_cnt = 0; pend = '0; rdy_q = 1'b1;
  end

  assign req_ready = rdy_q && (lat_cnt == 0);

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    rdy_q <= READY_RANDOM ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (lat_cnt > 0) begin
      lat_cnt <= lat_cnt - 1;
      if (lat_cnt == 1) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= pend;
      end
    end else if (req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr % WORDS] <= req_wdata;
        writes++;
      end else begin
        pend    <= mem[req_addr % WORDS];
        lat_cnt <= LAT;
        reads++;
      end
    end
  end
endmodule
