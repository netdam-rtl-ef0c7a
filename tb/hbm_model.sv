// hbm_model: behavioural model of the memory attached to a NetDAM device.
//
// Stands in for the HBM/DRAM stack and its controller (vendor parts, not
// part of the RTL). 64-byte beat port: a request is accepted when
// req_valid && req_ready; a read is answered exactly LAT clocks later on
// rsp_valid/rsp_rdata, in order. With STALL=1 req_ready drops pseudo-randomly
// to exercise back-pressure. Only DEPTH beats are stored: the address is
// taken modulo DEPTH. Contents start at zero; tasks give backdoor access.
module hbm_model #(
  parameter int unsigned AW    = 25,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b0
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [511:0]  req_wdata,
  output logic          rsp_valid,
  output logic [511:0]  rsp_rdata
);
  logic [511:0] mem [DEPTH];
  logic         pv [LAT];
  logic [511:0] pd [LAT];
  int unsigned  reads = 0, writes = 0;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    req_ready = 1'b1;
  end

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req_we) begin
        mem[32'(req_addr) % DEPTH] <= req_wdata;
        writes++;
      end else begin
        pv[0] <= 1'b1;
        pd[0] <= mem[32'(req_addr) % DEPTH];
        reads++;
      end
    end
    if (STALL) req_ready <= ($urandom % 4) != 0;
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];

  function automatic logic [511:0] peek(input int unsigned a);
    return mem[a % DEPTH];
  endfunction
  task automatic poke(input int unsigned a, input logic [511:0] d);
    mem[a % DEPTH] = d;
  endtask
endmodule
