// hbm_model: behavioural stand-in for one HBM AXI port as the State Arbiter
// sees it: a request channel (valid/ready, write enable, 256-bit beat
// address, write data) and a read-response channel (rvalid, rdata). Requests
// are accepted every cycle; read data return LAT cycles later. Storage is a
// sparse associative array, so any address can be used. Not synthesizable;
// the real part is the FPGA's HBM stacks and memory controllers.
module hbm_model #(
  parameter int unsigned LAT = 3
) (
  input  logic         clk,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  logic [31:0]  req_addr,
  input  logic [255:0] req_wdata,
  output logic         rvalid,
  output logic [255:0] rdata
);
  logic [255:0] mem [int unsigned];
  logic [LAT-1:0] vpipe = '0;
  logic [31:0]    apipe [LAT];
  int             n_reads = 0, n_writes = 0;

  assign req_ready = 1'b1;

  always @(posedge clk) begin
    vpipe    <= {vpipe[LAT-2:0], req_valid && !req_we};
    apipe[0] <= req_addr;
    for (int i = 1; i < LAT; i++) apipe[i] <= apipe[i-1];
    if (req_valid && req_we) begin
      mem[req_addr] = req_wdata;
      n_writes++;
    end
    if (req_valid && !req_we) n_reads++;
    rvalid <= vpipe[LAT-1];
    rdata  <= mem.exists(apipe[LAT-1]) ? mem[apipe[LAT-1]] : '0;
  end

  function automatic void poke(int unsigned a, logic [255:0] d);
    mem[a] = d;
  endfunction

  function automatic logic [255:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
endmodule
