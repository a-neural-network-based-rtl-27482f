// onlad_ram: one on-chip matrix store of the ONLAD core (a flattened 1-D array of
// Q10.22 words, row-major, as the paper keeps all parameters).
//
// It has LANES read ports and LANES write ports so that the two arithmetic lanes of
// the train and predict modules can each fetch and store one element per cycle. Reads
// are asynchronous: rsp.rdata[l] shows mem[req.raddr[l]] in the same cycle (an address
// at or beyond DEPTH reads as 0). Writes happen at the rising clock edge; a write to an
// address at or beyond DEPTH is dropped, and if both lanes write the same address lane
// LANES-1 wins. The contents are not reset, as in a block RAM.
//
// The paper builds these stores from FPGA block RAMs, which read synchronously; the
// asynchronous read used here is this design's simplification.
module onlad_ram
  import onlad_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic     clk,
  input  mem_req_t req,
  output mem_rsp_t rsp
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  fx_t mem [DEPTH];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (req.raddr[l] < idx_t'(DEPTH)) rsp.rdata[l] = mem[req.raddr[l][AW-1:0]];
      else                              rsp.rdata[l] = '0;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (req.we[l] && req.waddr[l] < idx_t'(DEPTH)) mem[req.waddr[l][AW-1:0]] <= req.wdata[l];
    end
  end

endmodule
