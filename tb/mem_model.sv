// mem_model: behavioural model of a vault's DRAM as seen through its memory
// controller, for simulation only (not synthesizable: associative array, $urandom).
//
// NPORTS independent request/response ports. Each port takes one request at a time
// and, for a read, answers after a random 1..LAT_MAX cycles, so reads on different
// ports come back out of order. ready is also dropped at random (backpressure).
// Writes take effect when accepted, lane by lane under wmask. Words never written
// read as zero. write_word/read_word give the testbench direct access. Requests are
// ignored while rst_n is low.
module mem_model
  import polynesia_pkg::*;
#(
  parameter int unsigned NPORTS  = 1,
  parameter int unsigned LAT_MAX = 4,
  parameter bit          STALLS  = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid [NPORTS],
  output logic     req_ready [NPORTS],
  input  mem_req_t req       [NPORTS],
  output logic     rsp_valid [NPORTS],
  output mem_rsp_t rsp       [NPORTS]
);
  logic [MEM_DW-1:0] mem [logic [MEM_AW-1:0]];
  int unsigned reads, writes;

  int unsigned       lat  [NPORTS];
  logic              pend [NPORTS];
  logic [MEM_AW-1:0] paddr[NPORTS];
  logic              stall[NPORTS];

  function automatic void write_word(logic [MEM_AW-1:0] a, logic [MEM_DW-1:0] d);
    mem[a] = d;
  endfunction
  function automatic logic [MEM_DW-1:0] read_word(logic [MEM_AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    reads = 0; writes = 0;
    for (int p = 0; p < NPORTS; p++) begin
      pend[p] = 1'b0; lat[p] = 0; paddr[p] = '0; stall[p] = 1'b0;
      rsp_valid[p] = 1'b0; rsp[p] = '0;
    end
  end

  always_comb for (int p = 0; p < NPORTS; p++) req_ready[p] = !pend[p] && !stall[p];

  always @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      rsp_valid[p] <= 1'b0;
      stall[p] <= STALLS && ($urandom_range(0, 7) == 0);
      if (!rst_n) begin
        pend[p] <= 1'b0;
      end else if (pend[p]) begin
        if (lat[p] <= 1) begin
          pend[p]         <= 1'b0;
          rsp_valid[p]    <= 1'b1;
          rsp[p].addr     <= paddr[p];
          rsp[p].rdata    <= read_word(paddr[p]);
        end else lat[p] <= lat[p] - 1;
      end else if (req_valid[p] && req_ready[p]) begin
        if (req[p].we) begin
          logic [MEM_DW-1:0] w;
          w = read_word(req[p].addr);
          for (int l = 0; l < MEM_LANES; l++)
            if (req[p].wmask[l]) w[32*l +: 32] = req[p].wdata[32*l +: 32];
          mem[req[p].addr] = w;
          writes++;
        end else begin
          pend[p]  <= 1'b1;
          paddr[p] <= req[p].addr;
          lat[p]   <= $urandom_range(1, LAT_MAX);
          reads++;
        end
      end
    end
  end
endmodule
