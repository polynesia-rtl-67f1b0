// copy_unit_tb: copies regions of several lengths (including 0, 1 and lengths that
// are not multiples of four) between unaligned addresses through a memory model
// with random latency and backpressure, and checks the destination word by word,
// that no word outside it was touched, that several reads were in flight at once,
// and that a long copy reaches at least one word per cycle on average.
module copy_unit_tb;
  import polynesia_pkg::*;
  localparam int NF = 4, NW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy, done;
  copy_cmd_t cmd;
  logic rd_req_valid [NF], rd_req_ready [NF], rd_rsp_valid [NF];
  mem_req_t rd_req [NF];
  mem_rsp_t rd_rsp [NF];
  logic wr_req_valid [NW], wr_req_ready [NW];
  mem_req_t wr_req [NW];
  logic [31:0] stat_words;
  logic [7:0] stat_max_inflight;

  copy_unit #(.N_FETCH(NF), .N_WB(NW), .TB_DEPTH(16)) dut (.*);

  // fetch ports 0-3 and writeback ports 4-7 of one memory
  logic m_vld [NF+NW], m_rdy [NF+NW], m_rsp_vld [NF+NW];
  mem_req_t m_req [NF+NW];
  mem_rsp_t m_rsp [NF+NW];
  mem_model #(.NPORTS(NF+NW), .LAT_MAX(8)) u_mem (.clk, .rst_n, .req_valid(m_vld),
    .req_ready(m_rdy), .req(m_req), .rsp_valid(m_rsp_vld), .rsp(m_rsp));
  always_comb begin
    for (int f = 0; f < NF; f++) begin
      m_vld[f] = rd_req_valid[f]; m_req[f] = rd_req[f]; rd_req_ready[f] = m_rdy[f];
      rd_rsp_valid[f] = m_rsp_vld[f]; rd_rsp[f] = m_rsp[f];
    end
    for (int w = 0; w < NW; w++) begin
      m_vld[NF+w] = wr_req_valid[w]; m_req[NF+w] = wr_req[w]; wr_req_ready[w] = m_rdy[NF+w];
    end
  end

  int checks = 0, failures = 0;

  function automatic logic [MEM_DW-1:0] pat(logic [MEM_AW-1:0] a);
    return {a, ~a, a * 32'd7, 32'hC0DE_0000 ^ a};
  endfunction

  task automatic run(logic [MEM_AW-1:0] src, logic [MEM_AW-1:0] dst, int len, bit timed);
    int t0, cyc;
    for (int i = -2; i < len + 2; i++) begin
      u_mem.write_word(src + i, pat(src + i));
      u_mem.write_word(dst + i, 128'hDEAD);
    end
    @(negedge clk); cmd_valid = 1; cmd = '{src: src, dst: dst, len: len};
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    for (int i = 0; i < len; i++) begin
      checks++;
      if (u_mem.read_word(dst + i) !== pat(src + i)) begin
        failures++; if (failures < 5) $display("len %0d word %0d wrong", len, i);
      end
    end
    checks += 2;
    if (u_mem.read_word(dst - 1) !== 128'hDEAD || u_mem.read_word(dst + len) !== 128'hDEAD) failures++;
    if (timed && cyc > len * 2) begin failures++; $display("copy of %0d words took %0d cycles", len, cyc); end
    if (timed) $display("copy of %0d words: %0d cycles", len, cyc);
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(32'h1000, 32'h9003, 1, 0);
    run(32'h1003, 32'h9100, 7, 0);
    run(32'h2000, 32'h9200, 0, 0);
    run(32'h2005, 32'hA001, 333, 1);
    checks++;
    if (stat_max_inflight < 4) begin failures++; $display("max in flight %0d", stat_max_inflight); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
