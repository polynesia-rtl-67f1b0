// sync_fifo: single-clock first-in first-out queue used for the merge unit's input
// queues and final log and for the queues between the update-shipping stages.
//
// Storage is a plain array with read and write pointers; it accepts a push while not
// full and shows its oldest entry on out_data whenever out_valid is high (first-word
// fall-through). Push and pop in the same cycle are allowed. count gives the fill
// level. Reset empties the queue; the array itself is not cleared.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  wire do_push = in_valid && in_ready;
  wire do_pop  = out_valid && out_ready;

  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign count     = cnt;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      cnt <= cnt + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  // A write to a full queue or a read from an empty one is a protocol error upstream.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= DEPTH);
endmodule
