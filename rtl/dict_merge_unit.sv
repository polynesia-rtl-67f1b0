// dict_merge_unit: scan/merge unit of the update application unit. It builds the new
// dictionary of a column from the old one and a batch of updates without sorting the
// column (the paper's "two-stage dictionary construction").
//
// Inputs are the old dictionary (sorted, distinct values, read through old_idx /
// old_val with a combinational read) and the update values, already sorted by the
// bitonic sorter, each tagged with its update number. A single linear scan takes, in
// every cycle, the smaller of the two heads (the old value on a tie) and appends it
// to the new dictionary unless it equals the value appended last. It writes three
// tables as it goes:
//   new dictionary : dict_widx -> dict_wval
//   hash index     : old code idx_old -> new code idx_new (the index that lets the
//                    column be re-encoded without decoding it)
//   update codes   : update tag code_tag -> new code code_val
// When both inputs are used up it reports the new size and the number of bits a
// fixed-length code needs, ceil(log2(size)) with a minimum of 1.
//
// Timing: one input value per cycle, so old_size + upd_total cycles per merge.
// The port style (combinational old-dictionary read, write strobes) is this
// design's choice.
module dict_merge_unit #(
  parameter int unsigned VAL_W    = 32,
  parameter int unsigned DICT_AW  = 11,   // dictionary index width
  parameter int unsigned TAG_W    = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [DICT_AW:0]   old_size,
  input  logic [TAG_W:0]     upd_total,
  output logic               busy,
  output logic               done,          // one-cycle pulse
  // old dictionary read
  output logic [DICT_AW-1:0] old_idx,
  input  logic [VAL_W-1:0]   old_val,
  // sorted updates
  input  logic               upd_valid,
  output logic               upd_ready,
  input  logic [VAL_W-1:0]   upd_val,
  input  logic [TAG_W-1:0]   upd_tag,
  // outputs
  output logic               dict_we,
  output logic [DICT_AW-1:0] dict_widx,
  output logic [VAL_W-1:0]   dict_wval,
  output logic               idx_we,
  output logic [DICT_AW-1:0] idx_old,
  output logic [DICT_AW-1:0] idx_new,
  output logic               code_we,
  output logic [TAG_W-1:0]   code_tag,
  output logic [DICT_AW-1:0] code_val,
  output logic [DICT_AW:0]   new_size,
  output logic [5:0]         code_bits
);
  logic [DICT_AW:0] oi;        // next old entry
  logic [TAG_W:0]   ui;        // updates consumed
  logic [VAL_W-1:0] last;
  logic             have_last;
  logic [DICT_AW:0] n;         // entries written to the new dictionary

  wire old_left = (oi < old_size);
  wire upd_left = (ui < upd_total);
  assign old_idx = oi[DICT_AW-1:0];

  // Take the old head when it is not larger than the update head. While the next
  // update has not arrived yet, neither side may be taken.
  wire do_old   = busy && old_left && (!upd_left || (upd_valid && old_val <= upd_val));
  wire take_upd = busy && upd_left && upd_valid && (!old_left || upd_val < old_val);

  wire [VAL_W-1:0] v   = do_old ? old_val : upd_val;
  wire             dup = have_last && (last == v);

  assign upd_ready = take_upd;
  assign dict_we   = (do_old || take_upd) && !dup;
  assign dict_widx = n[DICT_AW-1:0];
  assign dict_wval = v;
  assign idx_we    = do_old;
  assign idx_old   = oi[DICT_AW-1:0];
  assign idx_new   = dup ? DICT_AW'(n - 1'b1) : n[DICT_AW-1:0];
  assign code_we   = take_upd;
  assign code_tag  = upd_tag;
  assign code_val  = dup ? DICT_AW'(n - 1'b1) : n[DICT_AW-1:0];
  assign new_size  = n;

  function automatic logic [5:0] clog2_min1(logic [DICT_AW:0] x);
    logic [5:0] b;
    b = 6'd1;
    while (b < 6'(DICT_AW + 1) && (DICT_AW+1)'(1 << b) < x) b++;
    return b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      oi        <= '0;
      ui        <= '0;
      last      <= '0;
      have_last <= 1'b0;
      n         <= '0;
      code_bits <= 6'd1;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        oi        <= '0;
        ui        <= '0;
        have_last <= 1'b0;
        n         <= '0;
      end else if (busy) begin
        if (do_old || take_upd) begin
          last      <= v;
          have_last <= 1'b1;
          if (!dup) n <= n + 1'b1;
        end
        if (do_old)   oi <= oi + 1'b1;
        if (take_upd) ui <= ui + 1'b1;
        if (!old_left && !upd_left) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          code_bits <= clog2_min1(n);
        end
      end
    end
  end

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n) !(do_old && take_upd));
endmodule
