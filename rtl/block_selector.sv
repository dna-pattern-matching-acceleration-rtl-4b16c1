// block_selector: activates one block of aCAM rows.
//
// The aCAM rows are split into NBLK blocks so that only the block holding the gene of
// interest is searched. The selector decodes the block index into a one-hot activation
// vector (a binary-to-one-hot decoder gated by enable). Each output drives, through
// inverting drivers, the NS lines of its block: an active block evaluates (NS low), an
// inactive one keeps NS high. The publication leaves the selector's gate-level design to a
// supplement that is not available here, so this decoder is the simplest circuit with the
// stated function. Purely combinational.
module block_selector #(
  parameter int unsigned NBLK = 8
) (
  input  logic [$clog2(NBLK)-1:0] blk_idx,
  input  logic                    enable,
  output logic [NBLK-1:0]         blk_act,   // 1 = block activated
  output logic [NBLK-1:0]         ns_blk     // inverted: NS line level per block
);

  always_comb begin
    blk_act = '0;
    if (enable) blk_act[blk_idx] = 1'b1;
  end

  assign ns_blk = ~blk_act;

endmodule
