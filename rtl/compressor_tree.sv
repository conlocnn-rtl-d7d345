// compressor_tree -- carry-save (Wallace) reduction of N_OPS operands plus
// N_OPS-1 single-bit increments into one sum, for the multi-digit ELP_BSD MAC.
//
// The paper adds the outputs of the per-digit shifters and the incoming partial
// sum with "a compressor tree followed by a multi-bit adder". This module is
// that pair. Its structure is this design's choice, because the paper gives only
// the function. Each level groups the remaining rows by three into 3:2
// full-adder compressors and passes leftover rows on. Once two rows are left,
// one carry-propagate adder adds them. The carry row of each compressor always has a
// free least significant bit, and the final adder has a carry input. These
// N_OPS-2 + 1 free slots take the single-bit increments in inc[]. The
// digit multipliers need exactly these: the +1 that completes the two's
// complement of each negative digit. So negation costs no extra adder.
//
// Interface: ops[i] are W-bit operands, inc[i] single-bit +1 terms; sum is
// (sum ops + sum inc) mod 2^W. Purely combinational. N_OPS >= 2.
module compressor_tree #(
  parameter int unsigned N_OPS = 3,
  parameter int unsigned W     = 24
) (
  input  logic [N_OPS-1:0][W-1:0] ops,
  input  logic [N_OPS-2:0]        inc,
  output logic [W-1:0]            sum
);

  logic [W-1:0] row   [N_OPS];
  logic [W-1:0] nrow  [N_OPS];
  logic [W-1:0] a, b, c, maj;
  int unsigned  cnt, ncnt, groups, used_inc;

  always_comb begin
    for (int unsigned i = 0; i < N_OPS; i++) row[i] = ops[i];
    cnt      = N_OPS;
    used_inc = 0;
    a = '0; b = '0; c = '0; maj = '0;
    // at most N_OPS levels are ever needed
    for (int unsigned lvl = 0; lvl < N_OPS; lvl++) begin
      for (int unsigned i = 0; i < N_OPS; i++) nrow[i] = '0;
      ncnt = 0;
      if (cnt > 2) begin
        groups = cnt / 3;
        for (int unsigned g = 0; g < N_OPS / 3; g++) begin
          if (g < groups) begin
            a = row[3*g]; b = row[3*g+1]; c = row[3*g+2];
            nrow[ncnt]   = a ^ b ^ c;
            maj          = (a & b) | (a & c) | (b & c);
            nrow[ncnt+1] = {maj[W-2:0], inc[used_inc]};
            ncnt     += 2;
            used_inc += 1;
          end
        end
        for (int unsigned i = 0; i < N_OPS; i++)
          if (i >= 3 * groups && i < cnt) begin
            nrow[ncnt] = row[i];
            ncnt += 1;
          end
        for (int unsigned i = 0; i < N_OPS; i++) row[i] = nrow[i];
        cnt = ncnt;
      end
    end
    // carry-propagate adder; the last increment is its carry input
    sum = row[0] + ((cnt > 1) ? row[1] : '0) + W'(inc[N_OPS-2]);
  end

endmodule
