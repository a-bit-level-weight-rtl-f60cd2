// output_decoder -- output routing of one CU.
//
// After reordering, the 8 physical columns of an OU stand for up to 16
// logical output columns: a "repetitive" physical column holds two logical
// columns whose bits are identical over the OU's rows, so its ADC code is the
// partial sum of both. The OU's column-index list (idx_entry_t) gives the
// number L of logical indices and the indices themselves, delta encoded.
// Because the reordering puts repetitive columns first, L alone tells the
// split:  r = L - OU_W  repetitive columns if L > OU_W, else none;
//   list slots 0,1 -> physical column 0, slots 2,3 -> column 1, ...,
//   slots 2r-1 and 2r-2 -> column r-1, then slot s >= 2r -> column s - r.
// With L < OU_W only the first L physical columns are used. The decoder
// undoes the delta coding (index_s = index_{s-1} + delta_s, index_{-1} = 0,
// modulo N_OUT) and returns, per logical output column j, the routed code
// `ps[j]` and a flag `hit[j]`. It is purely combinational.
//
// The rules "at most two columns per pattern", "repetitive indices first",
// "the decoder needs only the length" and "delta encoding" follow the
// published design. Padding is this design's convention: an OU that holds
// repetitive columns but fewer than OU_W used columns is padded with zero
// columns that carry a dummy index, so that L = OU_W + r still holds.
module output_decoder
  import rram_pkg::*;
(
  input  logic        valid,
  input  adc_code_t   code [OU_W],
  input  idx_entry_t  entry,
  output adc_code_t   ps   [N_OUT],
  output logic        hit  [N_OUT],
  output logic [$clog2(OU_W+1)-1:0] n_rep    // repetitive columns in this OU
);

  logic [OUT_AW-1:0] idx [MAX_IDX];
  logic [$clog2(OU_W)-1:0] pcol [MAX_IDX];
  logic              slot_ok [MAX_IDX];
  int unsigned       r;

  always_comb begin
    r = (32'(entry.len) > OU_W) ? 32'(entry.len) - OU_W : 0;
    n_rep = valid ? ($clog2(OU_W+1))'(r) : '0;
    for (int s = 0; s < MAX_IDX; s++) begin
      if (s == 0) idx[s] = OUT_AW'(entry.delta[s]);
      else        idx[s] = idx[s-1] + OUT_AW'(entry.delta[s]);
      slot_ok[s] = valid && (s < 32'(entry.len));
      if (s < 2 * r) pcol[s] = ($clog2(OU_W))'(s / 2);
      else           pcol[s] = ($clog2(OU_W))'(s - r);
    end
    for (int j = 0; j < N_OUT; j++) begin
      ps[j]  = '0;
      hit[j] = 1'b0;
    end
    for (int s = 0; s < MAX_IDX; s++) begin
      if (slot_ok[s]) begin
        ps[idx[s]]  = ps[idx[s]] | code[pcol[s]];
        hit[idx[s]] = 1'b1;
      end
    end
  end

endmodule
