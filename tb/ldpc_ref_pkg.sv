// ldpc_ref_pkg: behavioural reference model of the unrolled decoder, used by the testbenches.
//
// It computes with integers what the hardware computes with look-up tables and wires:
// a label (sign-magnitude, MSB = sign) stands for the odd integer s*(2*mag+1); each LUT of
// the default table set adds its inputs and re-quantises to mag = min(max, |sum| div 2).
// The variable-node tree for output k sums the two input pairs that do not contain k, then
// adds input k^1 (the partner of k), then the channel LLR. The check node is plain min-sum
// over the other inputs. The parity-check matrix connects check i*Z+r, edge j, with bit
// j*Z + (r + i*j) mod Z. Sizes are passed as arguments so that any Z can be modelled.
package ldpc_ref_pkg;
  localparam int DV = 6;
  localparam int QM = 3;
  localparam int QC = 4;

  function automatic int val(int lab, int q);
    int mag = lab % (1 << (q - 1));
    return ((lab >> (q - 1)) & 1) ? -(2 * mag + 1) : (2 * mag + 1);
  endfunction

  function automatic int qnt(int x, int q);
    int mag = (x < 0 ? -x : x) / 2;
    if (mag > (1 << (q - 1)) - 1) mag = (1 << (q - 1)) - 1;
    return (x < 0) ? (mag | (1 << (q - 1))) : mag;
  endfunction

  // one output of a variable node: messages mu[0..5] (labels), llr label, excluded edge k
  function automatic int vn_out(int mu [DV], int llr, int k);
    int pa [2];
    int np = 0;
    int t;
    for (int p = 0; p < 3; p++) if (p != k / 2) begin
      pa[np] = qnt(val(mu[2*p], QM) + val(mu[2*p+1], QM), QM);
      np++;
    end
    t = qnt(val(pa[0], QM) + val(pa[1], QM), QM);
    t = qnt(val(t, QM) + val(mu[k ^ 1], QM), QM);
    return qnt(val(t, QM) + val(llr, QC), QM);
  endfunction

  function automatic int dn_bit(int mu [DV], int llr);
    int t1 = qnt(val(mu[0], QM) + val(mu[1], QM) + val(mu[2], QM), QM);
    int t2 = qnt(val(mu[3], QM) + val(mu[4], QM) + val(mu[5], QM), QM);
    return (val(t1, QM) + val(t2, QM) + val(llr, QC)) < 0 ? 1 : 0;
  endfunction

  function automatic int init_msg(int llr);
    return qnt(val(llr, QC), QM);
  endfunction

  // bit connected to edge j of check (i, r)
  function automatic int var_of(int i, int j, int r, int z);
    return j * z + (r + i * j) % z;
  endfunction

  // min-sum over all inputs of one check except edge k
  function automatic int cn_out(int mu [], int k);
    int s = 0;
    int mn = 1 << (QM - 1);
    for (int j = 0; j < mu.size(); j++) if (j != k) begin
      s ^= (mu[j] >> (QM - 1)) & 1;
      if (mu[j] % (1 << (QM - 1)) < mn) mn = mu[j] % (1 << (QM - 1));
    end
    return (s << (QM - 1)) | mn;
  endfunction

  // full decoder: llr[n] labels -> decoded bits, for a (6, dc) code of block size z
  function automatic void decode(int z, int dc, int iter, int llr [], ref int cw []);
    int n_bits = dc * z;
    int m_chk  = DV * z;
    int v2c [];         // v2c[n*DV+i]: message of bit n towards block row i
    int c2v [];         // c2v[n*DV+i]: message of the block-row-i check towards bit n
    int cm [];
    v2c = new[n_bits * DV];
    c2v = new[n_bits * DV];
    cw  = new[n_bits];
    cm  = new[dc];
    for (int n = 0; n < n_bits; n++)
      for (int i = 0; i < DV; i++) v2c[n*DV+i] = init_msg(llr[n]);
    for (int it = 0; it < iter; it++) begin
      for (int m = 0; m < m_chk; m++) begin
        int i = m / z, r = m % z;
        for (int j = 0; j < dc; j++) cm[j] = v2c[var_of(i, j, r, z)*DV + i];
        for (int j = 0; j < dc; j++) c2v[var_of(i, j, r, z)*DV + i] = cn_out(cm, j);
      end
      if (it < iter - 1) begin
        for (int n = 0; n < n_bits; n++) begin
          int mu [DV];
          for (int i = 0; i < DV; i++) mu[i] = c2v[n*DV+i];
          for (int k = 0; k < DV; k++) v2c[n*DV+k] = vn_out(mu, llr[n], k);
        end
      end else begin
        for (int n = 0; n < n_bits; n++) begin
          int mu [DV];
          for (int i = 0; i < DV; i++) mu[i] = c2v[n*DV+i];
          cw[n] = dn_bit(mu, llr[n]);
        end
      end
    end
  endfunction
endpackage
