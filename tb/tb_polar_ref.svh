// Reference polar code for the polar test benches, written independently of
// the RTL: the information set is found by sorting the first N-S indices by
// polarization weight PW(i) = sum_j bit_j(i) 2^(j/4) (selection sort), and
// encoding is x = u * F^(x)n computed by the textbook butterfly.
function automatic void ref_mask(int n, int s, int k, output bit msk [PMAX]);
  real w [PMAX];
  bit  used [PMAX];
  for (int i = 0; i < PMAX; i++) begin msk[i] = 0; used[i] = 0; w[i] = 0.0; end
  for (int i = 0; i < n - s; i++)
    for (int j = 0; j < 12; j++) if ((i >> j) & 1) w[i] += 2.0 ** (j / 4.0);
  for (int c = 0; c < k; c++) begin
    int best = -1;
    for (int i = 0; i < n - s; i++)
      if (!used[i] && (best < 0 || w[i] > w[best] || (w[i] == w[best] && i > best))) best = i;
    used[best] = 1; msk[best] = 1;
  end
endfunction

function automatic void ref_encode(int n, input bit u [PMAX], output bit x [PMAX]);
  x = u;
  for (int h = 1; h < n; h = 2 * h)
    for (int i = 0; i < n; i += 2 * h)
      for (int j = i; j < i + h; j++) x[j] = x[j] ^ x[j + h];
endfunction
