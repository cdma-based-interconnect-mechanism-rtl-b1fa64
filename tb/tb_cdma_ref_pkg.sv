// tb_cdma_ref_pkg: reference model of the CDMA bus coding for the testbenches.
//
// It is written independently of the RTL: the Hadamard chip is built by the
// Sylvester recursion H(2n) = [[H, H], [H, not H]] instead of a parity, the
// chip sums are counted by plain loops, and the despread decision uses the
// paper's Eq. 2 written over whole arrays. Sizes are passed as arguments;
// arrays are dynamic.
package tb_cdma_ref_pkg;

  // Chip `col` of Hadamard row `row` for a code of n chips (n a power of 2).
  function automatic bit hadamard(int row, int col, int n);
    bit v = 0;
    for (int h = n / 2; h >= 1; h = h / 2) begin
      if (row >= h && col >= h) v = ~v;
      row = row % h;
      col = col % h;
    end
    return v;
  endfunction

  // Code word (as an int with chip k in bit k) of batch b in bit slot j.
  function automatic int unsigned walsh_code(int b, int j, int chips);
    int unsigned c = 0;
    int row = ((j - b) % chips + chips) % chips;
    for (int k = 0; k < chips; k++) if (hadamard(row, k, chips)) c |= (1 << k);
    return c;
  endfunction

  // Chip sums of a word: result[b*chips + k] is column sum k of batch b.
  function automatic void encode(input logic [255:0] data, input int data_w,
                                 input int chips, output int sums[]);
    int nb = data_w / chips;
    sums = new[nb * chips];
    for (int b = 0; b < nb; b++)
      for (int k = 0; k < chips; k++) begin
        int s = 0;
        for (int j = 0; j < chips; j++) begin
          bit d = data[b*chips + j];
          bit c = walsh_code(b, j, chips)[k];
          s += (d ^ c) ? 1 : 0;
        end
        sums[b*chips + k] = s;
      end
  endfunction

  // LFSR code word of batch b in slot j (8 chips): the register seeded with
  // (37*b mod 255)+1 and stepped j times, feedback r1^r2^r3^r7 into r1.
  function automatic logic [7:0] lfsr_code(int b, int j);
    logic [7:0] s = 8'(((b * 37) % 255) + 1);
    for (int i = 0; i < j; i++) s = {s[6:0], s[0] ^ s[1] ^ s[2] ^ s[6]};
    return s;
  endfunction

  // Chip sums with LFSR codes (8 chips per code).
  function automatic void encode_lfsr(input logic [255:0] data, input int data_w,
                                      output int sums[]);
    int nb = data_w / 8;
    sums = new[nb * 8];
    for (int b = 0; b < nb; b++)
      for (int k = 0; k < 8; k++) begin
        int s = 0;
        for (int j = 0; j < 8; j++) begin
          logic [7:0] c = lfsr_code(b, j);
          s += (data[b*8 + j] ^ c[k]) ? 1 : 0;
        end
        sums[b*8 + k] = s;
      end
  endfunction

  // Eq. 2 despreading of a full set of chip sums.
  function automatic logic [255:0] decode(input int sums[], input int data_w, input int chips);
    logic [255:0] d = '0;
    int nb = data_w / chips;
    for (int b = 0; b < nb; b++)
      for (int j = 0; j < chips; j++) begin
        int corr = 0;
        int unsigned c = walsh_code(b, j, chips);
        for (int k = 0; k < chips; k++) begin
          int p = sums[b*chips + k];
          corr += c[k] ? (-2*p + chips) : (2*p - chips);
        end
        d[b*chips + j] = (corr > 0);
      end
    return d;
  endfunction

  // Bus beat k of a set of sums: batch b in bits b*sum_w +: sum_w.
  function automatic logic [255:0] beat(input int sums[], input int k,
                                        input int data_w, input int chips);
    logic [255:0] v = '0;
    int nb = data_w / chips;
    int sw = $clog2(chips) + 1;
    for (int b = 0; b < nb; b++)
      for (int i = 0; i < sw; i++) v[b*sw + i] = sums[b*chips + k][i];
    return v;
  endfunction

endpackage
