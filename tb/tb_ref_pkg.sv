// tb_ref_pkg: reference models shared by the testbenches, written
// independently of the RTL.
//   crc24_ref  - CRC-24 by polynomial long division of message * x^24 by
//                x^24 + 0x864CFB (bit array, first element = highest power)
//   SYNC_REF   - the 256-chip sync sequence as a literal (bit i sent i-th)
//   ADDR_REF   - the three channel addresses
package tb_ref_pkg;
  localparam logic [255:0] SYNC_REF =
    256'h31e87f90a7d57062b32fde6ee54a25a339e361175edf0d35b504ec9303a47101;
  localparam logic [31:0] ADDR_REF [3] = '{32'hA5C30001, 32'hA5C30002, 32'hA5C30003};

  typedef bit bitq_t[$];

  function automatic logic [23:0] crc24_ref(input bitq_t msg);
    bit r [$];
    logic [24:0] g;
    logic [23:0] rem;
    g = 25'h1864CFB;
    r = msg;
    for (int i = 0; i < 24; i++) r.push_back(1'b0);
    for (int i = 0; i + 24 < r.size(); i++)
      if (r[i]) for (int k = 0; k < 25; k++) r[i+k] = r[i+k] ^ g[24-k];
    for (int k = 0; k < 24; k++) rem[23-k] = r[r.size()-24+k];
    return rem;
  endfunction

  // The 1280 information bits of a frame: address, payload bytes MSB first, CRC.
  function automatic bitq_t info_bits(input logic [31:0] addr, input byte unsigned pl[$]);
    bitq_t m;
    logic [23:0] c;
    for (int i = 31; i >= 0; i--) m.push_back(addr[i]);
    foreach (pl[j]) for (int i = 7; i >= 0; i--) m.push_back(pl[j][i]);
    c = crc24_ref(m);
    for (int i = 23; i >= 0; i--) m.push_back(c[i]);
    return m;
  endfunction

  // Stand-in code of ldpc_enc_model.
  function automatic bitq_t code_bits(input bitq_t u);
    bitq_t c;
    c = u;
    for (int p = 0; p < 896; p++) c.push_back(u[p] ^ ((p + 896 < 1280) ? u[p+896] : 1'b0));
    return c;
  endfunction
endpackage
