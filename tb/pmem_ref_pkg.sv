// pmem_ref_pkg: reference models used by the testbenches. They restate the
// specification of the RNG and of the sampling arithmetic in plain integer
// code, independent of the RTL structure:
//   - LFSR: Galois, mask 16'hB400, 16 single shifts per draw, zero seed -> SEED
//   - per-source seed: upper half of base*2654435761 + i*0x9E3779B9 + 0x7F4A7C15
//   - eps = clamp(floor((sum of CLT_N values - CLT_N*32768 + 2048) / 4096), -128, 127)
//   - noise = floor((sigma*eps + 8) / 16), sample = mu + noise
package pmem_ref_pkg;

  function automatic logic [15:0] lfsr_adv(input logic [15:0] s, input int steps = 16);
    for (int i = 0; i < steps; i++) s = s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
    return s;
  endfunction

  function automatic logic [15:0] seed_of(input logic [15:0] base, input int i);
    logic [31:0] h;
    h = {16'd0, base} * 32'd2654435761 + i * 32'h9E37_79B9 + 32'h7F4A_7C15;
    return (h[31:16] == 16'd0) ? 16'h0001 : h[31:16];
  endfunction

  function automatic int noise_of(input int sigma, input int eps);
    return (sigma * eps + 8) >>> 4;
  endfunction

  // Reference CLT RNG: CLT_N LFSR states
  class ref_grng;
    int          n;
    logic [15:0] base;
    logic [15:0] st[$];

    function new(logic [15:0] base_, int n_ = 12);
      base = base_;
      n    = n_;
      st.delete();
      for (int i = 0; i < n; i++) st.push_back(seed_of(base, i));
    endfunction

    function void reseed(logic [15:0] seed);
      for (int i = 0; i < n; i++) begin
        logic [15:0] s = seed ^ seed_of(base, i);
        st[i] = (s == 16'd0) ? seed_of(base, i) : s;
      end
    endfunction

    function int eps();
      int sum = 0;
      for (int i = 0; i < n; i++) sum += int'(st[i]);
      sum = (sum - n * 32768 + 2048) >>> 12;
      if (sum > 127) sum = 127;
      if (sum < -128) sum = -128;
      return sum;
    endfunction

    function void step();
      for (int i = 0; i < n; i++) st[i] = lfsr_adv(st[i]);
    endfunction
  endclass

endpackage
