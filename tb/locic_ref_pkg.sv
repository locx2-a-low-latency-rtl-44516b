// locic_ref_pkg: reference models used by the testbenches to check LOCic
// frames independently of the RTL: bit-serial PRBS sequences, bit-serial
// CRC-8, the self-synchronous descrambler, and the mapping from ADC words to
// the payload bit stream.
package locic_ref_pkg;

  // ADC frame: lane l (0..3) bit k (0..13, k=0 sent first) is word[l*14 + 13 - k].
  function automatic logic adc_bit(input logic [55:0] word, input int lane, input int k);
    return word[lane*14 + 13 - k];
  endfunction

  // Payload stream of one frame, P[0] first: bit column k of lanes
  // {A3,A2,A1,A0,B3,B2,B1,B0}, columns 0..13 in order. Returned as [111:0]
  // with P[0] at bit 111.
  function automatic logic [111:0] payload_of(input logic [55:0] wa, input logic [55:0] wb);
    logic [111:0] p;
    int n;
    n = 111;
    for (int k = 0; k < 14; k++) begin
      for (int l = 3; l >= 0; l--) begin p[n] = adc_bit(wa, l, k); n--; end
      for (int l = 3; l >= 0; l--) begin p[n] = adc_bit(wb, l, k); n--; end
    end
    return p;
  endfunction

  function automatic logic [7:0] crc_ref(input logic [111:0] p);
    logic [7:0] c;
    logic fb;
    c = 8'h00;
    for (int i = 111; i >= 0; i--) begin
      fb = c[7] ^ p[i];
      c  = c << 1;
      if (fb) c = c ^ 8'h07;
    end
    return c;
  endfunction

  // Output bit n (n >= 0) of the PRBS a[n] = a[n-t1] ^ a[n-t2], seeded with ones.
  function automatic logic prbs_bit(input int n, input int t1, input int t2);
    logic a[0:8191];
    for (int i = 0; i <= n; i++) begin
      logic x1, x2;
      x1 = (i - t1 < 0) ? 1'b1 : a[i - t1];
      x2 = (i - t2 < 0) ? 1'b1 : a[i - t2];
      a[i] = x1 ^ x2;
    end
    return a[n];
  endfunction

  // Expected 4-bit header code of the frame with bunch-crossing number bcid.
  function automatic logic [3:0] bcid_code_ref(input int bcid);
    int m7, m5;
    m7 = (2 * bcid) % 254;   // PRBS-7 output repeats every 127 bits -> 2 per frame
    m5 = (2 * bcid) % 62;
    return {prbs_bit(m7, 6, 7), prbs_bit(m7 + 1, 6, 7),
            prbs_bit(m5, 3, 5), prbs_bit(m5 + 1, 3, 5)};
  endfunction

  // Descrambler state: the last 58 received scrambled payload bits, h[0] newest.
  function automatic logic [111:0] descramble(inout logic [57:0] h, input logic [111:0] s);
    logic [111:0] d;
    for (int i = 111; i >= 0; i--) begin
      d[i] = s[i] ^ h[38] ^ h[57];
      h    = {h[56:0], s[i]};
    end
    return d;
  endfunction

endpackage
