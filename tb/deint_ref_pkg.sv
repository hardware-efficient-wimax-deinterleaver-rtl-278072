// Reference model for the deinterleaver testbenches: the IEEE 802.16
// deinterleaver permutations written directly with floor divisions,
// independent of the row/column rules used by the hardware.
//
//   s   = max(1, bits_per_subcarrier / 2)            (1, 2, 3)
//   m_n = s*floor(n/s) + (n + floor(d*n/Ncpbs)) mod s
//   k_n = d*m_n - (Ncpbs - 1)*floor(d*m_n/Ncpbs)
//
// where n is the index of the received bit within the block. The
// interleaver of the transmitter is included to build received blocks.
package deint_ref_pkg;

  function automatic int unsigned ref_s(int unsigned mod_code);
    case (mod_code)
      1:       return 2;   // 16-QAM, 4 bits per subcarrier
      2:       return 3;   // 64-QAM, 6 bits per subcarrier
      default: return 1;   // QPSK, 2 bits per subcarrier
    endcase
  endfunction

  function automatic int unsigned ref_addr(int unsigned mod_code, int unsigned ncpbs,
                                           int unsigned d, int unsigned n);
    int unsigned s, m;
    s = ref_s(mod_code);
    m = s * (n / s) + ((n + (d * n) / ncpbs) % s);
    return d * m - (ncpbs - 1) * ((d * m) / ncpbs);
  endfunction

  // IEEE 802.16 interleaver: position in the transmitted block of coded
  // bit k (equations m_k and j_k of the standard).
  function automatic int unsigned ref_intlv(int unsigned mod_code, int unsigned ncpbs,
                                            int unsigned d, int unsigned k);
    int unsigned s, m;
    s = ref_s(mod_code);
    m = (ncpbs / d) * (k % d) + k / d;
    return s * (m / s) + ((m + ncpbs - (d * m) / ncpbs) % s);
  endfunction

endpackage
