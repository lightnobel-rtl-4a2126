// tb_ln_ssu: sum, mean and max of random lane values; scale and reciprocal for random
// ranges; and the packed memory layout of quantized tokens (inputs already in LCN
// order: inlier codes first, outliers last), compared with the reference packer.
module tb_ln_ssu;
  import ln_pkg::*;
  import tb_ln_ref_pkg::*;
  logic [127:0][VW-1:0] vals;
  acc_t sum;
  logic [VW-1:0] mean, vmax, m_range, sigma;
  qscheme_t scheme;
  logic [7:0] qmax;
  logic [23:0] recip;
  logic [KMAX-1:0][IDXW-1:0] oidx;
  line_t packed_line;
  int checks = 0, failures = 0;
  ln_ssu dut (.*);
  initial begin
    for (int t = 0; t < 60; t++) begin
      vec_t v; qtok_t q; longint s; int mx, bits, k, n, qm;
      bits = (t % 2) ? 8 : 4; k = (t % 3) * 4;
      v = rand_token(300, k, 3000);
      q = quantize_token(v, bits, k);
      // reduction on the raw token
      s = 0; mx = -40000;
      for (int c = 0; c < HZ; c++) begin vals[c] = v[c]; s += v[c]; if (v[c] > mx) mx = v[c]; end
      scheme.prec = (bits == 4) ? PREC4 : PREC8; scheme.k = 4'(k);
      m_range = 16'($urandom_range(6000, 0));
      oidx = '0;
      #1;
      checks += 3;
      if (sum !== ACCW'(s)) begin failures++; $display("FAIL sum"); end
      if ($signed(mean) !== 16'(s >>> 7)) begin failures++; $display("FAIL mean"); end
      if ($signed(vmax) !== 16'(mx)) begin failures++; $display("FAIL max"); end
      qm = (1 << (bits-1)) - 1;
      checks += 3;
      if (qmax !== 8'(qm)) failures++;
      if (sigma !== 16'(((m_range + qm/2) / qm) == 0 ? 1 : (m_range + qm/2) / qm)) begin failures++; $display("FAIL sigma"); end
      if (recip !== 24'((m_range == 0) ? 0 : ((longint'(qm) << 16) + m_range/2) / m_range)) begin failures++; $display("FAIL recip"); end
      // packing: present codes in LCN order, with the reference's scale range
      n = 0;
      for (int c = 0; c < HZ; c++) if (!q.is_out[c]) begin vals[n] = VW'(q.code[c]); n++; end
      for (int j = 0; j < k; j++) begin vals[HZ-k+j] = VW'(q.code[q.oidx[j]]); oidx[j] = IDXW'(q.oidx[j]); end
      m_range = 16'(q.sigma * qm);        // a range that gives back the same sigma
      #1;
      checks++;
      if (sigma == 16'(q.sigma) && packed_line !== pack(q)) begin failures++; $display("FAIL pack bits=%0d k=%0d", bits, k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
