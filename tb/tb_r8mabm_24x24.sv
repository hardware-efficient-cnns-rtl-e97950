// tb_r8mabm_24x24: self-checking test of the 24x24 radix-8 approximate Booth
// mantissa multiplier, all nine variants side by side.
//
// The exact variant must give x*y for every operand pair. Each approximate
// variant is compared bit for bit with a reference model written here in a
// different style: it forms the partial-product matrix from the Booth digits
// (its column sum is checked against x*y), then runs the same greedy
// column compression on per-column queues of bits and adds the two
// remaining rows. The test also checks that the
// approximation error stays within a bound derived from the tree (at most
// a few units of 2^24) and that each approximate variant differs from the
// exact product for some inputs. Random operands plus corner cases
// (0, 1, all ones, 2^23, mantissa-like values with the hidden bit set).
module tb_r8mabm_24x24;
  import approx_pkg::*;

  localparam int NV = 9;
  localparam int NVEC = 3000;

  logic [MANT_W-1:0] x, y;
  logic [PROD_W-1:0] p [NV];

  r8mabm_24x24 #(.MT(MT_EXACT)) u0 (.x(x), .y(y), .p(p[0]));
  r8mabm_24x24 #(.MT(MT_PMNI))  u1 (.x(x), .y(y), .p(p[1]));
  r8mabm_24x24 #(.MT(MT_PMSI))  u2 (.x(x), .y(y), .p(p[2]));
  r8mabm_24x24 #(.MT(MT_PMCI))  u3 (.x(x), .y(y), .p(p[3]));
  r8mabm_24x24 #(.MT(MT_PMCSI)) u4 (.x(x), .y(y), .p(p[4]));
  r8mabm_24x24 #(.MT(MT_NMNI))  u5 (.x(x), .y(y), .p(p[5]));
  r8mabm_24x24 #(.MT(MT_NMSI))  u6 (.x(x), .y(y), .p(p[6]));
  r8mabm_24x24 #(.MT(MT_NMCI))  u7 (.x(x), .y(y), .p(p[7]));
  r8mabm_24x24 #(.MT(MT_NMCSI)) u8 (.x(x), .y(y), .p(p[8]));

  int checks = 0, failures = 0;
  int ndiff [NV];

  // Reference model --------------------------------------------------------
  typedef bit colq_t [$];

  function automatic longint signed booth_digit(logic [23:0] yy, int i);
    int b3, b2, b1, b0;
    b3 = yy[3*i+2]; b2 = yy[3*i+1]; b1 = yy[3*i];
    b0 = (i == 0) ? 0 : yy[3*i-1];
    return -4*b3 + 2*b2 + b1 + b0;
  endfunction

  function automatic logic [47:0] ref_mul(mul_type_e mt, logic [23:0] xx, logic [23:0] yy);
    colq_t col [49];
    colq_t nxt [49];
    colq_t carry_in;
    longint signed d, v;
    logic [47:0] acc_a, acc_b;
    logic [47:0] total;
    int mx, s;
    bit a, b, c, dd;
    comp_kind_e k;
    // Columns of the modified matrix, built in the RTL's row order from
    // the Booth digits (27-bit one's-complement fields + correction bits).
    for (int r = 0; r < 10; r++) begin
      for (int cc = 0; cc < 48; cc++) begin
        bit bitv;
        if (!pp_present(r, cc)) continue;
        if (r < 8) begin
          logic [26:0] f;
          int j;
          d = booth_digit(yy, r);
          v = (d < 0) ? -d : d;
          f = 27'(v * longint'(xx));
          if (d < 0) f = ~f;
          j = cc - 3*r;
          if (r == 0) bitv = (j <= 26) ? f[j] : (j == 29) ? !f[26] : f[26];
          else        bitv = (j <= 25) ? f[j] : (j == 26) ? !f[26] : 1'b1;
        end else if (r == 8) bitv = xx[cc-24] & yy[23];
        else bitv = (booth_digit(yy, cc/3) < 0);
        col[cc].push_back(bitv);
      end
    end
    // Sanity: the matrix sums to x*y modulo 2^48.
    total = '0;
    for (int cc = 0; cc < 48; cc++) foreach (col[cc][q]) total += 48'(col[cc][q]) << cc;
    if (total != 48'(longint'(xx) * longint'(yy))) begin
      $display("REFERENCE PPM WRONG x=%h y=%h", xx, yy);
    end
    // Greedy column compression on queues.
    s = 0;
    forever begin
      mx = 0;
      for (int cc = 0; cc < 48; cc++) if (col[cc].size() > mx) mx = col[cc].size();
      if (mx <= 2) break;
      for (int cc = 0; cc < 49; cc++) nxt[cc].delete();
      carry_in.delete();
      for (int cc = 0; cc < 48; cc++) begin
        colq_t carry_out;
        k = comp_kind(mt, s, cc);
        while (k != CK_EXACT && col[cc].size() >= 4) begin
          a = col[cc].pop_front(); b = col[cc].pop_front();
          c = col[cc].pop_front(); dd = col[cc].pop_front();
          if (k == CK_POS) nxt[cc].push_back(a | b | c | dd);
          else             nxt[cc].push_back((a ^ b ^ c ^ dd) | (a & b & c & dd));
          carry_out.push_back((int'(a) + int'(b) + int'(c) + int'(dd)) >= 2);
        end
        while (col[cc].size() >= 3) begin
          a = col[cc].pop_front(); b = col[cc].pop_front(); c = col[cc].pop_front();
          nxt[cc].push_back(a ^ b ^ c);
          carry_out.push_back((a & b) | (a & c) | (b & c));
        end
        if (col[cc].size() == 2) begin
          a = col[cc].pop_front(); b = col[cc].pop_front();
          nxt[cc].push_back(a ^ b);
          carry_out.push_back(a & b);
        end
        while (col[cc].size() > 0) nxt[cc].push_back(col[cc].pop_front());
        foreach (carry_in[q]) nxt[cc].push_back(carry_in[q]);  // carries from column cc-1 sit on top
        carry_in = carry_out;
      end
      for (int cc = 0; cc < 48; cc++) col[cc] = nxt[cc];
      s++;
    end
    acc_a = '0; acc_b = '0;
    for (int cc = 0; cc < 48; cc++) begin
      if (col[cc].size() > 0) acc_a[cc] = col[cc][0];
      if (col[cc].size() > 1) acc_b[cc] = col[cc][1];
    end
    return acc_a + acc_b;
  endfunction

  mul_type_e types [NV] = '{MT_EXACT, MT_PMNI, MT_PMSI, MT_PMCI, MT_PMCSI,
                            MT_NMNI, MT_NMSI, MT_NMCI, MT_NMCSI};

  task automatic check_one();
    logic [47:0] exact, r;
    longint signed err;
    #1;
    exact = 48'(longint'(x) * longint'(y));
    checks++;
    if (p[0] !== exact) begin
      failures++;
      if (failures < 10) $display("FAIL exact x=%h y=%h got %h want %h", x, y, p[0], exact);
    end
    for (int v = 1; v < NV; v++) begin
      r = ref_mul(types[v], x, y);
      checks++;
      if (p[v] !== r) begin
        failures++;
        if (failures < 10) $display("FAIL %s x=%h y=%h got %h want %h", types[v].name(), x, y, p[v], r);
      end
      err = longint'(p[v]) - longint'(exact);
      if (p[v] != exact) ndiff[v]++;
      checks++;
      if (err > (longint'(1) << 30) || err < -(longint'(1) << 30)) begin
        failures++;
        if (failures < 10) $display("FAIL %s error too large x=%h y=%h err=%0d", types[v].name(), x, y, err);
      end
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ndiff[v]) ndiff[v] = 0;
    x = '0; y = '0; check_one();
    x = 24'hFFFFFF; y = 24'hFFFFFF; check_one();
    x = 24'h800000; y = 24'h800000; check_one();
    x = 24'h000001; y = 24'hFFFFFF; check_one();
    x = 24'hFFFFFF; y = 24'h000001; check_one();
    x = 24'hAAAAAA; y = 24'h555555; check_one();
    for (int n = 0; n < NVEC; n++) begin
      x = 24'($urandom);
      y = 24'($urandom);
      if (n % 2 == 0) begin x[23] = 1'b1; y[23] = 1'b1; end
      check_one();
    end
    for (int v = 1; v < NV; v++) begin
      checks++;
      if (ndiff[v] == 0) begin
        failures++;
        $display("FAIL %s never differs from the exact product", types[v].name());
      end
      $display("%-9s differs from exact in %0d of %0d products", types[v].name(), ndiff[v], NVEC + 6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
