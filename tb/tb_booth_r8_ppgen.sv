// tb_booth_r8_ppgen: checks the radix-8 Booth partial-product matrix.
// For random and corner-case operands the weighted sum of all matrix bits,
// taken modulo 2^48, must equal x*y (computed here with a plain multiply),
// no bit may be set where approx_pkg::pp_present() says the matrix is
// empty, and each Booth row, read back from its 26 magnitude bits, must
// equal the multiple that the recoded digit calls for.
module tb_booth_r8_ppgen;
  import approx_pkg::*;

  logic [MANT_W-1:0]               x, y;
  logic [NUM_ROWS-1:0][PROD_W-1:0] rows;
  int checks = 0, failures = 0;

  booth_r8_ppgen dut (.x(x), .y(y), .rows(rows));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    logic [PROD_W-1:0] total;
    logic [PROD_W-1:0] want;
    #1;
    total = '0;
    for (int r = 0; r < NUM_ROWS; r++) total += rows[r];
    want = 48'(longint'(x) * longint'(y));
    checks++;
    if (total !== want) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h y=%h sum=%h want=%h", x, y, total, want);
    end
    for (int r = 0; r < NUM_ROWS; r++)
      for (int c = 0; c < PROD_W; c++)
        if (!pp_present(r, c) && rows[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL bit in empty position r=%0d c=%0d", r, c);
        end
    for (int i = 0; i < 8; i++) begin
      int d;
      longint mag, got;
      d = -4*int'(y[3*i+2]) + 2*int'(y[3*i+1]) + int'(y[3*i]) + ((i == 0) ? 0 : int'(y[3*i-1]));
      mag = longint'((d < 0) ? -d : d) * longint'(x);
      got = 0;
      for (int j = 0; j < 26; j++) got |= longint'(rows[i][3*i+j]) << j;
      if (d < 0) got = (~got) & ((longint'(1) << 26) - 1);
      checks++;
      if (got != mag) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d digit %0d got %0d want %0d", i, d, got, mag);
      end
    end
  endtask

  initial begin
    x = 24'hFFFFFF; y = 24'hFFFFFF; check();
    x = 24'h800000; y = 24'hFFFFFF; check();
    x = 24'hFFFFFF; y = 24'h000000; check();
    x = 24'h123456; y = 24'hE38E39; check();
    for (int n = 0; n < 5000; n++) begin
      x = 24'($urandom); y = 24'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
