// tb_cimu -- self-checking test of the compute-in-memory unit.
//
// Runs the unit at a reduced size (96 input rows, 32 columns, 4 datapaths) so
// that every result can be compared with an integer reference computed here:
// the matrix is loaded through the matrix window and read back, input vectors
// are packed into words, and the results are compared with y = A x for
//   AND mode (unsigned x, 2's-complement A) at several Bx/Ba,
//   XNOR mode (+1/-1 bits) with zero-valued inputs masked by the sparsity logic,
//   ABN (binarized) output, ReLU, row/column bank gating, and
//   a convolution shift that reuses part of the previous input vector.
// With the ADC full scale at 256 capacitors and at most 96 active rows the
// conversion is exact, so the results must match bit for bit. The cycle count
// of each multiplication is checked against the per-phase counts.
module tb_cimu;
  import cimu_pkg::*;
  localparam int NR = 96, NC = 32, RF = NR / 8, WPR = NC * 3 / 32, NDP = NC / 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  apb_req_t apb; apb_rsp_t prsp;
  bus_req_t breq; bus_rsp_t brsp;
  logic irq;

  cimu #(.N_ROWS(NR), .N_COLS(NC)) dut (.clk, .rst_n, .apb_req(apb), .apb_rsp(prsp),
    .bus_req(breq), .bus_rsp(brsp), .irq_done(irq));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb_wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); apb = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b1, paddr: a, pwdata: d};
    @(negedge clk); apb.penable = 1'b1;
    @(negedge clk); apb = '0;
  endtask
  task automatic apb_rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); apb = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b0, paddr: a, pwdata: '0};
    @(negedge clk); apb.penable = 1'b1; #1 d = prsp.prdata;
    @(negedge clk); apb = '0;
  endtask
  task automatic bus_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); breq = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d, be: 4'hF};
    #1; while (!brsp.ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 breq.valid = 1'b0;
  endtask
  task automatic bus_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); breq = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0, be: 4'hF};
    #1; while (!brsp.ready) begin @(negedge clk); #1; end
    d = brsp.rdata;
    @(posedge clk); #1 breq.valid = 1'b0;
  endtask

  // ---------------- reference state ----------------
  bit          w [NR][NC];   // matrix bits
  logic [7:0]  x [NR];       // input elements (raw codes)
  bit          rot_keep [NR];

  task automatic load_matrix();
    logic [31:0] d;
    for (int r = 0; r < NR / 3; r++)
      for (int k = 0; k < WPR; k++) begin
        for (int i = 0; i < 32; i++) begin
          int b; b = 32 * k + i;
          d[i] = w[3*r + b / NC][b % NC];
        end
        bus_wr(32'h4_0000 + 4 * (r * WPR + k), d);
      end
    // read back two rows
    for (int r = 0; r < NR / 3; r += 17)
      for (int k = 0; k < WPR; k++) begin
        logic [31:0] e;
        for (int i = 0; i < 32; i++) begin
          int b; b = 32 * k + i;
          e[i] = w[3*r + b / NC][b % NC];
        end
        bus_rd(32'h4_0000 + 4 * (r * WPR + k), d);
        check(d == e, $sformatf("matrix readback row %0d word %0d", r, k));
      end
  endtask

  // pack elements first..first+cnt-1 of list[] with bx bits each
  task automatic send_elems(input logic [7:0] list [$], input int bx);
    int per, i;
    logic [31:0] d;
    per = 8 / bx;
    i = 0;
    while (i < list.size()) begin
      d = '0;
      for (int by = 0; by < 4; by++)
        for (int e = 0; e < per; e++)
          if (i < list.size()) begin
            d[by*8 +: 8] |= (list[i] & 8'((1 << bx) - 1)) << (e * bx);
            i++;
          end
      bus_wr(32'h0, d);
    end
  endtask

  function automatic int xval(input logic [7:0] c, input int bx, input bit andm,
                              input bit sp, input int n, input int nel);
    int v;
    if (n >= nel) return 0;
    if (sp && c == 0) return 0;
    v = 0;
    for (int b = 0; b < bx; b++)
      v += andm ? (int'(c[b]) << b) : ((2 * int'(c[b]) - 1) << b);
    return v;
  endfunction

  function automatic int aval(input int n, input int col0, input int ba, input bit andm);
    int v;
    v = 0;
    for (int k = 0; k < ba; k++) begin
      if (andm) v += (k == ba - 1 && ba > 1) ? -(int'(w[n][col0+k]) << k) : (int'(w[n][col0+k]) << k);
      else v += (2 * int'(w[n][col0+k]) - 1) << k;
    end
    return v;
  endfunction

  int n_and = 0, n_xnor = 0, n_abn = 0, n_shift = 0, n_gate = 0, n_relu = 0, n16 = 0, n32 = 0;

  // configure, start, wait and compare every result
  task automatic run(input bit andm, input int bx, input int ba, input int nel, input bit sp,
                     input bit relu, input logic [3:0] rbe, input logic [3:0] cbe, input string tag);
    logic [31:0] d, st;
    int per, m, nwords;
    bit o16;
    int rows_on;
    apb_wr(12'h004, {12'd0, cbe, rbe, 4'(ba), 4'(bx), sp, relu, 1'b0, andm});
    apb_wr(12'h008, nel);
    apb_wr(12'h00C, 256);
    apb_wr(12'h010, andm ? 32'd0 : {8'd0, 8'd128, 16'd0});
    for (int c = 0; c < NC; c++) begin
      int k; logic signed [7:0] sc;
      k  = (c % 8) % ba;
      sc = andm ? ((k == ba - 1 && ba > 1) ? -8'sd1 : 8'sd1) : 8'sd2;
      apb_wr(12'h400 + 4 * c, {5'd0, 6'd0, 4'(k), sc, 9'd0});
    end
    apb_wr(12'h000, 32'h1);
    @(posedge clk);
    while (!irq) @(posedge clk);
    apb_rd(12'h018, d);
    check(d >= 32'(bx * 84) && d <= 32'(bx * 90), $sformatf("%s cycles %0d for Bx=%0d", tag, d, bx));
    apb_rd(12'h000, st);
    check(st[1] == 1'b1 && st[0] == 1'b0, {tag, " status done"});
    per = 8 / ba; m = NDP * per;
    o16 = (bx + ba) <= 5;
    if (o16) n16++; else n32++;
    nwords = o16 ? (m + 1) / 2 : m;
    for (int wd = 0; wd < nwords; wd++) begin
      bus_rd(32'h8_0000 + 4 * wd, d);
      for (int h = 0; h < (o16 ? 2 : 1); h++) begin
        int r, col0, y;
        r = o16 ? 2 * wd + h : wd;
        if (r < m) begin
          col0 = (r / per) * 8 + (r % per) * ba;
          y = 0;
          for (int n = 0; n < NR; n++)
            if (rbe[n / (NR / 4)])
              y += xval(x[n], bx, andm, sp, n, nel) * aval(n, col0, ba, andm);
          if (!cbe[col0 / (NC / 4)]) y = 0;
          if (relu && y < 0) y = 0;
          if (o16) check($signed(d[16*h +: 16]) == y, $sformatf("%s y[%0d] = %0d expected %0d", tag, r, $signed(d[16*h +: 16]), y));
          else check($signed(d) == y, $sformatf("%s y[%0d] = %0d expected %0d", tag, r, $signed(d), y));
        end
      end
    end
  endtask

  task automatic new_vector(input int bx, input int nel, input bit sp, input bit andm);
    logic [7:0] q [$];
    int u;
    u = 0;
    for (int n = 0; n < NR; n++) begin
      x[n] = 8'($urandom_range(0, (1 << bx) - 1));
      if (n < nel && !(sp && x[n] == 0)) u++;
    end
    // keep the number of participating rows even in XNOR mode (offset of U/2)
    if (!andm && (u % 2) == 1)
      for (int n = 0; n < nel; n++)
        if (x[n] != 0) begin x[n] = 0; break; end
    for (int n = 0; n < NR; n++) q.push_back(x[n]);
    apb_wr(12'h004, {24'd0, 4'(bx), 4'd0});
    apb_wr(12'h000, 32'h8);          // restart filling
    send_elems(q, bx);
    apb_wr(12'h000, 32'h2);          // swap banks
  endtask

  initial begin
    logic [31:0] d;
    apb = '0; breq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NR; n++) for (int c = 0; c < NC; c++) w[n][c] = bit'($urandom_range(0, 1));
    load_matrix();

    // AND mode, several precisions
    new_vector(2, 80, 0, 1);  run(1, 2, 2, 80, 0, 0, 4'hF, 4'hF, "and2x2"); n_and++;
    new_vector(4, 40, 0, 1);  run(1, 4, 4, 40, 0, 0, 4'hF, 4'hF, "and4x4"); n_and++;
    new_vector(3, 96, 0, 1);  run(1, 3, 3, 96, 0, 1, 4'hF, 4'hF, "and3x3relu"); n_and++; n_relu++;
    new_vector(1, 96, 0, 1);  run(1, 1, 8, 96, 0, 0, 4'hF, 4'hF, "and1x8"); n_and++;
    // XNOR with sparsity (zero codes masked)
    new_vector(2, 90, 1, 0);  run(0, 2, 1, 90, 1, 0, 4'hF, 4'hF, "xnor2x1sp"); n_xnor++;
    new_vector(4, 64, 1, 0);  run(0, 4, 2, 64, 1, 0, 4'hF, 4'hF, "xnor4x2sp"); n_xnor++;
    // bank gating
    new_vector(1, 96, 0, 1);  run(1, 1, 1, 96, 0, 0, 4'b0011, 4'b1110, "gated"); n_gate++;

    // convolution shift: drop 4 entries per register file, load 4 new ones each
    begin
      logic [7:0] old [NR];
      logic [7:0] q [$];
      new_vector(2, 96, 0, 1);
      run(1, 2, 1, 96, 0, 0, 4'hF, 4'hF, "preshift");
      for (int n = 0; n < NR; n++) old[n] = x[n];
      apb_wr(12'h014, 4);
      apb_wr(12'h000, 32'h4);       // shift into the fill bank
      for (int k = 0; k < 8; k++)
        for (int j = 0; j < RF; j++)
          if (j < RF - 4) x[k*RF + j] = old[k*RF + j + 4];
          else begin x[k*RF + j] = 8'($urandom_range(0, 3)); q.push_back(x[k*RF + j]); end
      bus_rd(32'h0, d);
      check(d == 0, "element count after shift");
      send_elems(q, 2);
      bus_rd(32'h0, d);
      check(d == 32, $sformatf("element count %0d after tail load", d));
      apb_wr(12'h000, 32'h2);
      run(1, 2, 1, 96, 0, 0, 4'hF, 4'hF, "shifted"); n_shift++;
    end

    // ABN output: comparator against per-column DAC codes
    begin
      int dac [NC];
      new_vector(1, 96, 0, 1);
      apb_wr(12'h004, {12'd0, 4'hF, 4'hF, 4'd1, 4'd1, 1'b0, 1'b0, 1'b1, 1'b1});
      apb_wr(12'h008, 96);
      apb_wr(12'h00C, 256);
      for (int c = 0; c < NC; c++) begin
        dac[c] = $urandom_range(8, 24);
        apb_wr(12'h400 + 4 * c, {5'd0, 6'(dac[c]), 4'd0, 8'sd1, 9'd0});
      end
      apb_wr(12'h000, 32'h1);
      @(posedge clk);
      while (!irq) @(posedge clk);
      bus_rd(32'h8_0000, d);
      for (int c = 0; c < NC; c++) begin
        int cnt;
        cnt = 0;
        for (int n = 0; n < NR; n++) cnt += int'(x[n][0] & w[n][c]);
        check(d[c] == (cnt * 64 > dac[c] * NR), $sformatf("abn col %0d count %0d dac %0d", c, cnt, dac[c]));
      end
      n_abn++;
    end

    check(n_and > 0 && n_xnor > 0 && n_abn > 0 && n_shift > 0 && n_gate > 0 && n_relu > 0 && n16 > 0 && n32 > 0,
          "every mode exercised");
    $display("modes: and=%0d xnor=%0d abn=%0d shift=%0d gate=%0d relu=%0d out16=%0d out32=%0d",
             n_and, n_xnor, n_abn, n_shift, n_gate, n_relu, n16, n32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
