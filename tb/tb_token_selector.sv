// tb_token_selector: several selection jobs on random tokens. Per token the
// testbench chooses head scores and weights, works out the keep decision from
// the weighted scores (only clear-cut cases are generated), and builds the
// expected dense output: class token, kept tokens in order, earlier package
// tokens, then the plain average of the pruned tokens (within one LSB).
// It checks n_out, n_kept and every written word, including a job where no
// token is pruned (no package token) and one where all are pruned, and
// average jobs, whose single output row is the mean of every input row.
module tb_token_selector;
  localparam int H = 2, N_MAX = 16, D_MAX = 64, TI = 16;
  localparam int RW = D_MAX / TI, AW = 6, NW = 5, WW = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done, avg_all = 0;
  logic [NW-1:0] n_tok = 0, n_pkg_in = 0, n_out, n_kept;
  logic [WW-1:0] d_words = 0;
  logic [7:0] thr = 128;
  logic sc_we = 0;
  logic [NW-2:0] sc_addr = 0;
  logic [3*H*8-1:0] sc_wdata = 0;
  logic [AW-1:0] x_addr, o_addr;
  logic [TI*8-1:0] x_data, o_wdata;
  logic o_we;
  int checks = 0, failures = 0;

  logic [TI*8-1:0] xmem [N_MAX*RW];
  logic [TI*8-1:0] omem [N_MAX*RW];
  bit keep_ref [N_MAX];

  token_selector #(.H(H), .N_MAX(N_MAX), .D_MAX(D_MAX), .TI(TI)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) x_data <= xmem[x_addr];
  always_ff @(posedge clk) if (o_we) omem[o_addr] <= o_wdata;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic job(input int nt, input int npk, input int dw, input int mode);
    // mode 0: random, 1: keep all, 2: prune all, 3: average job (mean of all rows)
    int exp_rows [N_MAX][D_MAX];
    int acc [D_MAX];
    int ne, nk, np;
    for (int t = 0; t < nt; t++) for (int w = 0; w < RW; w++) xmem[t*RW+w] = {$urandom, $urandom, $urandom, $urandom};
    for (int t = 0; t < nt; t++) begin
      bit kp;
      logic [7:0] sk0, sk1, a0, a1;
      kp = (mode == 1) ? 1 : (mode == 2) ? 0 : $urandom_range(0, 1);
      // head 0 votes with weight a0, head 1 against with a smaller weight
      a0 = 8'($urandom_range(60, 127)); a1 = 8'($urandom_range(0, 30));
      sk0 = kp ? 8'd120 : 8'd8;  sk1 = kp ? 8'd8 : 8'd120;
      keep_ref[t] = kp;
      sc_we = 1; sc_addr = (NW-1)'(t);
      sc_wdata = {a1, a0, 8'(128 - sk1), 8'(128 - sk0), sk1, sk0};
      @(posedge clk); #1;
    end
    sc_we = 0;
    ne = 0; nk = 0; np = 0;
    foreach (acc[c]) acc[c] = 0;
    for (int t = 0; t < nt; t++) begin
      bit k;
      k = (mode != 3) && (keep_ref[t] || t == 0 || t >= nt - npk);
      if (k) begin
        for (int c = 0; c < dw*TI; c++) exp_rows[ne][c] = $signed(xmem[t*RW + c/TI][8*(c%TI) +: 8]);
        ne++; nk++;
      end else begin
        for (int c = 0; c < dw*TI; c++) acc[c] += $signed(xmem[t*RW + c/TI][8*(c%TI) +: 8]);
        np++;
      end
    end
    if (np > 0) begin
      for (int c = 0; c < dw*TI; c++) exp_rows[ne][c] = int'($floor(real'(acc[c]) / np));
      ne++;
    end
    n_tok = NW'(nt); n_pkg_in = NW'(npk); d_words = WW'(dw); avg_all = (mode == 3);
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    checks += 2;
    if (n_out != NW'(ne)) begin failures++; $display("n_out %0d exp %0d", n_out, ne); end
    if (n_kept != NW'(nk)) begin failures++; $display("n_kept %0d exp %0d", n_kept, nk); end
    for (int r = 0; r < ne; r++)
      for (int c = 0; c < dw*TI; c++) begin
        int hw, tol;
        hw = $signed(omem[r*RW + c/TI][8*(c%TI) +: 8]);
        tol = (np > 0 && r == ne - 1) ? 1 : 0;
        checks++;
        if (hw - exp_rows[r][c] > tol || exp_rows[r][c] - hw > tol) begin
          failures++; if (failures < 10) $display("row %0d col %0d hw %0d exp %0d", r, c, hw, exp_rows[r][c]);
        end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; #1;
    job(10, 0, 4, 0);
    job(16, 2, 4, 0);
    job(7, 1, 2, 1);
    job(9, 0, 3, 2);
    job(16, 1, 4, 3);
    job(5, 0, 2, 3);
    for (int r = 0; r < 5; r++) job($urandom_range(2, 16), $urandom_range(0, 1), $urandom_range(1, 4), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
