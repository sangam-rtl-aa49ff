// tb_pim_chiplet -- end-to-end test of one logic chiplet at its full size
// (32 banks, 8x8 arrays, 256 KiB SRAM; no parameter is overridden).
//
// The testbench plays the parts around the chiplet: the communication logic
// (it fills and reads the SRAM through the external port), the host-side
// command issuer, and the DRAM bank chiplets (an in-order all-bank read
// model with a fixed latency and random not-ready cycles). It runs a small
// inference-style program:
//   1. a flat GEMM C = X * W with M = 8, K = 2 * 32 * 8 (two passes over the
//      32 banks, each bank holding an 8-row K-slice) and NCOL output columns:
//      pass 0 loads the input tiles bank by bank and writes C, pass 1 loads
//      new tiles and accumulates into C through the SIMD adder;
//   2. a GEMV through the SIMD multipliers with a broadcast vector, then an
//      element-wise product in which only the last bank reaches the trees;
//   3. a broadcast tile load and a short GEMM (back to the arrays);
//   4. a max/argmax over 128 values and an exp over 64 values.
// Every SRAM result is compared with a reference built from the double-
// precision FP16 model in the same association order (array row chain,
// pairwise adder tree, accumulate). It also checks that an uninterrupted
// stream issues one bank read per cycle and counts the mechanisms exercised:
// stalls from the bank side, accumulation, broadcast loads, SA->MUL and
// MUL->SA mode switches, element-wise, max and exp passes, each counted only
// when every check of its step passed; one that never happened counts
// as a failure.
module tb_pim_chiplet;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int NB   = NUM_BANKS;
  localparam int DIM  = SA_DIM;
  localparam int NCOL = 24;       // weight columns per GEMM pass
  localparam int NV   = 8;        // bank reads in the GEMV (4 pairs)
  localparam int RLAT = 4;        // bank read latency of the model

  logic               clk = 0, rst_n = 0;
  logic               cmd_valid, cmd_ready, cmd_done;
  cmd_t               cmd;
  logic               bank_rd_req, bank_rd_ready, bank_rd_valid;
  fp16_t              bank_rd_data [NB][DIM];
  logic               ext_rd_en, ext_wr_en, ext_rd_valid;
  logic [SRAM_AW-1:0] ext_addr;
  logic [16*DIM-1:0]  ext_wr_data, ext_rd_data;
  fp16_t              max_val;
  logic [15:0]        max_idx;

  pim_chiplet dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n_stall = 0, n_acc = 0, n_bcast = 0, n_sa2mul = 0, n_mul2sa = 0;
  int n_ew = 0, n_max = 0, n_exp = 0, n_full_rate = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // read-issue accounting for the rate check
  int   issued = 0, cur_len = 0, first_req = -1, last_req = -1;
  logic streaming = 0;

  // ---------------- DRAM bank model ----------------
  // Columns the banks deliver, in order: stream_mem[0..wr_ptr-1]; a request
  // returns column rd_ptr RLAT cycles later.
  fp16_t stream_mem [256][NB][DIM];
  int    wr_ptr = 0, rd_ptr = 0;
  logic  stall_en = 0;
  logic  [RLAT-1:0] pipe_v;
  int    pipe_i [RLAT];

  always @(negedge clk) begin
    bank_rd_ready <= stall_en ? (($urandom % 4) != 0) : 1'b1;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      pipe_v <= '0;
    end else begin
      pipe_v <= {pipe_v[RLAT-2:0], bank_rd_req};
      for (int i = RLAT - 1; i > 0; i--) pipe_i[i] <= pipe_i[i-1];
      if (bank_rd_req) begin
        pipe_i[0] <= rd_ptr % 256;
        rd_ptr    <= rd_ptr + 1;
      end
      if (streaming && !bank_rd_ready && issued < cur_len) n_stall++;
    end
  end
  assign bank_rd_valid = pipe_v[RLAT-1];
  assign bank_rd_data  = stream_mem[pipe_i[RLAT-1]];

  task automatic push_col(fp16_t c [NB][DIM]);
    stream_mem[wr_ptr % 256] = c;
    wr_ptr++;
  endtask

  always @(posedge clk) if (bank_rd_req) begin
    if (issued == 0) first_req = cycle;
    last_req = cycle;
    issued++;
  end

  // ---------------- host-side helpers ----------------
  task automatic ext_write(int addr, logic [16*DIM-1:0] data);
    @(negedge clk);
    ext_wr_en = 1; ext_addr = SRAM_AW'(addr); ext_wr_data = data;
    @(negedge clk);
    ext_wr_en = 0;
  endtask

  task automatic ext_read(int addr, output logic [16*DIM-1:0] data);
    @(negedge clk);
    ext_rd_en = 1; ext_addr = SRAM_AW'(addr);
    @(negedge clk);
    ext_rd_en = 0;
    chk(ext_rd_valid, "ext_rd_valid");
    data = ext_rd_data;
  endtask

  task automatic run(op_e op, int bank, logic bcast, logic acc, int src, int dst, int len);
    int t0;
    @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.bank = 5'(bank); cmd.bcast = bcast; cmd.acc = acc;
    cmd.src = SRAM_AW'(src); cmd.dst = SRAM_AW'(dst); cmd.len = 16'(len);
    cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    issued = 0; cur_len = len;
    streaming = (op == OP_GEMM || op == OP_GEMV || op == OP_EWMUL);
    t0 = cycle;
    while (!cmd_done) begin
      @(negedge clk);
      if (cycle - t0 > 100000) begin chk(0, "command timeout"); break; end
    end
    streaming = 0;
    if (op == OP_GEMM || op == OP_GEMV || op == OP_EWMUL) chk(issued == len, $sformatf("issued %0d reads, expected %0d", issued, len));
  endtask

  function automatic logic [16*DIM-1:0] pack(fp16_t v [DIM]);
    logic [16*DIM-1:0] w;
    for (int i = 0; i < DIM; i++) w[16*i +: 16] = v[i];
    return w;
  endfunction

  function automatic logic [16*DIM-1:0] pack_at(fp16_t v [128], int off);
    logic [16*DIM-1:0] w;
    for (int i = 0; i < DIM; i++) w[16*i +: 16] = v[off + i];
    return w;
  endfunction

  function automatic fp16_t tree_ref(fp16_t v [NB]);
    fp16_t t [NB];
    int    n;
    t = v;
    n = NB;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) t[i] = ref_add(t[2*i], t[2*i+1]);
      n = n / 2;
    end
    return t[0];
  endfunction

  // ---------------- program ----------------
  fp16_t X [2][NB][DIM][DIM];     // input tiles: pass, bank, m, k
  fp16_t Wt [2][NCOL][NB][DIM];   // weight columns: pass, n, bank, k
  fp16_t C [NCOL][DIM];           // reference output
  fp16_t V [2*DIM];
  fp16_t G [NV][NB][DIM];
  fp16_t Y [NV][DIM];

  initial begin
    logic [16*DIM-1:0] word;
    fp16_t col [NB][DIM];
    fp16_t lane [NB];
    fp16_t vals [128];
    fp16_t e, acc;
    int    bi, f0;
    real   best;

    cmd_valid = 0; cmd = '0;
    ext_rd_en = 0; ext_wr_en = 0; ext_addr = '0; ext_wr_data = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // ---- data ----
    for (int p = 0; p < 2; p++)
      for (int b = 0; b < NB; b++)
        for (int m = 0; m < DIM; m++)
          for (int k = 0; k < DIM; k++) X[p][b][m][k] = rand_fp16(10, 15);
    for (int p = 0; p < 2; p++)
      for (int n = 0; n < NCOL; n++)
        for (int b = 0; b < NB; b++)
          for (int k = 0; k < DIM; k++) Wt[p][n][b][k] = rand_fp16(10, 15);

    // reference: per bank row chain, tree over banks, accumulate over passes
    for (int n = 0; n < NCOL; n++)
      for (int m = 0; m < DIM; m++) begin
        for (int p = 0; p < 2; p++) begin
          for (int b = 0; b < NB; b++) begin
            acc = 16'h0000;
            for (int k = 0; k < DIM; k++) acc = ref_add(acc, ref_mul(X[p][b][m][k], Wt[p][n][b][k]));
            lane[b] = acc;
          end
          e = tree_ref(lane);
          C[n][m] = (p == 0) ? e : ref_add(e, C[n][m]);
        end
      end

    // input tiles into SRAM: pass p, bank b at word (p*NB + b)*DIM
    for (int p = 0; p < 2; p++)
      for (int b = 0; b < NB; b++)
        for (int m = 0; m < DIM; m++) ext_write((p * NB + b) * DIM + m, pack(X[p][b][m]));

    // ---- GEMM pass 0: per-bank tile loads, full-rate stream ----
    for (int b = 0; b < NB; b++) run(OP_LOAD_TILE, b, 0, 0, b * DIM, 0, 0);
    for (int n = 0; n < NCOL; n++) begin
      for (int b = 0; b < NB; b++) col[b] = Wt[0][n][b];
      push_col(col);
    end
    stall_en = 0;
    run(OP_GEMM, 0, 0, 0, 0, 4096, NCOL);
    chk(last_req - first_req == NCOL - 1, $sformatf("GEMM reads spread over %0d cycles, expected %0d", last_req - first_req + 1, NCOL));
    if (last_req - first_req == NCOL - 1) n_full_rate++;

    // ---- GEMM pass 1: accumulate, with bank-side stalls ----
    f0 = failures;
    for (int b = 0; b < NB; b++) run(OP_LOAD_TILE, b, 0, 0, (NB + b) * DIM, 0, 0);
    for (int n = 0; n < NCOL; n++) begin
      for (int b = 0; b < NB; b++) col[b] = Wt[1][n][b];
      push_col(col);
    end
    stall_en = 1;
    run(OP_GEMM, 0, 0, 1, 0, 4096, NCOL);
    stall_en = 0;
    for (int n = 0; n < NCOL; n++) begin
      ext_read(4096 + n, word);
      for (int m = 0; m < DIM; m++)
        chk(word[16*m +: 16] == C[n][m], $sformatf("C[%0d][%0d] got %h exp %h", m, n, word[16*m +: 16], C[n][m]));
    end

    // counted only when every check of the step above passed
    if (failures == f0) begin n_acc++; end

    // ---- GEMV through the SIMD multipliers, broadcast vector ----
    f0 = failures;
    for (int i = 0; i < 2 * DIM; i++) V[i] = rand_fp16(10, 16);
    for (int i = 0; i < 2 * DIM; i++) vals[i] = V[i];
    ext_write(6144, pack_at(vals, 0));
    ext_write(6145, pack_at(vals, DIM));
    run(OP_LOAD_VEC, 0, 1, 0, 6144, 0, 0);
    for (int r = 0; r < NV; r++) begin
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < DIM; i++) G[r][b][i] = rand_fp16(10, 16);
      push_col(G[r]);
    end
    for (int r = 0; r < NV; r++)
      for (int i = 0; i < DIM; i++) begin
        for (int b = 0; b < NB; b++) lane[b] = ref_mul(G[r][b][i], V[(r % 2) * DIM + i]);
        Y[r][i] = tree_ref(lane);
      end
    stall_en = 1;
    run(OP_GEMV, 0, 0, 0, 0, 7000, NV);
    stall_en = 0;
    for (int r = 0; r < NV; r++) begin
      ext_read(7000 + r, word);
      for (int i = 0; i < DIM; i++)
        chk(word[16*i +: 16] == Y[r][i], $sformatf("GEMV beat %0d lane %0d got %h exp %h", r, i, word[16*i +: 16], Y[r][i]));
    end

    // counted only when every check of the step above passed
    if (failures == f0) begin n_bcast++; n_sa2mul++; end

    // ---- element-wise product: only the last bank reaches the trees ----
    f0 = failures;
    for (int r = 0; r < 4; r++) begin
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < DIM; i++) G[r][b][i] = rand_fp16(10, 16);
      push_col(G[r]);
    end
    run(OP_EWMUL, NB - 1, 0, 0, 0, 7050, 4);
    for (int r = 0; r < 4; r++) begin
      ext_read(7050 + r, word);
      for (int i = 0; i < DIM; i++) begin
        for (int b = 0; b < NB; b++) lane[b] = 16'h0000;
        lane[NB-1] = ref_mul(G[r][NB-1][i], V[(r % 2) * DIM + i]);
        e = tree_ref(lane);
        chk(word[16*i +: 16] == e, $sformatf("EWMUL beat %0d lane %0d got %h exp %h", r, i, word[16*i +: 16], e));
      end
    end

    // counted only when every check of the step above passed
    if (failures == f0) begin n_ew++; end

    // ---- back to the systolic arrays: broadcast tile, short GEMM ----
    f0 = failures;
    run(OP_LOAD_TILE, 0, 1, 0, 0, 0, 0);
    for (int n = 0; n < 4; n++) begin
      for (int b = 0; b < NB; b++) col[b] = Wt[0][n][b];
      push_col(col);
    end
    run(OP_GEMM, 0, 0, 0, 0, 7100, 4);
    for (int n = 0; n < 4; n++) begin
      ext_read(7100 + n, word);
      for (int m = 0; m < DIM; m++) begin
        for (int b = 0; b < NB; b++) begin
          acc = 16'h0000;
          for (int k = 0; k < DIM; k++) acc = ref_add(acc, ref_mul(X[0][0][m][k], Wt[0][n][b][k]));
          lane[b] = acc;
        end
        e = tree_ref(lane);
        chk(word[16*m +: 16] == e, $sformatf("broadcast GEMM C[%0d][%0d]", m, n));
      end
    end

    // counted only when every check of the step above passed
    if (failures == f0) begin n_bcast++; n_mul2sa++; end

    // ---- max / argmax over two groups of 64 ----
    f0 = failures;
    for (int i = 0; i < 128; i++) vals[i] = rand_fp16(5, 25);
    for (int w = 0; w < 16; w++) ext_write(8192 + w, pack_at(vals, w * DIM));
    run(OP_MAX, 0, 0, 0, 8192, 0, 2);
    bi = 0; best = fp16_to_real(vals[0]);
    for (int i = 1; i < 128; i++) if (fp16_to_real(vals[i]) > best) begin best = fp16_to_real(vals[i]); bi = i; end
    chk(max_val == vals[bi], $sformatf("max %h exp %h", max_val, vals[bi]));
    chk(int'(max_idx) == bi, $sformatf("argmax %0d exp %0d", max_idx, bi));

    // counted only when every check of the step above passed
    if (failures == f0) begin n_max++; end

    // ---- exp over two groups of 32 (softmax-style inputs <= 0) ----
    f0 = failures;
    for (int i = 0; i < 64; i++) begin
      vals[i] = rand_fp16(8, 18);
      vals[i][15] = 1'b1;
    end
    for (int w = 0; w < 8; w++) ext_write(8448 + w, pack_at(vals, w * DIM));
    run(OP_EXP, 0, 0, 0, 8448, 8704, 2);
    for (int w = 0; w < 8; w++) begin
      ext_read(8704 + w, word);
      for (int i = 0; i < DIM; i++) begin
        real er, yr, ulp;
        er  = $exp(fp16_to_real(vals[w*DIM + i]));
        yr  = fp16_to_real(word[16*i +: 16]);
        ulp = (er < 6.2e-5) ? 6.2e-5 : fp16_to_real(real_to_fp16(er)) / 1024.0;
        chk((yr - er <= 2.0 * ulp) && (er - yr <= 2.0 * ulp),
            $sformatf("exp(%h) got %h", vals[w*DIM + i], word[16*i +: 16]));
      end
    end

    // counted only when every check of the step above passed
    if (failures == f0) begin n_exp++; end

    // ---- mechanisms ----
    $display("mechanisms: stall=%0d acc=%0d bcast=%0d sa2mul=%0d mul2sa=%0d ewmul=%0d max=%0d exp=%0d full_rate=%0d",
             n_stall, n_acc, n_bcast, n_sa2mul, n_mul2sa, n_ew, n_max, n_exp, n_full_rate);
    chk(n_stall > 0,     "no bank-side stall happened");
    chk(n_acc > 0,       "no accumulation happened");
    chk(n_bcast > 0,     "no broadcast load happened");
    chk(n_sa2mul > 0,    "no SA->MUL mode switch happened");
    chk(n_mul2sa > 0,    "no MUL->SA mode switch happened");
    chk(n_ew > 0,        "no element-wise pass happened");
    chk(n_max > 0,       "no max pass happened");
    chk(n_exp > 0,       "no exp pass happened");
    chk(n_full_rate > 0, "no full-rate stream happened");
    chk(rd_ptr == wr_ptr, "bank model has undelivered columns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
