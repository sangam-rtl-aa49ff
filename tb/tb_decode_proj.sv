// tb_decode_proj -- one chip's share of a decode-phase projection GEMM of a
// 7B-class model, run on the full-size chiplet (no parameter overridden).
//
// Workload: the gate projection of a decoder layer in the decode phase with a
// batch of 8, GEMM(M = 8, K = 4096, N = 11008). Projection weights are split
// by columns over the chips of the weight ranks, so with 128 such chips one
// chip owns N = 86 columns (11008 / 128, rounded down). Inside the chip the
// K dimension is split over the 32 banks, 8 rows per bank, round-robin: one
// pass covers K = 256, and K = 4096 takes 16 passes. Each pass loads the 32
// input tiles (8 batch rows x 8 K-values per bank) from the SRAM, streams the
// 86 weight columns from every bank through the systolic arrays, and adds the
// adder-tree results to the partial sums in the SRAM (the first pass writes
// them).
//
// Checks: every one of the 8 x 86 outputs against a reference that follows
// the hardware's association order (row chain in the array, pairwise tree
// over banks, pass-by-pass accumulation), rounded to FP16 at every step;
// that every pass streams at one bank read per cycle; and the total cycle
// count of the streaming phases against the ideal 16 x (86 + pipeline fill).
// Second part, batch 1: the LM head is a GEMV. It runs on the SIMD
// multipliers with K shortened to 1024 and N = 128 columns: in each pass bank
// b streams one row of the weight matrix (16 columns per read pair) and its
// vector register holds the matching x[k] in all lanes, so the adder trees
// reduce 32 values of k per pass. The outputs land in the SRAM in order and
// OP_MAX picks the next token (argmax), which is checked too.
// The bank side is a simple in-order read model with a fixed latency and no
// stalls. Prints TB_RESULT at the end; a watchdog ends a hung run.
module tb_decode_proj;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int NB    = NUM_BANKS;
  localparam int DIM   = SA_DIM;
  localparam int K     = 4096;
  localparam int NCOL  = 86;
  localparam int PASS  = K / (NB * DIM);
  localparam int RLAT  = 4;
  localparam int DST   = 12000;        // partial sums / result words
  localparam int FILL  = 40;           // allowed fill and drain per pass
  localparam int GK    = 1024;         // LM-head GEMV: K (shortened)
  localparam int GN    = 128;          // LM-head GEMV: columns (two max groups)
  localparam int VEC   = 4096;         // replicated x[k] words, 2 per k
  localparam int YDST  = 14000;        // GEMV result words

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

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (500000) @(posedge clk);
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

  // ---------------- DRAM bank model (in order, fixed latency) ----------------
  fp16_t stream_mem [128][NB][DIM];
  int    rd_ptr = 0, issued = 0, first_req = 0, last_req = 0;
  logic  [RLAT-1:0] pipe_v;
  int    pipe_i [RLAT];

  assign bank_rd_ready = 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      pipe_v <= '0;
    end else begin
      pipe_v <= {pipe_v[RLAT-2:0], bank_rd_req};
      for (int i = RLAT - 1; i > 0; i--) pipe_i[i] <= pipe_i[i-1];
      if (bank_rd_req) begin
        pipe_i[0] <= rd_ptr % 128;
        rd_ptr    <= rd_ptr + 1;
        if (issued == 0) first_req = cycle;
        last_req = cycle;
        issued++;
      end
    end
  end
  assign bank_rd_valid = pipe_v[RLAT-1];
  assign bank_rd_data  = stream_mem[pipe_i[RLAT-1]];

  // ---------------- helpers ----------------
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
    data = ext_rd_data;
  endtask

  task automatic run(op_e op, int bank, logic acc, int src, int dst, int len, output int cycles);
    int t0;
    @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.bank = 5'(bank); cmd.acc = acc;
    cmd.src = SRAM_AW'(src); cmd.dst = SRAM_AW'(dst); cmd.len = 16'(len);
    cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    t0 = cycle;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
    cycles = cycle - t0;
  endtask

  function automatic logic [16*DIM-1:0] pack(fp16_t v [DIM]);
    logic [16*DIM-1:0] w;
    for (int i = 0; i < DIM; i++) w[16*i +: 16] = v[i];
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
  fp16_t X [PASS][NB][DIM][DIM];   // activations: pass, bank, m, k
  fp16_t C [NCOL][DIM];            // reference result
  fp16_t xv [GK];                  // batch-1 activation vector
  fp16_t prod [GN][NB];            // per-pass products, column, bank
  fp16_t Y [GN];                   // reference GEMV result

  initial begin
    logic [16*DIM-1:0] word;
    fp16_t lane [NB];
    fp16_t acc;
    int    cyc, stream_cycles, gemv_cycles, load_cycles, wbase, best;
    fp16_t xw [DIM];
    fp16_t wv;

    cmd_valid = 0; cmd = '0;
    ext_rd_en = 0; ext_wr_en = 0; ext_addr = '0; ext_wr_data = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    for (int p = 0; p < PASS; p++)
      for (int b = 0; b < NB; b++)
        for (int m = 0; m < DIM; m++) begin
          for (int k = 0; k < DIM; k++) X[p][b][m][k] = rand_fp16(10, 15);
          ext_write((p * NB + b) * DIM + m, pack(X[p][b][m]));
        end

    stream_cycles = 0;
    for (int p = 0; p < PASS; p++) begin
      for (int b = 0; b < NB; b++) run(OP_LOAD_TILE, b, 0, (p * NB + b) * DIM, 0, 0, cyc);
      // this pass's weight slab, column by column, and its reference
      for (int n = 0; n < NCOL; n++) begin
        for (int b = 0; b < NB; b++)
          for (int k = 0; k < DIM; k++) stream_mem[(p * NCOL + n) % 128][b][k] = rand_fp16(10, 15);
        for (int m = 0; m < DIM; m++) begin
          for (int b = 0; b < NB; b++) begin
            acc = 16'h0000;
            for (int k = 0; k < DIM; k++) acc = ref_add(acc, ref_mul(X[p][b][m][k], stream_mem[(p * NCOL + n) % 128][b][k]));
            lane[b] = acc;
          end
          C[n][m] = (p == 0) ? tree_ref(lane) : ref_add(tree_ref(lane), C[n][m]);
        end
      end
      issued = 0;
      run(OP_GEMM, 0, p != 0, 0, DST, NCOL, cyc);
      stream_cycles += cyc;
      chk(issued == NCOL, $sformatf("pass %0d issued %0d reads", p, issued));
      chk(last_req - first_req == NCOL - 1, $sformatf("pass %0d reads not back to back", p));
    end

    for (int n = 0; n < NCOL; n++) begin
      ext_read(DST + n, word);
      for (int m = 0; m < DIM; m++)
        chk(word[16*m +: 16] == C[n][m],
            $sformatf("C[%0d][%0d] got %h exp %h", m, n, word[16*m +: 16], C[n][m]));
    end

    $display("decode projection slice: M=%0d K=%0d N=%0d, %0d passes, %0d streaming cycles (ideal %0d + fill)",
             DIM, K, NCOL, PASS, stream_cycles, PASS * NCOL);
    chk(stream_cycles <= PASS * (NCOL + FILL), "streaming phases slower than one read per cycle plus fill");

    // ---- batch 1: LM-head GEMV on the SIMD multipliers, then argmax ----
    // Bank b of pass p holds row k = NB*p + b of W, 16 columns per read pair;
    // its vector register holds x[k] in all 16 lanes. Tree j sums lane j over
    // the banks (32 values of k), passes accumulate, and output word j holds
    // columns 8j..8j+7, so y lies in the SRAM in order and OP_MAX can pick
    // the next token from it directly.
    for (int k = 0; k < GK; k++) begin
      xv[k] = rand_fp16(12, 15);
      for (int i = 0; i < DIM; i++) xw[i] = xv[k];
      ext_write(VEC + 2 * k, pack(xw));
      ext_write(VEC + 2 * k + 1, pack(xw));
    end
    wbase = PASS * NCOL;
    gemv_cycles = 0;
    load_cycles = 0;
    for (int p = 0; p < GK / NB; p++) begin
      for (int b = 0; b < NB; b++) begin
        run(OP_LOAD_VEC, b, 0, VEC + 2 * (NB * p + b), 0, 0, cyc);
        load_cycles += cyc;
      end
      for (int r = 0; r < GN / DIM; r++)
        for (int b = 0; b < NB; b++)
          for (int i = 0; i < DIM; i++) begin
            wv = rand_fp16(10, 15);
            stream_mem[(wbase + r) % 128][b][i] = wv;
            prod[r * DIM + i][b] = ref_mul(wv, xv[NB * p + b]);
          end
      for (int n = 0; n < GN; n++)
        Y[n] = (p == 0) ? tree_ref(prod[n]) : ref_add(tree_ref(prod[n]), Y[n]);
      wbase += GN / DIM;
      issued = 0;
      run(OP_GEMV, 0, p != 0, 0, YDST, GN / DIM, cyc);
      gemv_cycles += cyc;
      chk(issued == GN / DIM, $sformatf("GEMV pass %0d issued %0d reads", p, issued));
    end
    for (int w = 0; w < GN / DIM; w++) begin
      ext_read(YDST + w, word);
      for (int i = 0; i < DIM; i++)
        chk(word[16*i +: 16] == Y[DIM * w + i],
            $sformatf("y[%0d] got %h exp %h", DIM * w + i, word[16*i +: 16], Y[DIM * w + i]));
    end
    run(OP_MAX, 0, 0, YDST, 0, GN / MAX_INPUTS, cyc);
    best = 0;
    for (int n = 1; n < GN; n++) if (fp16_to_real(Y[n]) > fp16_to_real(Y[best])) best = n;
    chk(int'(max_idx) == best && max_val == Y[best],
        $sformatf("next token %0d (%h), expected %0d (%h)", max_idx, max_val, best, Y[best]));
    $display("LM-head GEMV slice: K=%0d N=%0d, %0d passes, %0d streaming + %0d vector-load cycles; next token %0d",
             GK, GN, GK / NB, gemv_cycles, load_cycles, max_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
