// pim_chiplet -- PIM logic of one center-stripe logic chiplet (one DRAM chip).
//
// The logic chiplet sits beside the DRAM bank chiplets on an interposer and
// sees the 128-bit row-buffer interface of every one of the chip's 32 banks.
// This module is its compute part:
//   * 32 bank_pim units (8x8 FP16 systolic array + 16-lane SIMD multiplier
//     per bank), all driven in lock-step by one all-bank read stream;
//   * eight 32-to-1 adder trees; tree j adds output lane j of all banks, which
//     reduces the K-slices the banks hold (row-wise bank partitioning);
//   * an 8-lane SIMD FP16 adder that adds the tree outputs to partial sums
//     read back from the SRAM, and the 256 KiB SRAM scratchpad;
//   * a 64-to-1 max tree (argmax / softmax maximum) and a 32-lane exp unit;
//   * a command sequencer that runs the units.
// The units, their sizes and how they connect are the paper's. The sequencer,
// its command set (sangam_pkg::cmd_t) and all port protocols are this
// design's, because the paper gives none. The DRAM banks, the conventional
// DDR5 center-stripe logic (column decode, bank control) and the
// communication logic to other chiplets are outside this module: their
// signals are ports.
//
// Commands (one at a time; cmd_ready is high in idle, cmd_done pulses at the
// end):
//   OP_LOAD_TILE  SRAM words src..src+7 become rows 0..7 of the input tile of
//                 bank 'bank' (or of all banks when bcast).
//   OP_LOAD_VEC   SRAM words src, src+1 become the 16-value multiplier vector.
//   OP_GEMM       len all-bank reads stream weight columns through the
//                 systolic arrays; result beat j (8 FP16 = C[0..7][n]) is
//                 written to SRAM[dst+j], added to the old word when acc.
//   OP_GEMV       as OP_GEMM through the SIMD multipliers (len even): read pair
//                 p yields beats 2p (lanes 0-7) and 2p+1 (lanes 8-15).
//   OP_EWMUL      as OP_GEMV, but the adder trees see only bank 'bank' (the
//                 other banks' lanes are replaced by +0), so the result is
//                 the element-wise product of that bank's reads and its
//                 vector, for element-wise kernels such as activations.
//   OP_MAX        max and argmax over len groups of 8 words from src; the
//                 result appears on max_val / max_idx (index counts FP16
//                 values from src).
//   OP_EXP        e^x of len groups of 4 words from src, written from dst.
// Bank reads: bank_rd_req asks for the next column of every bank (the DRAM
// side keeps the column address) and is held back while bank_rd_ready is low,
// e.g. during activation or refresh; data returns on bank_rd_valid, in order,
// after any latency. The external port (from the communication logic) reads
// and writes the SRAM while the sequencer is idle; read data follows a cycle
// later.
//
// Rate: GEMM and GEMV sustain one bank read per cycle, i.e. one 128-bit
// column per bank per tCCD at the paper's 400 MHz.
module pim_chiplet
  import sangam_pkg::*;
#(
  parameter int unsigned NB    = NUM_BANKS,
  parameter int unsigned DIM   = SA_DIM,
  parameter int unsigned DEPTH = SRAM_WORDS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command interface
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_t                 cmd,
  output logic                 cmd_done,
  // all-bank read stream from the DRAM bank chiplets
  output logic                 bank_rd_req,
  input  logic                 bank_rd_ready,
  input  logic                 bank_rd_valid,
  input  fp16_t                bank_rd_data [NB][DIM],
  // scratchpad access for the communication logic
  input  logic                 ext_rd_en,
  input  logic                 ext_wr_en,
  input  logic [SRAM_AW-1:0]   ext_addr,
  input  logic [16*DIM-1:0]    ext_wr_data,
  output logic                 ext_rd_valid,
  output logic [16*DIM-1:0]    ext_rd_data,
  // result of OP_MAX
  output fp16_t                max_val,
  output logic [15:0]          max_idx
);
  localparam int unsigned W     = 16 * DIM;          // SRAM word, bits
  localparam int unsigned NMAX  = MAX_INPUTS;        // values per max group
  localparam int unsigned NEXP  = EXP_LANES;         // values per exp group
  localparam int unsigned MAXW  = NMAX / DIM;        // words per max group
  localparam int unsigned EXPW  = NEXP / DIM;        // words per exp group
  localparam int unsigned AW    = SRAM_AW;

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_STREAM, S_VRD, S_VOP, S_VWAIT, S_VWR, S_DONE
  } state_e;

  state_e      state_q;
  cmd_t        cmd_q;
  logic [15:0] rcnt_q;     // reads issued (bank or SRAM)
  logic [15:0] dcnt_q;     // SRAM read data received / beats produced
  logic [15:0] wcnt_q;     // results written
  logic [15:0] grp_q;      // MAX / EXP group
  logic        mode_q;     // bank_pim mode: 1 = SIMD multiplier

  // ---------------- SRAM ----------------
  logic          sram_rd_en, sram_wr_en;
  logic [AW-1:0] sram_rd_addr, sram_wr_addr;
  logic [W-1:0]  sram_rd_data, sram_wr_data;
  logic          sram_rd_pend_q;   // SRAM data valid this cycle (sequencer)

  scratchpad_sram #(.WIDTH(W), .DEPTH(DEPTH)) u_sram (
    .clk     (clk),
    .rd_en   (sram_rd_en),
    .rd_addr (sram_rd_addr),
    .rd_data (sram_rd_data),
    .wr_en   (sram_wr_en),
    .wr_addr (sram_wr_addr),
    .wr_data (sram_wr_data)
  );

  fp16_t rd_vec [DIM];             // SRAM read word as FP16 lanes
  for (genvar i = 0; i < DIM; i++) begin : g_rdvec
    assign rd_vec[i] = sram_rd_data[16*i +: 16];
  end

  // ---------------- bank units ----------------
  logic                   tile_load, vec_load;
  logic [$clog2(DIM)-1:0] ld_row_q;
  logic                   ld_v_q;
  logic [NB-1:0]          bank_sel;
  logic [NB-1:0]          bk_valid, bk_busy;
  fp16_t                  bk_out [NB][DIM];
  logic                   bank_clr;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    bank_pim #(.DIM(DIM), .LANES(2 * DIM)) u_bank (
      .clk       (clk),
      .rst_n     (rst_n),
      .mode      (mode_q),
      .clr       (bank_clr),
      .rd_valid  (bank_rd_valid),
      .rd_data   (bank_rd_data[b]),
      .tile_load (tile_load && bank_sel[b]),
      .tile_row  (ld_row_q),
      .tile_data (rd_vec),
      .vec_load  (vec_load && bank_sel[b]),
      .vec_half  (ld_row_q[0]),
      .vec_data  (rd_vec),
      .out_valid (bk_valid[b]),
      .out       (bk_out[b]),
      .busy      (bk_busy[b])
    );
    assign bank_sel[b] = cmd_q.bcast || (cmd_q.bank == 5'(b));
  end

  // ---------------- adder trees ----------------
  logic  [DIM-1:0] tree_valid;
  fp16_t           tree_sum [DIM];

  logic          ew;               // OP_EWMUL: one bank feeds the trees
  logic [NB-1:0] tree_en;
  assign ew = (cmd_q.op == OP_EWMUL);
  for (genvar b = 0; b < NB; b++) begin : g_tree_en
    assign tree_en[b] = !ew || (cmd_q.bank == 5'(b));
  end

  for (genvar j = 0; j < DIM; j++) begin : g_tree
    fp16_t lane_in [NB];
    for (genvar b = 0; b < NB; b++) begin : g_in
      assign lane_in[b] = tree_en[b] ? bk_out[b][j] : 16'h0000;
    end
    adder_tree #(.N(NB)) u_tree (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (bk_valid[0]),
      .in        (lane_in),
      .out_valid (tree_valid[j]),
      .sum       (tree_sum[j])
    );
  end

  // ---------------- accumulate with partial sums ----------------
  fp16_t         tree_q [DIM];
  logic          acc_v_q;
  logic [AW-1:0] acc_addr_q, add_addr_q;
  logic          add_valid;
  fp16_t         add_sum [DIM];

  always_ff @(posedge clk) begin
    if (tree_valid[0]) tree_q <= tree_sum;
    acc_addr_q <= cmd_q.dst + AW'(dcnt_q);
    add_addr_q <= acc_addr_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_v_q <= 1'b0;
    else        acc_v_q <= tree_valid[0];
  end

  simd_add #(.LANES(DIM)) u_add (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (acc_v_q),
    .acc       (cmd_q.acc),
    .a         (tree_q),
    .b         (rd_vec),
    .out_valid (add_valid),
    .s         (add_sum)
  );

  // ---------------- max tree and exp unit ----------------
  fp16_t                   vbuf_q [NMAX];
  logic                    max_in_valid, max_out_valid;
  fp16_t                   grp_max;
  logic [$clog2(NMAX)-1:0] grp_idx;
  logic                    exp_in_valid, exp_out_valid;
  fp16_t                   exp_x [NEXP];
  fp16_t                   exp_y [NEXP];
  fp16_t                   ybuf_q [NEXP];

  max_tree #(.N(NMAX)) u_max (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (max_in_valid),
    .in        (vbuf_q),
    .out_valid (max_out_valid),
    .max_val   (grp_max),
    .max_idx   (grp_idx)
  );

  for (genvar i = 0; i < NEXP; i++) begin : g_expx
    assign exp_x[i] = vbuf_q[i];
  end

  exp_unit #(.LANES(NEXP)) u_exp (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (exp_in_valid),
    .x         (exp_x),
    .out_valid (exp_out_valid),
    .y         (exp_y)
  );

  // ---------------- sequencer ----------------
  logic        is_max;
  logic [15:0] gwords;             // SRAM words per MAX / EXP group
  logic [15:0] load_words;
  logic        accept;

  assign is_max     = (cmd_q.op == OP_MAX);
  assign gwords     = is_max ? 16'(MAXW) : 16'(EXPW);
  assign load_words = (cmd_q.op == OP_LOAD_TILE) ? 16'(DIM) : 16'd2;
  assign cmd_ready  = (state_q == S_IDLE);
  assign accept     = cmd_valid && cmd_ready;
  assign bank_clr   = accept;

  assign bank_rd_req  = (state_q == S_STREAM) && (rcnt_q < cmd_q.len) && bank_rd_ready;
  assign tile_load    = ld_v_q && (cmd_q.op == OP_LOAD_TILE);
  assign vec_load     = ld_v_q && (cmd_q.op == OP_LOAD_VEC);
  assign max_in_valid = (state_q == S_VOP) && is_max;
  assign exp_in_valid = (state_q == S_VOP) && !is_max;

  // SRAM port multiplexing
  always_comb begin
    sram_rd_en   = 1'b0;
    sram_rd_addr = ext_addr;
    sram_wr_en   = 1'b0;
    sram_wr_addr = ext_addr;
    sram_wr_data = ext_wr_data;
    unique case (state_q)
      S_IDLE: begin
        sram_rd_en = ext_rd_en;
        sram_wr_en = ext_wr_en;
      end
      S_LOAD: begin
        sram_rd_en   = (rcnt_q < load_words);
        sram_rd_addr = cmd_q.src + AW'(rcnt_q);
      end
      S_STREAM: begin
        // partial sum of the beat leaving the trees now
        sram_rd_en   = tree_valid[0] && cmd_q.acc;
        sram_rd_addr = cmd_q.dst + AW'(dcnt_q);
        sram_wr_en   = add_valid;
        sram_wr_addr = add_addr_q;
        for (int i = 0; i < DIM; i++) sram_wr_data[16*i +: 16] = add_sum[i];
      end
      S_VRD: begin
        sram_rd_en   = (rcnt_q < gwords);
        sram_rd_addr = cmd_q.src + AW'(grp_q * gwords + rcnt_q);
      end
      S_VWR: begin
        sram_wr_en   = 1'b1;
        sram_wr_addr = cmd_q.dst + AW'(grp_q * gwords + wcnt_q);
        for (int i = 0; i < DIM; i++)
          sram_wr_data[16*i +: 16] = ybuf_q[DIM * int'(wcnt_q[$clog2(EXPW)-1:0]) + i];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      cmd_q          <= '0;
      rcnt_q         <= '0;
      dcnt_q         <= '0;
      wcnt_q         <= '0;
      grp_q          <= '0;
      mode_q         <= 1'b0;
      ld_v_q         <= 1'b0;
      ld_row_q       <= '0;
      sram_rd_pend_q <= 1'b0;
      ext_rd_valid   <= 1'b0;
      cmd_done       <= 1'b0;
      max_val        <= '0;
      max_idx        <= '0;
    end else begin
      cmd_done       <= 1'b0;
      ext_rd_valid   <= (state_q == S_IDLE) && ext_rd_en;
      sram_rd_pend_q <= sram_rd_en && (state_q == S_LOAD || state_q == S_VRD);
      ld_v_q         <= sram_rd_en && (state_q == S_LOAD);
      ld_row_q       <= $clog2(DIM)'(rcnt_q);
      unique case (state_q)
        S_IDLE: if (accept) begin
          cmd_q  <= cmd;
          rcnt_q <= '0;
          dcnt_q <= '0;
          wcnt_q <= '0;
          grp_q  <= '0;
          if (cmd.op == OP_GEMM || cmd.op == OP_GEMV || cmd.op == OP_EWMUL)
            mode_q <= (cmd.op != OP_GEMM);
          unique case (cmd.op)
            OP_LOAD_TILE, OP_LOAD_VEC: state_q <= S_LOAD;
            OP_GEMM, OP_GEMV, OP_EWMUL: state_q <= S_STREAM;
            OP_MAX, OP_EXP:            state_q <= S_VRD;
            default:                   state_q <= S_DONE;
          endcase
        end
        S_LOAD: begin
          if (sram_rd_en) rcnt_q <= rcnt_q + 16'd1;
          if (ld_v_q && ld_row_q == $clog2(DIM)'(load_words - 16'd1)) state_q <= S_DONE;
        end
        S_STREAM: begin
          if (bank_rd_req)   rcnt_q <= rcnt_q + 16'd1;
          if (tree_valid[0]) dcnt_q <= dcnt_q + 16'd1;
          if (add_valid)     wcnt_q <= wcnt_q + 16'd1;
          if (add_valid && wcnt_q + 16'd1 == cmd_q.len) state_q <= S_DONE;
          if (cmd_q.len == 16'd0) state_q <= S_DONE;
        end
        S_VRD: begin
          if (sram_rd_en) rcnt_q <= rcnt_q + 16'd1;
          if (sram_rd_pend_q) begin
            dcnt_q <= dcnt_q + 16'd1;
            if (dcnt_q + 16'd1 == gwords) state_q <= S_VOP;
          end
          if (cmd_q.len == 16'd0) state_q <= S_DONE;
        end
        S_VOP: state_q <= S_VWAIT;
        S_VWAIT: begin
          if (max_out_valid) begin
            if (grp_q == 16'd0 || fp16_gt(grp_max, max_val)) begin
              max_val <= grp_max;
              max_idx <= 16'(grp_q * 16'(NMAX)) + 16'(grp_idx);
            end
          end
          if (max_out_valid || exp_out_valid) begin
            rcnt_q <= '0;
            dcnt_q <= '0;
            wcnt_q <= '0;
            if (exp_out_valid) begin
              state_q <= S_VWR;
            end else begin
              grp_q   <= grp_q + 16'd1;
              state_q <= (grp_q + 16'd1 == cmd_q.len) ? S_DONE : S_VRD;
            end
          end
        end
        S_VWR: begin
          wcnt_q <= wcnt_q + 16'd1;
          if (wcnt_q + 16'd1 == gwords) begin
            wcnt_q  <= '0;
            grp_q   <= grp_q + 16'd1;
            state_q <= (grp_q + 16'd1 == cmd_q.len) ? S_DONE : S_VRD;
          end
        end
        S_DONE: begin
          if (!(|bk_busy)) begin
            cmd_done <= 1'b1;
            state_q  <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // group buffers (no reset needed: written before they are read)
  always_ff @(posedge clk) begin
    if (state_q == S_VRD && sram_rd_pend_q)
      for (int i = 0; i < DIM; i++) vbuf_q[DIM * int'(dcnt_q[$clog2(MAXW)-1:0]) + i] <= rd_vec[i];
    if (state_q == S_VWAIT && exp_out_valid) ybuf_q <= exp_y;
  end

  assign ext_rd_data = sram_rd_data;

  // ---------------- protocol checks ----------------
  // All banks run in lock-step: their result beats coincide.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (bk_valid == '0) || (bk_valid == '1));
  // The external port is used only while the sequencer is idle.
  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (ext_rd_en || ext_wr_en) |-> (state_q == S_IDLE));
  // Bank data arrives only for reads that were requested.
  a_no_extra_data: assert property (@(posedge clk) disable iff (!rst_n)
    bank_rd_valid |-> (state_q == S_STREAM));
endmodule
