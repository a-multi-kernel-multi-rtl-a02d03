// control_unit: walks the successive-cancellation decoding tree of a multi-kernel
// polar code and drives memories and processing unit, one step per cycle.
//
// Tree: depth 0 is the root (input = channel LLRs, length N); a node at depth d
// has radix r_d (2 or 3, cfg[d].tern) and r_d children at depth d+1; leaves sit at
// depth s_m. A node at depth d handles N_d LLRs, and every operation on it takes
// cfg[d].steps = ceil(N_d/2P) cycles. For each child c = 0..r_d-1 the node runs
// one LLR operation (c = 0: f, c = 1: g^b or g1^t, c = 2: g2^t), writes the child's
// input vector to LLR region d+1 and then descends into that child. When the
// children are leaves (d = s_m-1) the operation has one step, and the leaf's hard
// decision is made in the same cycle (no descent). After the last child the node
// runs comb for steps cycles, writing its beta vector into bank (its own child
// index) of beta region d, and control returns to its parent. Decoding stops
// when leaf N-1 is decided, so the combs of the rightmost path are never run.
// The number of cycles is therefore
//   L = sum_d ceil(N_d/2P) * ((r_d+1) * N/N_d - 1).
//
// Memory addressing (step j, word = j / r_d, part = j % r_d):
//   LLR op at depth d : read channel word j (d = 0) or Internal LLR word
//                       llr_off[d]+j; write word llr_off[d+1]+word, slice part;
//                       read beta words beta_off[d+1]+word (banks 0,1), slice part
//   comb at depth d   : read beta_off[d+1]+word in all banks, slice part;
//                       write beta_off[d]+j in bank c_{d-1}
//   leaf              : write u_hat to beta_off[s_m] in bank c_{s_m-1}, and to the
//                       Codeword RAM at the leaf index
// RAM reads are registered, so read addresses are computed from the next state;
// writes use the current state. Inputs: start (pulse, ignored while busy) and the
// code parameters, which must stay stable while busy. Outputs: busy (high for
// exactly L cycles), done (one-cycle pulse after the last leaf is stored).
// The traversal order, step counts and memory organisation follow the
// architecture; the state encoding (one FSM with a child counter per depth in
// place of the paper's hierarchy of FSMs) and the address layout are this design's.
module control_unit
  import polar_pkg::*;
#(
  parameter int NMAX = 4096,
  parameter int P = 120,
  localparam int MAXD = $clog2(NMAX),
  localparam int DW  = $clog2(MAXD + 2),
  localparam int NW  = $clog2(NMAX) + 1,
  localparam int IW  = $clog2(NMAX),
  localparam int D_CH = d_llr_ch(NMAX, P),
  localparam int D_LI = d_llr_int(NMAX, P),
  localparam int D_BI = d_beta_int(NMAX, P),
  localparam int CAW = (D_CH > 1) ? $clog2(D_CH) : 1,
  localparam int LAW = (D_LI > 1) ? $clog2(D_LI) : 1,
  localparam int BAW = (D_BI > 1) ? $clog2(D_BI) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  stage_cfg_t     cfg [MAXD+1],
  input  logic [NW-1:0]  n_len,
  input  logic [DW-1:0]  s_m,
  output logic           busy,
  output logic           done,
  // processing unit
  output logic           tern,
  output pe_op_e         op,
  output logic [1:0]     part,
  output logic           src_ch,
  // channel / internal LLR RAM
  output logic [CAW-1:0] ch_raddr,
  output logic [LAW-1:0] ill_raddr,
  output logic           ill_we,
  output logic [LAW-1:0] ill_waddr,
  // beta RAM
  output logic [BAW-1:0] beta_raddr,
  output logic [2:0]     beta_we,
  output logic [BAW-1:0] beta_waddr,
  output logic           leaf,
  // codeword / frozen RAMs
  output logic           cw_we,
  output logic [IW-1:0]  leaf_idx,
  output logic [IW-1:0]  frozen_ridx
);
  // ---------------- state ----------------
  logic            busy_q, busy_n;
  logic [DW-1:0]   d_q, d_n;
  logic [1:0]      c_q [MAXD+1];
  logic [1:0]      c_n [MAXD+1];
  logic            comb_q, comb_n;
  logic [OFFW-1:0] j_q, j_n, word_q, word_n;
  logic [1:0]      part_q, part_n;
  logic [NW-1:0]   leaf_q, leaf_n;
  logic            done_q, last_leaf;

  function automatic stage_cfg_t cfg_at(input stage_cfg_t c [MAXD+1], input int idx);
    if (idx < 0 || idx > MAXD) return '0;
    return c[idx];
  endfunction

  function automatic logic [1:0] radix_m1(input stage_cfg_t s);
    return s.tern ? 2'd2 : 2'd1;
  endfunction

  function automatic logic [2:0] onehot3(input logic [1:0] k);
    return 3'b001 << k;
  endfunction

  stage_cfg_t cur, nxt_child, up;
  logic       last_step, leaf_lvl;

  always_comb begin
    cur       = cfg_at(cfg, int'(d_q));
    up        = cfg_at(cfg, int'(d_q) - 1);
    nxt_child = cfg_at(cfg, int'(d_q) + 1);
    last_step = (j_q == cur.steps - OFFW'(1));
    leaf_lvl  = (d_q == s_m - DW'(1));
    last_leaf = busy_q && !comb_q && leaf_lvl && (leaf_q == n_len - NW'(1));

    busy_n = busy_q;
    d_n    = d_q;
    c_n    = c_q;
    comb_n = comb_q;
    j_n    = j_q;
    word_n = word_q;
    part_n = part_q;
    leaf_n = leaf_q;

    if (!busy_q) begin
      if (start) begin
        busy_n = 1'b1;
        d_n    = '0;
        c_n[0] = '0;
        comb_n = 1'b0;
        j_n    = '0;
        word_n = '0;
        part_n = '0;
        leaf_n = '0;
      end
    end else if (!last_step) begin
      j_n = j_q + OFFW'(1);
      if (part_q == radix_m1(cur)) begin
        part_n = '0;
        word_n = word_q + OFFW'(1);
      end else begin
        part_n = part_q + 2'd1;
      end
    end else begin
      j_n    = '0;
      word_n = '0;
      part_n = '0;
      if (!comb_q) begin
        if (!leaf_lvl) begin
          // descend into child c_q[d] of the current node
          d_n           = d_q + DW'(1);
          c_n[d_q + 1]  = '0;
        end else begin
          leaf_n = leaf_q + NW'(1);
          if (last_leaf)                       busy_n = 1'b0;
          else if (c_q[d_q] != radix_m1(cur))  c_n[d_q] = c_q[d_q] + 2'd1;
          else                                 comb_n = 1'b1;
        end
      end else begin
        // comb finished: back to the parent
        d_n = d_q - DW'(1);
        if (c_q[d_q - 1] != radix_m1(up)) begin
          c_n[d_q - 1] = c_q[d_q - 1] + 2'd1;
          comb_n       = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      d_q    <= '0;
      for (int k = 0; k <= MAXD; k++) c_q[k] <= '0;
      comb_q <= 1'b0;
      j_q    <= '0;
      word_q <= '0;
      part_q <= '0;
      leaf_q <= '0;
      done_q <= 1'b0;
    end else begin
      busy_q <= busy_n;
      d_q    <= d_n;
      c_q    <= c_n;
      comb_q <= comb_n;
      j_q    <= j_n;
      word_q <= word_n;
      part_q <= part_n;
      leaf_q <= leaf_n;
      done_q <= last_leaf;
    end
  end

  // ---------------- outputs ----------------
  stage_cfg_t n_cur, n_child, leaf_cfg;

  always_comb begin
    n_cur    = cfg_at(cfg, int'(d_n));
    n_child  = cfg_at(cfg, int'(d_n) + 1);
    leaf_cfg = cfg_at(cfg, int'(s_m));

    busy   = busy_q;
    done   = done_q;
    tern   = cur.tern;
    part   = part_q;
    src_ch = (d_q == '0);
    unique case (c_q[d_q])
      2'd0:    op = OP_F;
      2'd1:    op = OP_G;
      default: op = OP_G2;
    endcase

    ch_raddr   = CAW'(j_n);
    ill_raddr  = LAW'(n_cur.llr_off + j_n);
    beta_raddr = BAW'(n_child.beta_off + word_n);

    ill_we    = busy_q && !comb_q && !leaf_lvl;
    ill_waddr = LAW'(nxt_child.llr_off + word_q);

    leaf    = busy_q && !comb_q && leaf_lvl;
    beta_we = 3'b000;
    if (leaf)                 beta_we = onehot3(c_q[d_q]);
    else if (busy_q && comb_q) beta_we = onehot3(c_q[d_q - 1]);
    beta_waddr = leaf ? BAW'(leaf_cfg.beta_off) : BAW'(cur.beta_off + j_q);

    cw_we       = leaf;
    leaf_idx    = IW'(leaf_q);
    frozen_ridx = IW'(leaf_n);
  end

  // A leaf-level node handles at most 3 LLRs, always in a single step.
  a_leaf_one_step: assert property (@(posedge clk) disable iff (!rst_n)
    (busy_q && leaf_lvl) |-> (cur.steps == OFFW'(1)));
  a_comb_not_root: assert property (@(posedge clk) disable iff (!rst_n)
    (busy_q && comb_q) |-> (d_q != '0));
endmodule
