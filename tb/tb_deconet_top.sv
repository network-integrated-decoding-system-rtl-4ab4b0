// tb_deconet_top: end-to-end test of the decoding network (root, four leaves, tree and grid
// links) with two logical qubits of distance 5 per leaf.
//
// The bench plays the user and the qubit controllers. It writes a logical-circuit program
// into the root: for every block, boundary changes (merges inside a leaf, and faces between
// leaves that one leaf decodes first, OPEN, while its neighbour waits, CLOSED, in both
// directions) and a decode instruction to every leaf, paced by waits on earlier results.
// One merge is conditional: it is sent only if the decoded result of qubit 0 in block 2 is
// 1, and a second conditional merge, on the opposite value, must be skipped. The bench's own
// model of the global decoding graph draws one random single error per even block, turns it
// into per-qubit defects streamed into the measurement ports, and predicts every logical
// qubit's flip per block. Every result reaching the user is compared with the prediction,
// every result must have arrived, and each mechanism (intra-leaf fusion needing growth,
// boundary defects on the grid in both directions, a leaf waiting for its neighbour, a
// stalled program wait, conditional sends taken and skipped, feedback to the controllers,
// measurement back-pressure, cross-leaf errors) is counted and must have happened.
module tb_deconet_top;
  import deconet_pkg::*;

  localparam int D     = 5;
  localparam int R     = D;
  localparam int C     = D;
  localparam int NQ    = 2;
  localparam int NLEAF = 4;
  localparam int G     = NQ * NLEAF;
  localparam int NB    = 40;
  localparam int NRND  = (NB + 1) * D;
  localparam int PD    = 1024;
  localparam int LAG   = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          prog_we = 1'b0, start = 1'b0, running, res_valid;
  logic [9:0]    prog_addr = '0;
  lp_instr_t     prog_data = '0;
  msg_t          res_msg;
  logic [15:0]   n_cond_taken, n_cond_skipped;
  logic [NQ-1:0] meas_valid [NLEAF], meas_ready [NLEAF];
  logic [D*D-1:0] meas_data [NLEAF][NQ];
  logic          fb_valid [NLEAF], fb_logical [NLEAF], leaf_busy [NLEAF];
  logic [7:0]    fb_qubit [NLEAF];

  deconet_top #(.D(D), .NQ(NQ), .NLEAF(NLEAF), .PROG_DEPTH(PD)) dut (.*);

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- global graph model
  // fs[b][g]: face west of global qubit g in block b. Inside a leaf: F_SPLIT or F_MERGED.
  // Between leaves: F_OPEN means the left leaf decodes first, F_CLOSED the right one.
  logic  def   [G][NRND][R][C];
  logic  exp_l [G][NB+1];
  face_e fs    [NB+1][G+1];
  int    nkind [9];

  function automatic face_e sched(input int b, input int g);
    if (b >= NB - 3) return F_SPLIT;
    case (g)
      1: return (b >= 4 && b < 14) ? F_MERGED : F_SPLIT;
      3: return (b >= 6 && b < 18) ? F_MERGED : F_SPLIT;
      5: return (b >= 20 && b < 30) ? F_MERGED : F_SPLIT;
      7: return (b >= 10 && b < 24) ? F_MERGED : F_SPLIT;
      2: return (b >= 2 && b < 12) ? F_OPEN : (b >= 16 && b < 28) ? F_CLOSED : F_SPLIT;
      4: return (b >= 4 && b < 14) ? F_CLOSED : (b >= 18 && b < 32) ? F_OPEN : F_SPLIT;
      6: return (b >= 8 && b < 24) ? F_OPEN : F_SPLIT;
      default: return F_SPLIT;
    endcase
  endfunction

  // the faces a leaf is told: its west face (0), inner faces, east face (NQ)
  function automatic face_e leaf_face(input int b, input int l, input int i);
    automatic int    g = l * NQ + i;
    automatic face_e f = fs[b][g];
    if (g == 0 || g == G) return F_SPLIT;
    if (g % NQ != 0) return f;
    if (f == F_SPLIT) return F_SPLIT;
    if (i == NQ) return f;                           // the left leaf: as written
    return (f == F_OPEN) ? F_CLOSED : F_OPEN;        // the right leaf: the other side
  endfunction

  task automatic inject(input int b, input int g, input int kind);
    int tl, t, r, c;
    face_e w, e;
    tl = $urandom_range(0, D - 1);
    t  = b * D + tl;
    r  = $urandom_range(0, R - 1);
    w  = fs[b][g];
    e  = fs[b][g+1];
    if (kind == 5 && e != F_MERGED) kind = 1;
    if (kind == 8 && w != F_MERGED) kind = 0;
    case (kind)
      8: begin                                   // a chain across a merged face, then 3 seam rows:
        r = $urandom_range(0, R - 4);             // stage 1 leaves two odd clusters, so the
        def[g][t][r][0] ^= 1'b1;                  // fused stage must grow
        def[g-1][t][r+3][C-1] ^= 1'b1;
        exp_l[g][b] ^= 1'b1;
      end
      0: begin                                   // west edge of column 0
        def[g][t][r][0] ^= 1'b1;
        exp_l[g][b] ^= 1'b1;
        if (w != F_SPLIT) def[g-1][t][r][C-1] ^= 1'b1;
        if (w == F_OPEN || w == F_CLOSED) kind = 6 + (w == F_CLOSED);
      end
      2: begin                                   // east edge of column D-2
        def[g][t][r][C-2] ^= 1'b1;
        if (e != F_SPLIT) def[g][t][r][C-1] ^= 1'b1;
      end
      3: begin
        r = $urandom_range(0, R - 2);
        c = $urandom_range(0, C - 2);
        def[g][t][r][c] ^= 1'b1;
        def[g][t][r+1][c] ^= 1'b1;
      end
      4: begin
        c = $urandom_range(0, C - 2);
        def[g][t][r][c] ^= 1'b1;
        def[g][t+1][r][c] ^= 1'b1;
      end
      5: begin                                   // between rows of a merged seam
        r = $urandom_range(0, R - 2);
        def[g][t][r][C-1] ^= 1'b1;
        def[g][t][r+1][C-1] ^= 1'b1;
      end
      default: begin
        kind = 1;
        c = $urandom_range(0, C - 3);
        def[g][t][r][c] ^= 1'b1;
        def[g][t][r][c+1] ^= 1'b1;
      end
    endcase
    nkind[kind]++;
  endtask

  // ---------------------------------------------------------------- qubit controllers
  int rptr [NLEAF][NQ];
  logic feed_on = 1'b0;
  int n_meas_stall = 0;
  always_comb
    for (int l = 0; l < NLEAF; l++)
      for (int i = 0; i < NQ; i++) begin
        meas_valid[l][i] = feed_on && (rptr[l][i] < NRND);
        meas_data[l][i]  = '0;
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            if (rptr[l][i] < NRND) meas_data[l][i][r*C+c] = def[l*NQ+i][rptr[l][i]][r][c];
      end
  always @(posedge clk)
    for (int l = 0; l < NLEAF; l++)
      for (int i = 0; i < NQ; i++) begin
        if (meas_valid[l][i] && meas_ready[l][i]) rptr[l][i] <= rptr[l][i] + 1;
        if (rst_n && meas_valid[l][i] && !meas_ready[l][i]) n_meas_stall++;
      end

  // ---------------------------------------------------------------- program
  lp_instr_t prog [$];

  function automatic msg_t mk(input int dest, input int hdr, input int pl);
    return '{dest: 8'(dest), hdr: 8'(hdr), payload: 48'(pl)};
  endfunction

  function automatic msg_t face_msg(input int l, input int i, input face_e f);
    return mk(l + 1, H_SET_BOUNDARY, {22'd0, 2'(f), 8'(i)});
  endfunction

  task automatic build_program();
    for (int b = 0; b <= NB; b++) begin
      if (b == 14) begin
        // the results of block 2 decide two merges of blocks 14..16
        prog.push_back('{op: OP_WAIT, q: 8'd0, val: 1'b0, msg: mk(0, H_NOP, 2)});
        prog.push_back('{op: OP_SENDIF, q: 8'd0, val: 1'b1, msg: face_msg(0, 1, F_MERGED)});
        prog.push_back('{op: OP_SENDIF, q: 8'd0, val: 1'b0, msg: face_msg(2, 1, F_MERGED)});
      end
      if (b == 17) prog.push_back('{op: OP_SEND, q: 8'd0, val: 1'b0, msg: face_msg(0, 1, F_SPLIT)});
      for (int l = 0; l < NLEAF; l++)
        for (int i = 0; i <= NQ; i++)
          if (b > 0 && leaf_face(b, l, i) != leaf_face(b - 1, l, i) &&
              !(l == 0 && i == 1 && (b == 14 || b == 17)))
            prog.push_back('{op: OP_SEND, q: 8'd0, val: 1'b0, msg: face_msg(l, i, leaf_face(b, l, i))});
      for (int l = 0; l < NLEAF; l++)
        prog.push_back('{op: OP_SEND, q: 8'd0, val: 1'b0, msg: mk(l + 1, H_DECODE, b)});
      if (b >= LAG)
        for (int l = 0; l < NLEAF; l++)
          prog.push_back('{op: OP_WAIT, q: 8'(l * NQ), val: 1'b0, msg: mk(0, H_NOP, b - LAG)});
    end
    prog.push_back('{op: OP_END, q: 8'd0, val: 1'b0, msg: '0});
  endtask

  // ---------------------------------------------------------------- observation
  logic got_l  [G][NB+1];
  logic seen_l [G][NB+1];
  int   n_res = 0, n_fb = 0, n_dup = 0, n_tog_e = 0, n_tog_w = 0, n_prog_wait = 0;
  int   n_leaf_wait [NLEAF];
  int   n_fused_grow [NLEAF];

  always @(posedge clk) begin
    if (rst_n && res_valid) begin
      automatic int q = int'(res_msg.payload[7:0]);
      automatic int b = int'(res_msg.payload[23:8]);
      n_res++;
      if (q < G && b <= NB) begin
        if (seen_l[q][b]) n_dup++;
        got_l[q][b]  <= res_msg.payload[24];
        seen_l[q][b] <= 1'b1;
      end
    end
    for (int l = 0; l < NLEAF; l++) if (rst_n && fb_valid[l]) n_fb++;
    for (int l = 0; l < NLEAF - 1; l++) begin
      if (rst_n && dut.ge_tx_v[l]) n_tog_e++;
      if (rst_n && dut.gw_tx_v[l+1]) n_tog_w++;
    end
    if (rst_n && running && dut.u_root.u_lp.ins.op == OP_WAIT && !dut.u_root.u_lp.advance) n_prog_wait++;
  end

  for (genvar l = 0; l < NLEAF; l++) begin : g_mon
    always @(posedge clk) begin
      if (rst_n && !dut.g_leaf[l].u_leaf.u_coord.busy && dut.g_leaf[l].u_leaf.u_coord.iq_cnt != 0 &&
          dut.g_leaf[l].u_leaf.u_coord.iq_head.hdr == H_DECODE &&
          dut.g_leaf[l].u_leaf.u_coord.all_ready && !dut.g_leaf[l].u_leaf.u_coord.can_start)
        n_leaf_wait[l]++;
      if (rst_n && dut.g_leaf[l].u_leaf.u_coord.cmd == C_GROW && dut.g_leaf[l].u_leaf.u_coord.fused)
        n_fused_grow[l]++;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int k = 0; k < 9; k++) nkind[k] = 0;
    for (int l = 0; l < NLEAF; l++) begin
      n_leaf_wait[l] = 0;
      n_fused_grow[l] = 0;
      for (int i = 0; i < NQ; i++) rptr[l][i] = 0;
    end
    for (int g = 0; g < G; g++) begin
      for (int t = 0; t < NRND; t++)
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++) def[g][t][r][c] = 1'b0;
      for (int b = 0; b <= NB; b++) begin
        exp_l[g][b] = 1'b0; got_l[g][b] = 1'b0; seen_l[g][b] = 1'b0;
      end
    end
    for (int b = 0; b <= NB; b++)
      for (int g = 0; g <= G; g++) fs[b][g] = sched(b, g);
    // the conditional merge: taken (face 1 of leaf 1), since qubit 0 flips in block 2
    for (int b = 14; b < 17; b++) fs[b][1] = F_MERGED;
    // errors: a fixed logical flip of qubit 0 in block 2, then one random error per even
    // block; every other even block prefers an error across a face between leaves, the rest
    // one across a merged face inside a leaf
    inject(2, 0, 0);
    for (int b = 4; b < NB - 2; b += 2) begin
      automatic int g = $urandom_range(0, G - 1);
      automatic int kind = $urandom_range(0, 5);
      if (b % 4 == 0)
        for (int f = 2; f < G; f += NQ)
          if (fs[b][f] == F_OPEN || fs[b][f] == F_CLOSED) begin
            g = f;
            kind = 0;
          end
      if (b % 4 == 2)
        for (int f = 1; f < G; f++)
          if (fs[b][f] == F_MERGED) begin
            g = f;
            kind = 8;
          end
      inject(b, g, kind);
    end
    build_program();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < prog.size(); a++) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = 10'(a); prog_data = prog[a];
    end
    @(negedge clk);
    prog_we = 1'b0;
    feed_on = 1'b1;
    start   = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (running) @(posedge clk);
    repeat (200) @(posedge clk);
    for (int g = 0; g < G; g++)
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (!seen_l[g][b] || got_l[g][b] !== exp_l[g][b]) begin
          failures++;
          $display("qubit %0d block %0d: result %0b (seen %0b) expected %0b",
                   g, b, got_l[g][b], seen_l[g][b], exp_l[g][b]);
        end
      end
    expect_true(n_res == G * NB && n_dup == 0, "one result per qubit and block");
    expect_true(n_fb == n_res, "feedback for every result");
    expect_true(n_cond_taken == 1 && n_cond_skipped == 1, "one conditional taken, one skipped");
    expect_true(n_tog_e > 0, "boundary defects sent east");
    expect_true(n_tog_w > 0, "boundary defects sent west");
    expect_true(n_prog_wait > 0, "program waited for results");
    expect_true(n_meas_stall > 0, "measurement back-pressure");
    expect_true(nkind[6] > 0 && nkind[7] > 0, "errors across faces decoded first on either side");
    expect_true(nkind[0] > 0 && nkind[8] > 0, "logical errors inside a leaf, single and across a merge");
    expect_true(nkind[1] + nkind[2] + nkind[3] + nkind[4] + nkind[5] > 0, "errors without a logical flip");
    begin
      automatic int w = 0, f = 0;
      for (int l = 0; l < NLEAF; l++) begin w += n_leaf_wait[l]; f += n_fused_grow[l]; end
      expect_true(w > 0, "a leaf waited for its grid neighbour");
      expect_true(f > 0, "fusion needed growth");
      $display("results %0d, toggles east/west %0d/%0d, leaf waits %0d, fused growth %0d",
               n_res, n_tog_e, n_tog_w, w, f);
    end
    $display("program waits %0d, measurement stalls %0d, error kinds %0d %0d %0d %0d %0d %0d %0d %0d %0d",
             n_prog_wait, n_meas_stall, nkind[0], nkind[1], nkind[2], nkind[3], nkind[4],
             nkind[5], nkind[6], nkind[7], nkind[8]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
