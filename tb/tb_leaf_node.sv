// tb_leaf_node: self-checking test of one leaf with three logical qubits of distance 5.
//
// The bench acts as the root, as the qubit controllers and as both grid neighbours. Over
// 24 blocks it merges qubit 0 with 1 and qubit 1 with 2 (Fusion Union-Find across decoder
// instances), opens the east face (the leaf decodes first and must send the corrections
// that cross it) and closes the west face (a neighbour decoded first and sends its
// corrections as toggles, which the leaf must wait for). The measurement routing table is
// permuted so channel 0 carries qubit 2 and channel 2 carries qubit 0.
//
// Errors are single random edges of the merged or split decoding graph, one per even
// block; the bench's own graph model turns them into defects and predicts each qubit's
// logical flip (errors on the qubit's column-0 left edge) and the toggles the east face
// must emit. Every H_RESULT is compared with the prediction, and every mechanism above must
// have happened at least once.
module tb_leaf_node;
  import deconet_pkg::*;

  localparam int D    = 5;
  localparam int R    = D;
  localparam int C    = D;
  localparam int NQ   = 3;
  localparam int NB   = 24;
  localparam int NRND = (NB + 1) * D;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           tree_rx_valid = 1'b0, tree_tx_valid;
  msg_t           tree_rx_msg = '0, tree_tx_msg;
  logic           gw_rx_valid = 1'b0, gw_tx_valid, ge_tx_valid;
  msg_t           gw_rx_msg = '0, gw_tx_msg, ge_tx_msg;
  logic [NQ-1:0]  meas_valid, meas_ready;
  logic [D*D-1:0] meas_data [NQ];
  logic           fb_valid, fb_logical, busy;
  logic [7:0]     fb_qubit;

  leaf_node #(.D(D), .NQ(NQ), .LEAF_ID(1)) dut (
    .clk, .rst_n,
    .tree_rx_valid, .tree_rx_msg, .tree_tx_valid, .tree_tx_msg, .tree_tx_ready(1'b1),
    .gw_rx_valid, .gw_rx_msg, .gw_tx_valid, .gw_tx_msg,
    .ge_rx_valid(1'b0), .ge_rx_msg('0), .ge_tx_valid, .ge_tx_msg,
    .meas_valid, .meas_data, .meas_ready, .fb_valid, .fb_qubit, .fb_logical, .busy);

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- graph model
  logic   def   [NQ][NRND][R][C];
  logic   exp_l [NQ][NB+1];
  logic [D*D-1:0] exp_te [NB+1];   // toggles the east face must send
  logic [D*D-1:0] tog_w  [NB+1];   // toggles the west neighbour sends
  face_e  fs    [NB+1][NQ+1];      // face state of every block
  int     nkind [8];

  function automatic face_e sched(input int b, input int f);
    case (f)
      1: return (b >= 4 && b < 12) ? F_MERGED : F_SPLIT;
      2: return (b >= 8 && b < 16) ? F_MERGED : F_SPLIT;
      3: return (b >= 2 && b < 10) ? F_OPEN   : F_SPLIT;
      default: return (b >= 6 && b < 14) ? F_CLOSED : F_SPLIT;
    endcase
  endfunction

  task automatic inject(input int b);
    int q, kind, tl, t, r, c;
    q    = $urandom_range(0, NQ - 1);
    kind = $urandom_range(0, 5);
    tl   = $urandom_range(0, D - 1);
    t    = b * D + tl;
    r    = $urandom_range(0, R - 1);
    case (kind)
      0: begin                                   // column 0 left edge
        if (fs[b][q] == F_CLOSED) kind = 1;
        else begin
          def[q][t][r][0] ^= 1'b1;
          exp_l[q][b] ^= 1'b1;
          if (fs[b][q] == F_MERGED) def[q-1][t][r][C-1] ^= 1'b1;
        end
      end
      2: begin                                   // column D-2 right edge: boundary or seam
        def[q][t][r][C-2] ^= 1'b1;
        if (fs[b][q+1] != F_SPLIT) def[q][t][r][C-1] ^= 1'b1;
      end
      3: begin                                   // between rows
        r = $urandom_range(0, R - 2);
        c = $urandom_range(0, C - 2);
        def[q][t][r][c] ^= 1'b1;
        def[q][t][r+1][c] ^= 1'b1;
      end
      4: begin                                   // measurement error
        c = $urandom_range(0, C - 2);
        def[q][t][r][c] ^= 1'b1;
        def[q][t+1][r][c] ^= 1'b1;
      end
      5: begin                                   // seam: open east face, or seam rows
        if (q == NQ - 1 && fs[b][NQ] == F_OPEN) begin
          def[q][t][r][C-1] ^= 1'b1;
          exp_te[b][tl*R+r] ^= 1'b1;
          kind = 6;
        end else if (fs[b][q+1] == F_MERGED) begin
          r = $urandom_range(0, R - 2);
          def[q][t][r][C-1] ^= 1'b1;
          def[q][t][r+1][C-1] ^= 1'b1;
        end else kind = 1;
      end
      default: ;
    endcase
    if (kind == 1) begin                         // between columns
      c = $urandom_range(0, C - 3);
      def[q][t][r][c] ^= 1'b1;
      def[q][t][r][c+1] ^= 1'b1;
    end
    nkind[kind]++;
  endtask

  // an error on the west face edge, corrected by the neighbour that decodes first
  task automatic inject_west(input int b);
    int tl, r;
    tl = $urandom_range(0, D - 1);
    r  = $urandom_range(0, R - 1);
    def[0][b*D+tl][r][0] ^= 1'b1;
    tog_w[b][tl*R+r] ^= 1'b1;
    exp_l[0][b] ^= 1'b1;
    nkind[7]++;
  endtask

  // ---------------------------------------------------------------- controllers
  // channel ch carries the qubit of instance route[ch]
  function automatic int qubit_of(input int ch);
    return (ch == 0) ? 2 : (ch == 2) ? 0 : ch;
  endfunction

  int rptr [NQ];
  logic feed_on = 1'b0;
  always_comb
    for (int ch = 0; ch < NQ; ch++) begin
      meas_valid[ch] = feed_on && (rptr[ch] < NRND);
      meas_data[ch]  = '0;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          if (rptr[ch] < NRND) meas_data[ch][r*C+c] = def[qubit_of(ch)][rptr[ch]][r][c];
    end
  always @(posedge clk)
    for (int ch = 0; ch < NQ; ch++)
      if (meas_valid[ch] && meas_ready[ch]) rptr[ch] <= rptr[ch] + 1;

  // ---------------------------------------------------------------- root side
  task automatic send(input msg_t m);
    @(negedge clk);
    tree_rx_valid = 1'b1;
    tree_rx_msg   = m;
    @(negedge clk);
    tree_rx_valid = 1'b0;
  endtask

  task automatic send_west(input int b);
    @(negedge clk);
    gw_rx_valid = 1'b1;
    gw_rx_msg   = '{dest: 8'd1, hdr: H_BDRY_DEFECTS,
                    payload: {12'(b), 4'd0, 32'(tog_w[b])}};
    @(negedge clk);
    gw_rx_valid = 1'b0;
  endtask

  logic got_l   [NQ][NB+1];
  logic seen_l  [NQ][NB+1];
  logic [D*D-1:0] got_te [NB+1];
  int   n_res = 0, n_fb = 0, n_te = 0, n_west_wait = 0, n_fused_grow = 0;
  always @(posedge clk) begin
    if (rst_n && tree_tx_valid && tree_tx_msg.hdr == H_RESULT) begin
      automatic int q = int'(tree_tx_msg.payload[7:0]);
      automatic int b = int'(tree_tx_msg.payload[23:8]);
      if (q < NQ && b <= NB) begin
        got_l[q][b]  <= tree_tx_msg.payload[24];
        seen_l[q][b] <= 1'b1;
      end
      n_res++;
    end
    if (rst_n && fb_valid) n_fb++;
    if (ge_tx_valid && ge_tx_msg.hdr == H_BDRY_DEFECTS) begin
      got_te[ge_tx_msg.payload[47:36]] <= ge_tx_msg.payload[D*D-1:0];
      n_te++;
    end
    if (dut.u_coord.st == dut.u_coord.S_IDLE && dut.u_coord.iq_cnt != 0 &&
        dut.u_coord.iq_head.hdr == H_DECODE && dut.u_coord.face_q[0] == F_CLOSED &&
        dut.u_coord.tw_cnt == 0)
      n_west_wait++;
    if (dut.u_coord.st == dut.u_coord.S_GROW && dut.u_coord.fused) n_fused_grow++;
  end

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 0; q < NQ; q++) begin
      rptr[q] = 0;
      for (int t = 0; t < NRND; t++)
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++) def[q][t][r][c] = 1'b0;
      for (int b = 0; b <= NB; b++) begin
        exp_l[q][b] = 1'b0; got_l[q][b] = 1'b0; seen_l[q][b] = 1'b0;
      end
    end
    for (int b = 0; b <= NB; b++) begin
      exp_te[b] = '0; tog_w[b] = '0; got_te[b] = '0;
      for (int f = 0; f <= NQ; f++) fs[b][f] = sched(b, f);
    end
    for (int k = 0; k < 8; k++) nkind[k] = 0;
    for (int b = 0; b < NB; b += 2) inject(b);
    for (int b = 0; b < NB; b += 2) if (fs[b][0] == F_CLOSED && (b % 4) == 2) inject_west(b);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    send('{dest: 8'd1, hdr: H_SET_ROUTE, payload: 48'h0200});
    send('{dest: 8'd1, hdr: H_SET_ROUTE, payload: 48'h0002});
    repeat (2) @(posedge clk);
    feed_on = 1'b1;
    for (int b = 0; b <= NB; b++) begin
      while (dut.u_coord.busy || dut.u_coord.iq_cnt != 0) @(posedge clk);
      for (int f = 0; f <= NQ; f++)
        if (b == 0 || fs[b][f] != fs[b-1][f])
          send('{dest: 8'd1, hdr: H_SET_BOUNDARY, payload: {38'd0, 2'(fs[b][f]), 8'(f)}});
      send('{dest: 8'd1, hdr: H_DECODE, payload: 48'(b)});
      repeat (20) @(posedge clk);
      if (fs[b][0] == F_CLOSED) send_west(b);
    end
    while (dut.u_coord.busy || dut.u_coord.iq_cnt != 0) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int b = 0; b < NB; b++) begin
      for (int q = 0; q < NQ; q++) begin
        checks++;
        if (!seen_l[q][b] || got_l[q][b] !== exp_l[q][b]) begin
          failures++;
          $display("qubit %0d block %0d: result %0b (seen %0b) expected %0b",
                   q, b, got_l[q][b], seen_l[q][b], exp_l[q][b]);
        end
      end
      if (fs[b][NQ] == F_OPEN) begin
        checks++;
        if (got_te[b] !== exp_te[b]) begin
          failures++;
          $display("block %0d: east toggles %h expected %h", b, got_te[b], exp_te[b]);
        end
      end
    end
    checks++;
    if (n_fb != n_res) begin failures++; $display("feedback %0d != results %0d", n_fb, n_res); end
    // every mechanism must have happened
    checks++; if (n_te == 0)        begin failures++; $display("no boundary defects sent"); end
    checks++; if (n_west_wait == 0) begin failures++; $display("never waited for the west neighbour"); end
    checks++; if (n_fused_grow == 0) begin failures++; $display("fusion never needed growth"); end
    checks++; if (nkind[0] == 0 || nkind[6] == 0 || nkind[7] == 0) begin
      failures++; $display("an error kind never drawn"); end
    $display("results %0d, east toggle messages %0d, west waits %0d, fused growth steps %0d",
             n_res, n_te, n_west_wait, n_fused_grow);
    $display("error kinds: %0d %0d %0d %0d %0d %0d %0d %0d", nkind[0], nkind[1], nkind[2],
             nkind[3], nkind[4], nkind[5], nkind[6], nkind[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
