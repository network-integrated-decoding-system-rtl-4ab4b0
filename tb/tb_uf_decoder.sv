// tb_uf_decoder: self-checking test of one decoder instance with split (real) boundaries.
//
// The bench draws random single errors on the edges of a d=5 decoding graph (boundary
// edges of column 0 and column d-2, edges between columns and rows, measurement errors in
// time including those that cross into the next block), turns them into defects with its
// own model of the graph, and streams the rounds into the instance. It then plays the role
// of the coordinator: shift, clustering before fusion, clustering after fusion, commit.
// After decoding block k it checks the committed block k-1: its logical flip must equal the
// parity of the errors that lie on column 0's boundary edges, and no odd cluster may be
// left. Errors are placed only in even blocks so that each one is unambiguous. It also
// checks that each window is decoded in less than d microseconds (d rounds at 1 us per
// round, 100 MHz clock).
module tb_uf_decoder;
  import deconet_pkg::*;

  localparam int D    = 5;
  localparam int R    = D;
  localparam int C    = D;
  localparam int NBLK = 40;
  localparam int NRND = NBLK * D + D;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           rnd_valid, rnd_ready, blk_ready;
  logic [D*D-1:0] rnd_data;
  face_e          lf, rf;
  logic           fused;
  uf_cmd_e        cmd;
  logic           changed, any_odd, logical;
  face_vtx_t      zero_face [2*D*D];
  face_vtx_t      lo [2*D*D], ro [2*D*D];
  logic [D*D-1:0] txw, txe;

  uf_decoder #(.D(D)) dut (
    .clk, .rst_n, .rnd_valid, .rnd_ready, .rnd_data, .blk_ready,
    .lf, .rf, .fused, .cmd, .changed, .any_odd,
    .left_in(zero_face), .left_out(lo), .right_in(zero_face), .right_out(ro),
    .rx_tog_w('0), .rx_tog_e('0), .tx_tog_w(txw), .tx_tog_e(txe), .logical);

  int checks = 0, failures = 0;
  logic defects [NRND][R][C];
  logic exp_log [NBLK+1];
  int   ncat [5];

  // Inject one error edge into the defect model.
  task automatic inject(input int blk);
    int kind, t, r, c;
    kind = $urandom_range(0, 4);
    t = blk * D + $urandom_range(0, D - 1);
    r = $urandom_range(0, R - 1);
    ncat[kind]++;
    case (kind)
      0: begin defects[t][r][0] ^= 1'b1; exp_log[blk] ^= 1'b1; end          // left boundary edge
      1: begin c = $urandom_range(0, C - 3); defects[t][r][c] ^= 1'b1; defects[t][r][c+1] ^= 1'b1; end
      2: begin defects[t][r][C-2] ^= 1'b1; end                               // right boundary edge
      3: begin c = $urandom_range(0, C - 2); r = $urandom_range(0, R - 2);
               defects[t][r][c] ^= 1'b1; defects[t][r+1][c] ^= 1'b1; end
      default: begin c = $urandom_range(0, C - 2);                          // measurement error
               defects[t][r][c] ^= 1'b1; defects[t+1][r][c] ^= 1'b1; end
    endcase
  endtask

  task automatic step(input uf_cmd_e c);
    cmd = c;
    @(posedge clk);
    #1;
  endtask

  task automatic flood(input uf_cmd_e init, input uf_cmd_e c);
    step(init);
    cmd = c;
    forever begin
      automatic logic ch = changed;
      @(posedge clk);
      #1;
      if (!ch) break;
    end
  endtask

  int decode_cycles, max_cycles = 0;

  task automatic decode_window();
    int start;
    start = cyc;
    fused = 1'b0;
    step(C_SHIFT);
    for (int stage = 0; stage < 2; stage++) begin
      fused = (stage == 1);
      forever begin
        flood(C_MRG_INIT, C_MRG);
        flood(C_TREE_INIT, C_TREE);
        flood(C_PAR_INIT, C_PAR);
        flood(C_BC_INIT, C_BC);
        if (!any_odd) break;
        step(C_GROW);
      end
    end
    decode_cycles = cyc - start;
    if (decode_cycles > max_cycles) max_cycles = decode_cycles;
    cmd = C_NONE;
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Feed every round as soon as the FIFO has room.
  int rnd_ptr = 0;
  always @(posedge clk) begin
    if (rst_n && rnd_valid && rnd_ready) rnd_ptr <= rnd_ptr + 1;
  end
  always_comb begin
    rnd_valid = rst_n && (rnd_ptr < NRND);
    rnd_data  = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (rnd_ptr < NRND) rnd_data[r*C+c] = defects[rnd_ptr][r][c];
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2 * D * D; i++) zero_face[i] = '0;
    for (int t = 0; t < NRND; t++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) defects[t][r][c] = 1'b0;
    for (int b = 0; b <= NBLK; b++) exp_log[b] = 1'b0;
    for (int k = 0; k < 5; k++) ncat[k] = 0;
    for (int b = 0; b < NBLK; b += 2) inject(b);
    // a second, distant error in a few blocks: top-left boundary and bottom-right boundary
    for (int b = 4; b < NBLK; b += 8) begin
      defects[b*D+1][0][0] ^= 1'b1;  exp_log[b] ^= 1'b1;
      defects[b*D+3][R-1][C-2] ^= 1'b1;
    end
    lf = F_SPLIT;
    rf = F_SPLIT;
    fused = 1'b0;
    cmd = C_NONE;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NBLK; k++) begin
      while (!blk_ready) @(posedge clk);
      #1;
      decode_window();
      checks++;
      if (any_odd) begin
        failures++;
        $display("block %0d: odd cluster left after decoding", k);
      end
      if (k > 0) begin
        checks++;
        if (logical !== exp_log[k-1]) begin
          failures++;
          $display("block %0d: logical %0b expected %0b", k - 1, logical, exp_log[k-1]);
        end
      end
      checks++;
      if (decode_cycles >= 100 * D) begin
        failures++;
        $display("block %0d: %0d cycles, slower than the measurement of d rounds", k, decode_cycles);
      end
      step(C_COMMIT);
      cmd = C_NONE;
    end
    $display("error kinds left/horiz/right/vert/time = %0d/%0d/%0d/%0d/%0d, worst window %0d cycles",
             ncat[0], ncat[1], ncat[2], ncat[3], ncat[4], max_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
