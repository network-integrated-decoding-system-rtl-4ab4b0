// uf_decoder: one decoder instance, a Union-Find decoder with fusion for one logical qubit.
//
// The instance holds a window of two decoding blocks of the same logical qubit: the
// previous block (rounds 0..D-1) and the current block (rounds D..2D-1). Each round is a
// grid of D rows by D-1 ancilla columns, plus one seam column (column D-1) that stands for
// the extra ancillas measured only while this qubit is merged with its right-hand
// neighbour. Column 0 has an edge to the left face, column D-2 to the right boundary or to
// the seam, and the seam to the right face. Rows have no boundary. Vertices in consecutive
// rounds are joined by time edges; the last round of the current block has an open edge to
// the future.
//
// Every vertex is its own processing element. Working in lock step with the neighbouring
// instances of the leaf, under commands from the leaf coordinator, the array runs the
// clustering of Union-Find as neighbour-only flooding steps:
//   MRG   every vertex takes the minimum cluster id over its fully grown edges; a fully
//         grown boundary edge gives id 0, the virtual boundary, so such clusters are even
//   TREE  hop distance from the cluster root (the vertex whose own id won) or from the
//         boundary, which picks one parent per vertex: a spanning tree of each cluster
//   PAR   defect parity gathered from the tree leaves up to the root
//   BC    the root's parity sent back down, so each vertex knows if its cluster is odd
//   GROW  each vertex of an odd cluster grows its edges by half an edge
// Each flooding step repeats until no register changes (output `changed` low). The
// gathered parity of a vertex is also the peeling result: the edge to its parent carries a
// correction exactly when its subtree holds an odd number of defects.
//
// Fusion (from the paper): first every block is decoded alone, its shared faces with
// merged blocks and the face between previous and current block acting as artificial
// boundaries (`fused`=0); then the coordinator sets `fused`, the faces become ordinary
// edges and growth resumes in all blocks together until no odd cluster is left. Growth
// state of the first stage is kept. Then the previous block is committed: its corrections
// that cross column 0's left edge give the logical flip, corrections on the time edges into
// the current block toggle those defects before the next shift, and corrections across an
// F_OPEN face are handed out as toggles for the neighbour leaf.
//
// This design's own choices: the planar grid layout of a block, one processing element per
// vertex, flooding for union and parity (instead of the root tables of the original
// decoder), re-decoding the current block in the next window rather than keeping its
// clusters, and a FIFO of FIFO_ROUNDS measurement rounds.
//
// Timing: C_SHIFT takes one cycle; each flooding step one cycle per repetition; results are
// combinational from the registers and valid after the last C_BC of the fused stage.
module uf_decoder
  import deconet_pkg::*;
#(
  parameter int D           = 5,
  parameter int INST        = 0,
  parameter int FIFO_ROUNDS = 4 * D
) (
  input  logic            clk,
  input  logic            rst_n,
  // measurement rounds: bit r*D+c is the defect of row r, column c (column D-1 = seam)
  input  logic            rnd_valid,
  output logic            rnd_ready,
  input  logic [D*D-1:0]  rnd_data,
  output logic            blk_ready,
  // boundary state and commands
  input  face_e           lf,
  input  face_e           rf,
  input  logic            fused,
  input  uf_cmd_e         cmd,
  output logic            changed,
  output logic            any_odd,
  // shared faces, index t*D+r over the 2D rounds of the window
  input  face_vtx_t       left_in  [2*D*D],
  output face_vtx_t       left_out [2*D*D],
  input  face_vtx_t       right_in [2*D*D],
  output face_vtx_t       right_out[2*D*D],
  // boundary defects exchanged with neighbour leaves, index t*D+r over one block
  input  logic [D*D-1:0]  rx_tog_w,
  input  logic [D*D-1:0]  rx_tog_e,
  output logic [D*D-1:0]  tx_tog_w,
  output logic [D*D-1:0]  tx_tog_e,
  output logic            logical
);

  localparam int T  = 2 * D;
  localparam int R  = D;
  localparam int C  = D;
  localparam int NV = T * R * C;
  localparam int NF = T * R;
  localparam int AW = (FIFO_ROUNDS > 1) ? $clog2(FIFO_ROUNDS) : 1;
  localparam logic [ID_W-1:0]   ID_BASE  = ID_W'(INST * NV + 1);
  localparam logic [DIST_W-1:0] DIST_MAX = '1;

  // ------------------------------------------------------------------ state
  logic              defect [NV];
  logic [ID_W-1:0]   id_q   [NV];
  logic [DIST_W-1:0] dist_q [NV];
  pdir_e             par_q  [NV];
  logic              sub_q  [NV];
  logic              odd_q  [NV];
  logic [1:0]        g_e    [NV];   // edge to column c+1 (column D-2: boundary or seam; seam: open face)
  logic [1:0]        g_s    [NV];   // edge to row r+1
  logic [1:0]        g_t    [NV];   // edge to round t+1 (last round: open future)
  logic [1:0]        g_w    [NF];   // edge from column 0 to the left face
  logic              ttog_q [R*C];  // committed time-face corrections, applied at the next shift
  logic              rxp_cur, rxp_prev;
  face_e             lfp, rfp;        // faces of the previous block, taken at the shift
  face_e             lft [T], rft [T]; // faces seen by each round of the window

  logic [D*D-1:0]    fifo_mem [FIFO_ROUNDS];
  logic [AW-1:0]     rd_ptr, wr_ptr;
  logic [AW:0]       count;

  function automatic int vi(input int t, input int r, input int c);
    return (t * R + r) * C + c;
  endfunction

  function automatic logic act_col(input int c, input face_e rfs);
    return (c < C - 1) || (rfs != F_SPLIT);
  endfunction

  // Types of the edges a vertex owns, from the boundary registers.
  function automatic edge_e type_e(input int c, input face_e rfs, input logic fz);
    if (!act_col(c, rfs)) return E_ABSENT;
    if (c < C - 2) return E_NORMAL;
    if (c == C - 2) return (rfs == F_SPLIT) ? E_BOUND : E_NORMAL;
    case (rfs)
      F_MERGED: return fz ? E_NORMAL : E_ART;
      F_OPEN:   return E_BOUND;
      default:  return E_ABSENT;
    endcase
  endfunction

  function automatic edge_e type_w0(input face_e lfs, input logic fz);
    case (lfs)
      F_SPLIT:  return E_BOUND;
      F_MERGED: return fz ? E_NORMAL : E_ART;
      F_OPEN:   return E_BOUND;
      default:  return E_ABSENT;
    endcase
  endfunction

  function automatic edge_e type_u(input int t, input logic fz);
    if (t == T - 1) return E_BOUND;
    if (t == D - 1 && !fz) return E_ART;
    return E_NORMAL;
  endfunction

  // The previous block keeps the faces it had as the current block; the current block
  // follows the boundary registers.
  face_e lcur, rcur;   // faces the current block was shifted in with
  face_e rfp_n;
  assign rfp_n = rcur;
  always_comb
    for (int t = 0; t < T; t++) begin
      lft[t] = (t < D) ? lfp : lf;
      rft[t] = (t < D) ? rfp : rf;
    end

  // ------------------------------------------------------------------ neighbour view
  // For each vertex and direction: edge type, fullness and the neighbour's registers.
  edge_e             nb_et   [NV][6];
  logic              nb_full [NV][6];
  logic [ID_W-1:0]   nb_id   [NV][6];
  logic [DIST_W-1:0] nb_dist [NV][6];
  logic              nb_pme  [NV][6];   // neighbour's parent is this vertex
  logic              nb_sub  [NV][6];
  logic              nb_odd  [NV][6];
  logic              v_act   [NV];

  localparam int DW = 0, DE = 1, DN = 2, DS = 3, DD = 4, DU = 5;

  always_comb begin
    for (int t = 0; t < T; t++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          automatic int v = vi(t, r, c);
          automatic int f = t * R + r;
          v_act[v] = act_col(c, rft[t]);
          for (int k = 0; k < 6; k++) begin
            nb_et[v][k]   = E_ABSENT;
            nb_full[v][k] = 1'b0;
            nb_id[v][k]   = '0;
            nb_dist[v][k] = DIST_MAX;
            nb_pme[v][k]  = 1'b0;
            nb_sub[v][k]  = 1'b0;
            nb_odd[v][k]  = 1'b0;
          end
          if (v_act[v]) begin
            // west
            if (c == 0) begin
              nb_et[v][DW]   = type_w0(lft[t], fused);
              nb_full[v][DW] = (g_w[f] == 2'd2);
              if (nb_et[v][DW] == E_NORMAL) begin
                nb_id[v][DW]   = left_in[f].id;
                nb_dist[v][DW] = left_in[f].hops;
                nb_pme[v][DW]  = left_in[f].par_x;
                nb_sub[v][DW]  = left_in[f].sub;
                nb_odd[v][DW]  = left_in[f].odd;
              end
            end else begin
              nb_et[v][DW]   = type_e(c - 1, rft[t], fused);
              nb_full[v][DW] = (g_e[v-1] == 2'd2);
              nb_id[v][DW]   = id_q[v-1];
              nb_dist[v][DW] = dist_q[v-1];
              nb_pme[v][DW]  = (par_q[v-1] == P_E);
              nb_sub[v][DW]  = sub_q[v-1];
              nb_odd[v][DW]  = odd_q[v-1];
            end
            // east
            nb_et[v][DE] = type_e(c, rft[t], fused);
            if (c == C - 1) begin
              nb_full[v][DE] = (rft[t] == F_MERGED) ? right_in[f].efull : (g_e[v] == 2'd2);
              if (nb_et[v][DE] == E_NORMAL) begin
                nb_id[v][DE]   = right_in[f].id;
                nb_dist[v][DE] = right_in[f].hops;
                nb_pme[v][DE]  = right_in[f].par_x;
                nb_sub[v][DE]  = right_in[f].sub;
                nb_odd[v][DE]  = right_in[f].odd;
              end
            end else begin
              nb_full[v][DE] = (g_e[v] == 2'd2);
              if (nb_et[v][DE] == E_NORMAL) begin
                nb_id[v][DE]   = id_q[v+1];
                nb_dist[v][DE] = dist_q[v+1];
                nb_pme[v][DE]  = (par_q[v+1] == P_W);
                nb_sub[v][DE]  = sub_q[v+1];
                nb_odd[v][DE]  = odd_q[v+1];
              end
            end
            // north (row r-1) and south (row r+1)
            if (r > 0) begin
              nb_et[v][DN]   = E_NORMAL;
              nb_full[v][DN] = (g_s[v-C] == 2'd2);
              nb_id[v][DN]   = id_q[v-C];
              nb_dist[v][DN] = dist_q[v-C];
              nb_pme[v][DN]  = (par_q[v-C] == P_S);
              nb_sub[v][DN]  = sub_q[v-C];
              nb_odd[v][DN]  = odd_q[v-C];
            end
            if (r < R - 1) begin
              nb_et[v][DS]   = E_NORMAL;
              nb_full[v][DS] = (g_s[v] == 2'd2);
              nb_id[v][DS]   = id_q[v+C];
              nb_dist[v][DS] = dist_q[v+C];
              nb_pme[v][DS]  = (par_q[v+C] == P_N);
              nb_sub[v][DS]  = sub_q[v+C];
              nb_odd[v][DS]  = odd_q[v+C];
            end
            // down (round t-1) and up (round t+1)
            if (t > 0 && act_col(c, rft[t-1])) begin
              nb_et[v][DD]   = type_u(t - 1, fused);
              nb_full[v][DD] = (g_t[v-R*C] == 2'd2);
              nb_id[v][DD]   = id_q[v-R*C];
              nb_dist[v][DD] = dist_q[v-R*C];
              nb_pme[v][DD]  = (par_q[v-R*C] == P_U);
              nb_sub[v][DD]  = sub_q[v-R*C];
              nb_odd[v][DD]  = odd_q[v-R*C];
            end
            nb_et[v][DU]   = (t == T - 1 || act_col(c, rft[(t < T - 1) ? t + 1 : t])) ?
                             type_u(t, fused) : E_ABSENT;
            nb_full[v][DU] = (g_t[v] == 2'd2);
            if (t < T - 1 && nb_et[v][DU] == E_NORMAL) begin
              nb_id[v][DU]   = id_q[v+R*C];
              nb_dist[v][DU] = dist_q[v+R*C];
              nb_pme[v][DU]  = (par_q[v+R*C] == P_D);
              nb_sub[v][DU]  = sub_q[v+R*C];
              nb_odd[v][DU]  = odd_q[v+R*C];
            end
          end
        end
  end

  // ------------------------------------------------------------------ flooding next state
  logic [ID_W-1:0]   id_n   [NV];
  logic [DIST_W-1:0] dist_n [NV];
  pdir_e             par_n  [NV];
  logic              sub_n  [NV];
  logic              odd_n  [NV];

  function automatic pdir_e dir2p(input int k);
    case (k)
      DW: return P_W;
      DE: return P_E;
      DN: return P_N;
      DS: return P_S;
      DD: return P_D;
      default: return P_U;
    endcase
  endfunction

  always_comb begin
    changed = 1'b0;
    any_odd = 1'b0;
    for (int v = 0; v < NV; v++) begin
      automatic logic [ID_W-1:0] myid = ID_BASE + ID_W'(v);
      automatic logic [ID_W-1:0] mn;
      automatic logic [DIST_W-1:0] bd, cand;
      automatic pdir_e bp;
      automatic logic s, o;
      id_n[v]   = id_q[v];
      dist_n[v] = dist_q[v];
      par_n[v]  = par_q[v];
      sub_n[v]  = sub_q[v];
      odd_n[v]  = odd_q[v];
      any_odd   = any_odd | (v_act[v] & odd_q[v]);
      if (v_act[v]) begin
        case (cmd)
          C_MRG_INIT: id_n[v] = myid;
          C_MRG: begin
            mn = id_q[v];
            for (int k = 0; k < 6; k++)
              if (nb_full[v][k]) begin
                if (nb_et[v][k] == E_NORMAL && nb_id[v][k] < mn) mn = nb_id[v][k];
                if (nb_et[v][k] == E_BOUND || nb_et[v][k] == E_ART) mn = '0;
              end
            id_n[v] = mn;
          end
          C_TREE_INIT: begin
            dist_n[v] = (id_q[v] == myid) ? '0 : DIST_MAX;
            par_n[v]  = P_NONE;
          end
          C_TREE: if (id_q[v] != myid) begin
            bd = DIST_MAX;
            bp = P_NONE;
            for (int k = 0; k < 6; k++)
              if (nb_full[v][k]) begin
                cand = DIST_MAX;
                if (nb_et[v][k] == E_BOUND || nb_et[v][k] == E_ART) cand = DIST_W'(1);
                else if (nb_et[v][k] == E_NORMAL && nb_dist[v][k] != DIST_MAX)
                  cand = nb_dist[v][k] + DIST_W'(1);
                if (cand < bd) begin
                  bd = cand;
                  bp = dir2p(k);
                end
              end
            dist_n[v] = bd;
            par_n[v]  = bp;
          end
          C_PAR_INIT: sub_n[v] = defect[v];
          C_PAR: begin
            s = defect[v];
            for (int k = 0; k < 6; k++)
              if (nb_full[v][k] && nb_et[v][k] == E_NORMAL && nb_pme[v][k]) s = s ^ nb_sub[v][k];
            sub_n[v] = s;
          end
          C_BC_INIT: odd_n[v] = (id_q[v] != '0) && (par_q[v] == P_NONE) && sub_q[v];
          C_BC: begin
            o = 1'b0;
            if (id_q[v] != '0) begin
              if (par_q[v] == P_NONE) o = sub_q[v];
              else
                for (int k = 0; k < 6; k++)
                  if (par_q[v] == dir2p(k)) o = nb_odd[v][k];
            end
            odd_n[v] = o;
          end
          default: ;
        endcase
      end
      if (id_n[v] != id_q[v] || dist_n[v] != dist_q[v] || par_n[v] != par_q[v] ||
          sub_n[v] != sub_q[v] || odd_n[v] != odd_q[v])
        changed = 1'b1;
    end
  end

  // ------------------------------------------------------------------ growth
  function automatic logic [1:0] grow2(input logic [1:0] g, input logic a, input logic b);
    logic [2:0] s;
    s = {1'b0, g} + {2'b0, a} + {2'b0, b};
    return (s > 3'd2) ? 2'd2 : s[1:0];
  endfunction

  // ------------------------------------------------------------------ commit outputs
  always_comb begin
    logical  = rxp_prev;
    tx_tog_w = '0;
    tx_tog_e = '0;
    for (int t = 0; t < D; t++)
      for (int r = 0; r < R; r++) begin
        automatic int v0 = vi(t, r, 0);
        automatic int vs = vi(t, r, C - 1);
        automatic int f  = t * R + r;
        if (lfp != F_CLOSED) begin
          logical = logical ^ (par_q[v0] == P_W && sub_q[v0]);
          if (lfp == F_MERGED) logical = logical ^ (left_in[f].par_x & left_in[f].sub);
        end
        tx_tog_w[f] = (lfp == F_OPEN) && (par_q[v0] == P_W) && sub_q[v0];
        tx_tog_e[f] = (rfp == F_OPEN) && (par_q[vs] == P_E) && sub_q[vs];
      end
  end

  // ------------------------------------------------------------------ faces
  always_comb begin
    for (int t = 0; t < T; t++)
      for (int r = 0; r < R; r++) begin
        automatic int f  = t * R + r;
        automatic int v0 = vi(t, r, 0);
        automatic int vs = vi(t, r, C - 1);
        left_out[f].act    = 1'b1;
        left_out[f].id     = id_q[v0];
        left_out[f].hops   = dist_q[v0];
        left_out[f].par_x  = (par_q[v0] == P_W);
        left_out[f].sub    = sub_q[v0];
        left_out[f].odd    = odd_q[v0];
        left_out[f].efull  = (g_w[f] == 2'd2);
        right_out[f].act   = (rft[t] != F_SPLIT);
        right_out[f].id    = id_q[vs];
        right_out[f].hops  = dist_q[vs];
        right_out[f].par_x = (par_q[vs] == P_E);
        right_out[f].sub   = sub_q[vs];
        right_out[f].odd   = odd_q[vs];
        right_out[f].efull = 1'b0;
      end
  end

  // ------------------------------------------------------------------ measurement FIFO
  assign rnd_ready = (count < (AW+1)'(FIFO_ROUNDS));
  assign blk_ready = (count >= (AW+1)'(D));

  function automatic logic [AW-1:0] ptr_add(input logic [AW-1:0] p, input int k);
    automatic int s = int'(p) + k;
    return AW'(s % FIFO_ROUNDS);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      automatic logic push = rnd_valid && rnd_ready;
      automatic logic pop  = (cmd == C_SHIFT) && blk_ready;
      if (push) begin
        fifo_mem[wr_ptr] <= rnd_data;
        wr_ptr <= ptr_add(wr_ptr, 1);
      end
      if (pop) rd_ptr <= ptr_add(rd_ptr, D);
      count <= count + (push ? (AW+1)'(1) : '0) - (pop ? (AW+1)'(D) : '0);
    end
  end

  // ------------------------------------------------------------------ vertex registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NV; v++) begin
        defect[v] <= 1'b0;
        id_q[v]   <= '0;
        dist_q[v] <= '0;
        par_q[v]  <= P_NONE;
        sub_q[v]  <= 1'b0;
        odd_q[v]  <= 1'b0;
        g_e[v]    <= '0;
        g_s[v]    <= '0;
        g_t[v]    <= '0;
      end
      for (int f = 0; f < NF; f++) g_w[f] <= '0;
      for (int i = 0; i < R * C; i++) ttog_q[i] <= 1'b0;
      rxp_cur  <= 1'b0;
      rxp_prev <= 1'b0;
      lfp      <= F_SPLIT;
      rfp      <= F_SPLIT;
      lcur     <= F_SPLIT;
      rcur     <= F_SPLIT;
    end else begin
      for (int v = 0; v < NV; v++) begin
        id_q[v]   <= id_n[v];
        dist_q[v] <= dist_n[v];
        par_q[v]  <= par_n[v];
        sub_q[v]  <= sub_n[v];
        odd_q[v]  <= odd_n[v];
      end
      case (cmd)
        C_SHIFT: if (blk_ready) begin
          for (int t = 0; t < D; t++)
            for (int r = 0; r < R; r++)
              for (int c = 0; c < C; c++) begin
                automatic int vp = vi(t, r, c);
                automatic int vc = vi(t + D, r, c);
                automatic logic m = fifo_mem[ptr_add(rd_ptr, t)][r*C+c];
                automatic logic prevd = defect[vc] ^ ((t == 0) ? ttog_q[r*C+c] : 1'b0);
                if (c == 0 && lf == F_CLOSED) m = m ^ rx_tog_w[t*R+r];
                if (c == C - 1 && rf == F_CLOSED) m = m ^ rx_tog_e[t*R+r];
                defect[vp] <= prevd & act_col(c, rfp_n);
                defect[vc] <= m & act_col(c, rf);
              end
          for (int v = 0; v < NV; v++) begin
            g_e[v]   <= '0;
            g_s[v]   <= '0;
            g_t[v]   <= '0;
            par_q[v] <= P_NONE;
            odd_q[v] <= 1'b0;
            sub_q[v] <= 1'b0;
          end
          for (int f = 0; f < NF; f++) g_w[f] <= '0;
          rxp_prev <= rxp_cur;
          lfp      <= lcur;
          rfp      <= rcur;
          lcur     <= lf;
          rcur     <= rf;
          rxp_cur  <= (lf == F_CLOSED) ? ^rx_tog_w : 1'b0;
        end
        C_COMMIT: begin
          for (int r = 0; r < R; r++)
            for (int c = 0; c < C; c++) begin
              automatic int va = vi(D - 1, r, c);
              automatic int vb = vi(D, r, c);
              ttog_q[r*C+c] <= ((par_q[va] == P_U) && sub_q[va]) || ((par_q[vb] == P_D) && sub_q[vb]);
            end
        end
        C_GROW: begin
          for (int t = 0; t < T; t++)
            for (int r = 0; r < R; r++)
              for (int c = 0; c < C; c++) begin
                automatic int v = vi(t, r, c);
                automatic int f = t * R + r;
                automatic logic me = v_act[v] & odd_q[v];
                // east edge: the seam's face edge is owned here only when it is an open face
                if (c < C - 1) begin
                  if (nb_et[v][DE] == E_NORMAL || nb_et[v][DE] == E_ART)
                    g_e[v] <= grow2(g_e[v], me, v_act[v+1] & odd_q[v+1]);
                  else if (nb_et[v][DE] == E_BOUND)
                    g_e[v] <= grow2(g_e[v], me, 1'b0);
                end else if (nb_et[v][DE] == E_BOUND) begin
                  g_e[v] <= grow2(g_e[v], me, 1'b0);
                end
                if (r < R - 1) g_s[v] <= grow2(g_s[v], me, v_act[v] & odd_q[v+C]);
                if (t < T - 1) begin
                  if (nb_et[v][DU] != E_ABSENT)
                    g_t[v] <= grow2(g_t[v], me, v_act[v+R*C] & odd_q[v+R*C]);
                end else begin
                  g_t[v] <= grow2(g_t[v], me, 1'b0);
                end
                if (c == 0) begin
                  if (nb_et[v][DW] == E_NORMAL || nb_et[v][DW] == E_ART)
                    g_w[f] <= grow2(g_w[f], me, left_in[f].act & left_in[f].odd);
                  else if (nb_et[v][DW] == E_BOUND)
                    g_w[f] <= grow2(g_w[f], me, 1'b0);
                end
              end
        end
        default: ;
      endcase
    end
  end

  // A block can only be taken when it is complete.
  a_shift_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd == C_SHIFT) |-> blk_ready);

endmodule
