// invlogic_pkg -- Hamiltonian library for stochastic invertible logic.
//
// An invertible circuit is a Boltzmann machine: every node i holds a bipolar
// state m_i in {-1,+1} (logic 0 / logic 1), has a bias h_i and is coupled to
// every other node j by a symmetric weight J_ij. The valid truth-table rows of
// the circuit are exactly the lowest-energy states of
//     E = -( sum_i h_i m_i + 1/2 sum_ij J_ij m_i m_j ).
//
// This package holds the (h, J) tables of the elementary invertible gates
// (AND, XOR with an OR or NOR auxiliary node, two half adders, full adder) and
// composes larger circuits from them: an n-bit ripple-carry adder and an
// n x n unsigned array multiplier. Composition fuses the output node of one
// component with an input node of the next and simply sums the component
// Hamiltonians, so biases and weights of a fused node add up.
//
// The gate tables follow the published values. The alternative half adder's
// weight table is not symmetric in print (+1 one way, -1 the other between B
// and node 3); the symmetric -1 is used, which makes its ground states exactly
// the half-adder truth table with node order (A, B, A&B, A^B, NOR).
// The multiplier's column-by-column reduction order (full adders on the first
// three bits of a column, a half adder on the last two, carries of half
// adders queued before carries of full adders) is this design's own choice;
// it reproduces the node count 3*n^2 and, for n = 3, the set of node biases
// of the published 3x3 configuration.
//
// A circuit is kept as a netlist of components; node_info() derives from it,
// for one node, its bias, its non-zero couplings and its leak constant.
// Node numbering puts the circuit's terminals first:
//   multiplier : A0..A(n-1), B0..B(n-1), Y0..Y(2n-1), then internal nodes
//   RCA        : A0..A(n-1), B0..B(n-1), S0..S(n-1), Cout, then carries
//   gates      : the order of their published tables.
package invlogic_pkg;

  localparam int MAX_NODES = 128;   // 32-bit ripple-carry adder needs 128
  localparam int MAX_FAN   = 16;    // largest node fan-in handled
  localparam int MAX_COMPS = 96;
  localparam int MAX_COL   = 16;

  typedef enum logic [3:0] {
    CIRC_AND,      // (A, B, Y)
    CIRC_XOR_OR,   // (A, B, Y=A^B, aux=A|B)
    CIRC_XOR_NOR,  // (A, B, Y=A^B, aux=~(A|B))
    CIRC_HA,       // (A, B, S, Co)
    CIRC_HA_ALT,   // (A, B, Co, S, aux)
    CIRC_FA,       // (A, B, Ci, S, Co)
    CIRC_RCA,      // n-bit ripple-carry adder
    CIRC_MULT      // n x n array multiplier
  } circuit_e;


  // Component kinds used while composing.
  localparam int K_AND = 0, K_HA = 1, K_FA = 2, K_XOR_OR = 3, K_XOR_NOR = 4, K_HA_ALT = 5;

  localparam byte AND_H [3] = '{1, 1, -2};
  localparam byte AND_J [3][3] = '{'{0, -1, 2}, '{-1, 0, 2}, '{2, 2, 0}};
  localparam byte XOR_OR_H [4] = '{-1, -1, -1, 2};
  localparam byte XOR_OR_J [4][4] = '{'{0, -1, -1, 2}, '{-1, 0, -1, 2},
                                      '{-1, -1, 0, 2}, '{2, 2, 2, 0}};
  localparam byte XOR_NOR_H [4] = '{-1, -1, -1, -2};
  localparam byte XOR_NOR_J [4][4] = '{'{0, -1, -1, -2}, '{-1, 0, -1, -2},
                                       '{-1, -1, 0, -2}, '{-2, -2, -2, 0}};
  localparam byte HA_H [4] = '{1, 1, -1, -2};
  localparam byte HA_J [4][4] = '{'{0, -1, 1, 2}, '{-1, 0, 1, 2},
                                  '{1, 1, 0, -2}, '{2, 2, -2, 0}};
  localparam byte HA_ALT_H [5] = '{0, 0, -2, -1, -2};
  localparam byte HA_ALT_J [5][5] = '{'{0, -2, 2, -1, -2}, '{-2, 0, 2, -1, -2},
                                      '{2, 2, 0, 0, 0}, '{-1, -1, 0, 0, -2},
                                      '{-2, -2, 0, -2, 0}};
  localparam byte FA_H [5] = '{0, 0, 0, 0, 0};
  localparam byte FA_J [5][5] = '{'{0, -1, -1, 1, 2}, '{-1, 0, -1, 1, 2},
                                  '{-1, -1, 0, 1, 2}, '{1, 1, 1, 0, -2},
                                  '{2, 2, 2, -2, 0}};

  function automatic int comp_size(int kind);
    case (kind)
      K_AND:               return 3;
      K_HA, K_XOR_OR, K_XOR_NOR: return 4;
      default:             return 5;
    endcase
  endfunction

  function automatic int comp_h(int kind, int a);
    case (kind)
      K_AND:     return int'(AND_H[a]);
      K_HA:      return int'(HA_H[a]);
      K_FA:      return int'(FA_H[a]);
      K_XOR_OR:  return int'(XOR_OR_H[a]);
      K_XOR_NOR: return int'(XOR_NOR_H[a]);
      default:   return int'(HA_ALT_H[a]);
    endcase
  endfunction

  function automatic int comp_j(int kind, int a, int b);
    case (kind)
      K_AND:     return int'(AND_J[a][b]);
      K_HA:      return int'(HA_J[a][b]);
      K_FA:      return int'(FA_J[a][b]);
      K_XOR_OR:  return int'(XOR_OR_J[a][b]);
      K_XOR_NOR: return int'(XOR_NOR_J[a][b]);
      default:   return int'(HA_ALT_J[a][b]);
    endcase
  endfunction

  // Number of Boltzmann-machine nodes of a circuit.
  function automatic int num_nodes(circuit_e c, int n);
    case (c)
      CIRC_AND:                                return 3;
      CIRC_XOR_OR, CIRC_XOR_NOR, CIRC_HA:      return 4;
      CIRC_HA_ALT, CIRC_FA:                    return 5;
      CIRC_RCA:                                return 4 * n;
      default:                                 return 3 * n * n;
    endcase
  endfunction

  // Number of terminal (named) nodes: they are numbered first.
  function automatic int num_terms(circuit_e c, int n);
    case (c)
      CIRC_AND:                 return 3;
      CIRC_XOR_OR, CIRC_XOR_NOR: return 4;
      CIRC_HA:                  return 4;
      CIRC_HA_ALT, CIRC_FA:     return 5;
      CIRC_RCA:                 return 3 * n + 1;
      default:                  return 4 * n;
    endcase
  endfunction

  // Component netlist of a circuit: component q has kind[q] and its
  // terminals (in the order of the component's table) are nodes nd[q][0..4].
  typedef struct packed {
    logic [7:0]                      nc;
    logic [MAX_COMPS-1:0][2:0]       kind;
    logic [MAX_COMPS-1:0][4:0][7:0]  nd;
  } netlist_t;

  function automatic netlist_t netlist(circuit_e c, int n);
    netlist_t nl;
    int nc, nn, nb, s, cc, nxt, j, cout_node;
    int perm [MAX_NODES];
    int col  [MAX_COL*MAX_COL];      // column k, entry i: [k*MAX_COL+i]
    int ncol [MAX_COL];
    int carh [MAX_COL*MAX_COL];
    int ncarh[MAX_COL];
    int carf [MAX_COL*MAX_COL];
    int ncarf[MAX_COL];
    int bl   [3*MAX_COL];
    int ynode[MAX_COL];
    bit is_y;

    nl = '0;
    for (int i = 0; i < MAX_NODES; i++) perm[i] = i;
    for (int i = 0; i < MAX_COL; i++) begin
      ncol[i] = 0; ncarh[i] = 0; ncarf[i] = 0; ynode[i] = 0;
    end
    nc = 0;

    case (c)
      CIRC_AND, CIRC_XOR_OR, CIRC_XOR_NOR, CIRC_HA, CIRC_HA_ALT, CIRC_FA: begin
        nl.kind[0] = (c == CIRC_AND)     ? 3'(K_AND)     :
                     (c == CIRC_XOR_OR)  ? 3'(K_XOR_OR)  :
                     (c == CIRC_XOR_NOR) ? 3'(K_XOR_NOR) :
                     (c == CIRC_HA)      ? 3'(K_HA)      :
                     (c == CIRC_HA_ALT)  ? 3'(K_HA_ALT)  : 3'(K_FA);
        for (int a = 0; a < 5; a++) nl.nd[0][a] = 8'(a);  // published node order
        nc = 1;
      end
      CIRC_RCA: begin
        // carry into bit i (i >= 1) is node 3n+i; carry out of bit n-1 is Cout (3n)
        for (int i = 0; i < n; i++) begin
          cout_node = (i == n - 1) ? 3 * n : 3 * n + i + 1;
          if (i == 0) begin
            nl.kind[nc] = 3'(K_HA);
            nl.nd[nc][0] = 8'(0);     nl.nd[nc][1] = 8'(n);
            nl.nd[nc][2] = 8'(2 * n); nl.nd[nc][3] = 8'(cout_node);
          end else begin
            nl.kind[nc] = 3'(K_FA);
            nl.nd[nc][0] = 8'(i);         nl.nd[nc][1] = 8'(n + i);
            nl.nd[nc][2] = 8'(3 * n + i); nl.nd[nc][3] = 8'(2 * n + i);
            nl.nd[nc][4] = 8'(cout_node);
          end
          nc++;
        end
      end
      default: begin  // CIRC_MULT, built in a temporary numbering then permuted
        nn = 2 * n;
        // partial products A_i & B_j, one AND component each, by column i+j
        for (int k = 0; k <= 2 * n - 2; k++)
          for (int i = 0; i < n; i++) begin
            j = k - i;
            if (j >= 0 && j < n) begin
              nl.kind[nc] = 3'(K_AND);
              nl.nd[nc][0] = 8'(i); nl.nd[nc][1] = 8'(n + j); nl.nd[nc][2] = 8'(nn);
              nc++;
              col[k*MAX_COL + ncol[k]] = nn;
              ncol[k]++;
              nn++;
            end
          end
        // reduce every column to one result bit
        for (int k = 0; k < 2 * n; k++) begin
          nb = 0;
          for (int i = 0; i < ncol[k];  i++) begin bl[nb] = col[k*MAX_COL+i];  nb++; end
          for (int i = 0; i < ncarh[k]; i++) begin bl[nb] = carh[k*MAX_COL+i]; nb++; end
          for (int i = 0; i < ncarf[k]; i++) begin bl[nb] = carf[k*MAX_COL+i]; nb++; end
          while (nb >= 3) begin
            s = nn; cc = nn + 1; nn += 2;
            nl.kind[nc] = 3'(K_FA);
            nl.nd[nc][0] = 8'(bl[0]); nl.nd[nc][1] = 8'(bl[1]); nl.nd[nc][2] = 8'(bl[2]);
            nl.nd[nc][3] = 8'(s);     nl.nd[nc][4] = 8'(cc);
            nc++;
            for (int i = 0; i < nb - 3; i++) bl[i] = bl[i + 3];
            nb = nb - 3;
            bl[nb] = s;
            nb++;
            carf[(k+1)*MAX_COL + ncarf[k+1]] = cc;
            ncarf[k+1]++;
          end
          if (nb == 2) begin
            s = nn; cc = nn + 1; nn += 2;
            nl.kind[nc] = 3'(K_HA);
            nl.nd[nc][0] = 8'(bl[0]); nl.nd[nc][1] = 8'(bl[1]);
            nl.nd[nc][2] = 8'(s);     nl.nd[nc][3] = 8'(cc);
            nc++;
            bl[0] = s;
            nb = 1;
            carh[(k+1)*MAX_COL + ncarh[k+1]] = cc;
            ncarh[k+1]++;
          end
          if (nb == 1) ynode[k] = bl[0];
        end
        // Y_k goes to 2n+k; every other new node follows from 4n on.
        nxt = 4 * n;
        for (int t = 2 * n; t < nn; t++) begin
          is_y = 1'b0;
          for (int k = 0; k < 2 * n; k++)
            if (ynode[k] == t) begin
              perm[t] = 2 * n + k;
              is_y = 1'b1;
            end
          if (!is_y) begin
            perm[t] = nxt;
            nxt++;
          end
        end
        for (int q = 0; q < nc; q++)
          for (int a = 0; a < 5; a++)
            nl.nd[q][a] = 8'(perm[int'(nl.nd[q][a])]);
      end
    endcase
    nl.nc = 8'(nc);
    return nl;
  endfunction

  // Everything one neuron needs: its neighbours (nodes j with J_ij != 0, in
  // order of first appearance in the netlist), their weights J_ij, the bias
  // h_i and the constant leak h_i - sum_j J_ij. The leak turns AND-gated
  // {0,1} neighbour bits into the bipolar sum h_i + sum_j J_ij m_j.
  typedef struct packed {
    logic [7:0]                       fan;
    logic signed [15:0]               bias;
    logic signed [15:0]               leak;
    logic [MAX_FAN-1:0][7:0]          nbr;
    logic [MAX_FAN-1:0][7:0]          wt;    // signed J_ij
  } node_info_t;

  function automatic node_info_t node_info(circuit_e c, int n, int i);
    netlist_t   nl;
    node_info_t r;
    int kd, f, x, y, found, w, hsum, jsum;
    nl = netlist(c, n);
    r = '0;
    f = 0;
    hsum = 0;
    for (int q = 0; q < int'(nl.nc); q++) begin
      kd = int'(nl.kind[q]);
      for (int a = 0; a < comp_size(kd); a++) begin
        x = int'(nl.nd[q][a]);
        if (x == i) begin
          hsum += comp_h(kd, a);
          for (int b = 0; b < comp_size(kd); b++) begin
            y = int'(nl.nd[q][b]);
            if (b != a) begin
              found = -1;
              for (int k = 0; k < f; k++)
                if (int'(r.nbr[k]) == y) found = k;
              if (found < 0 && f < MAX_FAN) begin
                r.nbr[f] = 8'(y);
                r.wt[f]  = 8'(comp_j(kd, a, b));
                f++;
              end else if (found >= 0) begin
                w = int'($signed(r.wt[found])) + comp_j(kd, a, b);
                r.wt[found] = 8'(w);
              end
            end
          end
        end
      end
    end
    jsum = 0;
    for (int k = 0; k < f; k++) jsum += int'($signed(r.wt[k]));
    r.fan  = 8'(f);
    r.bias = 16'(hsum);
    r.leak = 16'(hsum - jsum);
    return r;
  endfunction

  // Distinct non-zero seed for PRNG number k (splitmix-style constants).
  function automatic logic [127:0] prng_seed(int k);
    logic [63:0] a, b;
    a = 64'h9E3779B97F4A7C15 ^ (64'(k) * 64'hBF58476D1CE4E5B9);
    b = 64'hD1B54A32D192ED03 ^ (64'(k) * 64'h94D049BB133111EB);
    if (a == 64'd0) a = 64'd1;
    return {b, a};
  endfunction

endpackage
