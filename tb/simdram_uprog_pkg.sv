// simdram_uprog_pkg: a library of uPrograms for the SIMDRAM control unit,
// used by the testbenches in the role of the host-side framework that turns
// an operation into MAJ/NOT form and then into row activations.
//
// Operand slots: row[0] = destination, row[1] = A, row[2] = B, row[3] =
// scratch rows (ADD/SUB/GT/RELU/EQ/MUL/BITCOUNT), the 1-bit predicate row
// (ITE) or the third n-bit source (AND3/OR3). All
// operands are vertical: bit i of every lane is in row base+i.
// Reserved rows: T0..T3, DCC0/DCC1 (written complemented through B5/B7),
// triples B12 = {T0,T1,T2}, B13 = {T1,T2,T3}, B14 = {DCC0,T1,T2},
// B15 = {DCC1,T0,T3}; C0/C1 constant rows.
// Formulas, per bit i (C = carry row, MAJ = bitwise majority):
//   AND  = MAJ(A, B, 0)              OR  = MAJ(A, B, 1)
//   XOR  = MAJ(MAJ(A,B,1), !MAJ(A,B,0), 0)
//   ADD  : Cout = MAJ(A, B, C); S = MAJ(!Cout, C, MAJ(A, B, !C)); C0 = 0
//   SUB  : ADD of A and !B with C0 = 1
//   GT   : C = MAJ(A, !B, C) over all bits, C0 = 0; A > B (unsigned) = final C
//   RELU : D = A AND !A[n-1]                     (signed input)
//   ITE  : D = MAJ(MAJ(P, A, 0), MAJ(!P, B, 0), 1)   (P ? A : B)
//   EQ   : E = MAJ(E, !XOR(A, B), 0) over all bits, E0 = 1; 1-bit result
//   MUL  : for each bit j of B (outer loop), for each bit i of A (inner loop):
//          P[i+j] += A[i] & B[j] with the ripple carry; P[n+j] = final carry.
//          The product has 2n bits; scratch rows row[3]+0 (carry), +1.
//   AND3 : D = MAJ(MAJ(A, B, 0), C, 0)    OR3: D = MAJ(MAJ(A, B, 1), C, 1)
//          (3-input logic; the third n-bit operand C is in row[3])
//   BITCOUNT : D = number of ones in A. For each bit j of A (outer loop) the
//          n-bit counter D is incremented by A[j] with a half-adder chain
//          (inner loop): sum = XOR(D[i], c), c = D[i] AND c.
//   SHL  : left shift by one as row copies, D[i+1] = A[i], D[0] = 0;
//          (n+1)-bit result, nothing is lost.
//   DIV  : restoring division Q = A / B (unsigned; B = 0 gives all ones).
//          For k = n-1 down to 0 (outer loop): T = (R << 1) | A[k] by row
//          copies; D = T - B (n-bit ripple subtract, carry-in 1);
//          q = T[n] | carry-out (T >= B); Q[k] = q; R = q ? D : T (ITE).
//          Scratch from row[3]: R +0..63, T +64..128, D +129..192,
//          carry +194, q +195, !B +196.
package simdram_uprog_pkg;
  import simdram_pkg::*;

  typedef enum int {
    OP_AND = 0, OP_OR = 1, OP_XOR = 2, OP_ADD = 3, OP_SUB = 4,
    OP_GT = 5, OP_RELU = 6, OP_ITE = 7, OP_EQ = 8, OP_MUL = 9,
    OP_AND3 = 10, OP_OR3 = 11, OP_BITCOUNT = 12, OP_SHL = 13, OP_DIV = 14
  } op_e;
  localparam int N_LIB_OPS = 15;

  function automatic uaddr_t a_abs(input row_t r);
    uaddr_t a; a.mode = AM_ABS; a.opnd = 2'd0; a.imm = r; return a;
  endfunction
  function automatic uaddr_t a_base(input int k, input int imm);
    uaddr_t a; a.mode = AM_BASE; a.opnd = 2'(k); a.imm = row_t'(imm); return a;
  endfunction
  function automatic uaddr_t a_bit(input int k);
    uaddr_t a; a.mode = AM_BIT; a.opnd = 2'(k); a.imm = '0; return a;
  endfunction
  function automatic uaddr_t a_msb(input int k);
    uaddr_t a; a.mode = AM_MSB; a.opnd = 2'(k); a.imm = '0; return a;
  endfunction
  function automatic uaddr_t a_bitp(input int k, input int imm);
    uaddr_t a; a.mode = AM_BIT; a.opnd = 2'(k); a.imm = row_t'(imm); return a;
  endfunction
  function automatic uaddr_t a_rj(input int k);
    uaddr_t a; a.mode = AM_RJ; a.opnd = 2'(k); a.imm = '0; return a;
  endfunction
  function automatic uaddr_t a_j(input int k);
    uaddr_t a; a.mode = AM_J; a.opnd = 2'(k); a.imm = '0; return a;
  endfunction
  function automatic uaddr_t a_ij(input int k);
    uaddr_t a; a.mode = AM_IJ; a.opnd = 2'(k); a.imm = '0; return a;
  endfunction
  function automatic uaddr_t a_nj(input int k);
    uaddr_t a; a.mode = AM_NJ; a.opnd = 2'(k); a.imm = '0; return a;
  endfunction

  function automatic uop_t u_aap(input uaddr_t s, input uaddr_t d);
    uop_t u; u.kind = UOP_AAP; u.src = s; u.dst = d; return u;
  endfunction
  function automatic uop_t u_ap(input uaddr_t s);
    uop_t u; u.kind = UOP_AP; u.src = s; u.dst = '0; return u;
  endfunction
  function automatic uop_t u_loop(input int target);
    uop_t u; u.kind = UOP_LOOP; u.src = a_abs(row_t'(target)); u.dst = '0; return u;
  endfunction
  function automatic uop_t u_loopj(input int target);
    uop_t u; u.kind = UOP_LOOPJ; u.src = a_abs(row_t'(target)); u.dst = '0; return u;
  endfunction
  function automatic uop_t u_done();
    uop_t u; u.kind = UOP_DONE; u.src = '0; u.dst = '0; return u;
  endfunction

  // XOR of rows A and B, left in T1.
  function automatic void xor_body(input uaddr_t A, input uaddr_t B, ref uop_t p[$]);
    p.push_back(u_aap(A, a_abs(ROW_T0)));
    p.push_back(u_aap(B, a_abs(ROW_T1)));
    p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
    p.push_back(u_ap(a_abs(ROW_TRA012)));               // T0 = A&B
    p.push_back(u_aap(a_abs(ROW_T0), a_abs(ROW_NDCC0)));  // DCC0 = !(A&B)
    p.push_back(u_aap(A, a_abs(ROW_T1)));
    p.push_back(u_aap(B, a_abs(ROW_T2)));
    p.push_back(u_aap(a_abs(ROW_C1), a_abs(ROW_T3)));
    p.push_back(u_ap(a_abs(ROW_TRA123)));               // T1 = A|B
    p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
    p.push_back(u_ap(a_abs(ROW_TRAD12)));               // T1 = XOR
  endfunction

  // One full-adder step: D = A + B + C (sum bit), C = carry out.
  function automatic void add_body(input uaddr_t A, input uaddr_t B, input uaddr_t C,
                                   input uaddr_t D, ref uop_t p[$]);
    p.push_back(u_aap(C, a_abs(ROW_B9)));               // DCC1 = !C, T1 = C
    p.push_back(u_aap(A, a_abs(ROW_T0)));
    p.push_back(u_aap(B, a_abs(ROW_T3)));
    p.push_back(u_ap(a_abs(ROW_TRAD03)));               // T0 = X = MAJ(A,B,!C)
    p.push_back(u_aap(A, a_abs(ROW_T2)));
    p.push_back(u_aap(B, a_abs(ROW_T3)));
    p.push_back(u_ap(a_abs(ROW_TRA123)));               // T1,T2,T3 = Cout
    p.push_back(u_aap(a_abs(ROW_T1), a_abs(ROW_NDCC0))); // DCC0 = !Cout
    p.push_back(u_aap(C, a_abs(ROW_T1)));               // T1 = C
    p.push_back(u_aap(a_abs(ROW_T0), a_abs(ROW_T2)));   // T2 = X
    p.push_back(u_ap(a_abs(ROW_TRAD12)));               // T1 = S
    p.push_back(u_aap(a_abs(ROW_T1), D));
    p.push_back(u_aap(a_abs(ROW_T3), C));               // C = Cout
  endfunction

  // Appends the uProgram of `op` to `p`; `org` is the uProgram memory address
  // of p[0], needed for absolute loop targets.
  function automatic void build_op(input op_e op, input int org, ref uop_t p[$]);
    int body;
    uaddr_t A, B, D, S, S2;
    A = a_bit(1); B = a_bit(2); D = a_bit(0);
    S = a_base(3, 0); S2 = a_base(3, 1);
    unique case (op)
      OP_AND, OP_OR: begin
        body = org + p.size();
        p.push_back(u_aap(A, a_abs(ROW_T0)));
        p.push_back(u_aap(B, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(op == OP_AND ? ROW_C0 : ROW_C1), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));
        p.push_back(u_aap(a_abs(ROW_T0), D));
        p.push_back(u_loop(body));
      end
      OP_XOR: begin
        body = org + p.size();
        xor_body(A, B, p);
        p.push_back(u_aap(a_abs(ROW_T1), D));
        p.push_back(u_loop(body));
      end
      OP_ADD, OP_SUB: begin
        uaddr_t Bs;
        p.push_back(u_aap(a_abs(op == OP_ADD ? ROW_C0 : ROW_C1), S));  // carry-in
        body = org + p.size();
        if (op == OP_SUB) begin
          p.push_back(u_aap(B, a_abs(ROW_NDCC0)));          // DCC0 = !B
          p.push_back(u_aap(a_abs(ROW_DCC0), S2));          // S2 = !B
          Bs = S2;
        end else begin
          Bs = B;
        end
        add_body(A, Bs, S, D, p);
        p.push_back(u_loop(body));
      end
      OP_GT: begin
        p.push_back(u_aap(a_abs(ROW_C0), S));
        body = org + p.size();
        p.push_back(u_aap(B, a_abs(ROW_NDCC0)));            // DCC0 = !B
        p.push_back(u_aap(A, a_abs(ROW_T1)));
        p.push_back(u_aap(S, a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRAD12)));               // MAJ(!B, A, C)
        p.push_back(u_aap(a_abs(ROW_T1), S));
        p.push_back(u_loop(body));
        p.push_back(u_aap(S, a_base(0, 0)));                // 1-bit result row
      end
      OP_RELU: begin
        p.push_back(u_aap(a_msb(1), a_abs(ROW_NDCC0)));     // DCC0 = !sign
        p.push_back(u_aap(a_abs(ROW_DCC0), S));
        body = org + p.size();
        p.push_back(u_aap(S, a_abs(ROW_T0)));
        p.push_back(u_aap(A, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));
        p.push_back(u_aap(a_abs(ROW_T0), D));
        p.push_back(u_loop(body));
      end
      OP_EQ: begin
        p.push_back(u_aap(a_abs(ROW_C1), S));               // all bits equal so far
        body = org + p.size();
        xor_body(A, B, p);
        p.push_back(u_aap(a_abs(ROW_T1), a_abs(ROW_NDCC0))); // DCC0 = !XOR
        p.push_back(u_aap(S, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRAD12)));               // S & !XOR
        p.push_back(u_aap(a_abs(ROW_T1), S));
        p.push_back(u_loop(body));
        p.push_back(u_aap(S, a_base(0, 0)));                // 1-bit result row
      end
      OP_MUL: begin  // 2n-bit product: for each bit j of B, add (A & B[j]) << j
        int outer;
        body = org + p.size();
        p.push_back(u_aap(a_abs(ROW_C0), D));               // clear P[0..n-1]
        p.push_back(u_loop(body));
        outer = org + p.size();
        p.push_back(u_aap(a_abs(ROW_C0), S));               // carry = 0
        body = org + p.size();
        p.push_back(u_aap(A, a_abs(ROW_T0)));
        p.push_back(u_aap(a_j(2), a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // A[i] & B[j]
        p.push_back(u_aap(a_abs(ROW_T0), S2));
        add_body(a_ij(0), S2, S, a_ij(0), p);               // P[i+j] += partial + C
        p.push_back(u_loop(body));
        p.push_back(u_aap(S, a_nj(0)));                     // P[n+j] = carry
        p.push_back(u_loopj(outer));
      end
      OP_AND3, OP_OR3: begin
        row_t k = (op == OP_AND3) ? ROW_C0 : ROW_C1;
        body = org + p.size();
        p.push_back(u_aap(A, a_abs(ROW_T0)));
        p.push_back(u_aap(B, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(k), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // T0 = A op B
        p.push_back(u_aap(a_bit(3), a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(k), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // T0 = A op B op C
        p.push_back(u_aap(a_abs(ROW_T0), D));
        p.push_back(u_loop(body));
      end
      OP_SHL: begin
        uaddr_t d1 = a_bit(0);
        d1.imm = row_t'(1);
        p.push_back(u_aap(a_abs(ROW_C0), a_base(0, 0)));
        body = org + p.size();
        p.push_back(u_aap(A, d1));
        p.push_back(u_loop(body));
      end
      OP_DIV: begin
        int outer;
        uaddr_t R, T, Dd, T0r, Rm, cy, q, nb;
        R  = a_bitp(3, 0);   T  = a_bitp(3, 64);  Dd = a_bitp(3, 129);
        T0r = a_base(3, 64); cy = a_base(3, 194); q = a_base(3, 195); nb = a_base(3, 196);
        Rm = a_msb(3);                                      // R[n-1]
        body = org + p.size();
        p.push_back(u_aap(a_abs(ROW_C0), R));               // R = 0
        p.push_back(u_loop(body));
        outer = org + p.size();
        body = org + p.size();
        p.push_back(u_aap(R, a_bitp(3, 65)));               // T[i+1] = R[i]
        p.push_back(u_loop(body));
        p.push_back(u_aap(a_rj(1), T0r));                   // T[0] = A[k]
        p.push_back(u_aap(a_abs(ROW_C1), cy));              // carry-in 1
        body = org + p.size();
        p.push_back(u_aap(B, a_abs(ROW_NDCC0)));
        p.push_back(u_aap(a_abs(ROW_DCC0), nb));            // !B[i]
        add_body(T, nb, cy, Dd, p);                         // D = T - B
        p.push_back(u_loop(body));
        p.push_back(u_aap(Rm, a_abs(ROW_T0)));              // T[n] = R[n-1]
        p.push_back(u_aap(cy, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C1), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // q = T[n] | carry
        p.push_back(u_aap(a_abs(ROW_T0), q));
        p.push_back(u_aap(a_abs(ROW_T0), a_rj(0)));         // Q[k] = q
        body = org + p.size();
        p.push_back(u_aap(q, a_abs(ROW_T0)));
        p.push_back(u_aap(Dd, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // q & D
        p.push_back(u_aap(q, a_abs(ROW_NDCC0)));            // DCC0 = !q
        p.push_back(u_aap(T, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRAD12)));               // !q & T
        p.push_back(u_aap(a_abs(ROW_C1), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // R[i] = q ? D : T
        p.push_back(u_aap(a_abs(ROW_T0), R));
        p.push_back(u_loop(body));
        p.push_back(u_loopj(outer));
      end
      OP_BITCOUNT: begin
        int outer;
        body = org + p.size();
        p.push_back(u_aap(a_abs(ROW_C0), D));               // counter = 0
        p.push_back(u_loop(body));
        outer = org + p.size();
        p.push_back(u_aap(a_j(1), S));                      // c = A[j]
        body = org + p.size();
        xor_body(D, S, p);                                  // T1 = D[i] ^ c, T0 = D[i] & c
        p.push_back(u_aap(a_abs(ROW_T1), D));
        p.push_back(u_aap(a_abs(ROW_T0), S));
        p.push_back(u_loop(body));
        p.push_back(u_loopj(outer));
      end
      default: begin  // OP_ITE, predicate in row[3]
        body = org + p.size();
        p.push_back(u_aap(S, a_abs(ROW_T0)));
        p.push_back(u_aap(A, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // T0 = P & A
        p.push_back(u_aap(S, a_abs(ROW_NDCC0)));            // DCC0 = !P
        p.push_back(u_aap(B, a_abs(ROW_T1)));
        p.push_back(u_aap(a_abs(ROW_C0), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRAD12)));               // T1 = !P & B
        p.push_back(u_aap(a_abs(ROW_C1), a_abs(ROW_T2)));
        p.push_back(u_ap(a_abs(ROW_TRA012)));               // T0 = OR
        p.push_back(u_aap(a_abs(ROW_T0), D));
        p.push_back(u_loop(body));
      end
    endcase
    p.push_back(u_done());
  endfunction

  // Whole library: program image and start address of each operation.
  function automatic void build_library(ref uop_t p[$], ref int start[N_LIB_OPS]);
    p.delete();
    for (int o = 0; o < N_LIB_OPS; o++) begin
      start[o] = p.size();
      build_op(op_e'(o), 0, p);  // p already holds the earlier programs
    end
  endfunction

  // Number of AAP and AP requests an operation issues for n-bit elements.
  function automatic void count_requests(input op_e op, input int n,
                                         output int n_aap, output int n_ap);
    uop_t p[$]; int pc, i, j, guard;
    build_op(op, 0, p);
    n_aap = 0; n_ap = 0; pc = 0; i = 0; j = 0; guard = 0;
    while (p[pc].kind != UOP_DONE && guard < 1000000) begin
      guard++;
      unique case (p[pc].kind)
        UOP_AAP: begin n_aap++; pc++; end
        UOP_AP:  begin n_ap++;  pc++; end
        UOP_LOOP: begin
          if (i + 1 < n) begin i++; pc = int'(p[pc].src.imm); end else begin i = 0; pc++; end
        end
        default: begin
          if (j + 1 < n) begin j++; pc = int'(p[pc].src.imm); end else begin j = 0; pc++; end
        end
      endcase
    end
  endfunction

  // Rows an operation's result occupies.
  function automatic int result_bits(input op_e op, input int n);
    if (op == OP_GT || op == OP_EQ) return 1;
    if (op == OP_MUL) return 2 * n;
    if (op == OP_SHL) return n + 1;
    return n;
  endfunction

  // Reference results, computed directly on the lane values.
  function automatic longint unsigned ref_op(input op_e op, input int n,
      input longint unsigned a, input longint unsigned b, input bit pred,
      input longint unsigned c = 0);
    longint unsigned m, mn, r;
    m  = (result_bits(op, n) >= 64) ? '1 : ((64'd1 << result_bits(op, n)) - 1);
    mn = (n >= 64) ? '1 : ((64'd1 << n) - 1);
    a &= mn;
    b &= mn;
    c &= mn;
    unique case (op)
      OP_AND:  r = a & b;
      OP_OR:   r = a | b;
      OP_XOR:  r = a ^ b;
      OP_ADD:  r = a + b;
      OP_SUB:  r = a - b;
      OP_GT:   r = (a > b) ? 1 : 0;
      OP_EQ:   r = (a == b) ? 1 : 0;
      OP_MUL:  r = a * b;
      OP_AND3: r = a & b & c;
      OP_OR3:  r = a | b | c;
      OP_BITCOUNT: r = longint'($countones(a));
      OP_SHL:  r = a << 1;
      OP_DIV:  r = (b == 0) ? '1 : a / b;
      OP_RELU: r = a[n-1] ? 0 : a;
      default: r = pred ? a : b;
    endcase
    return r & m;
  endfunction

endpackage
