// ldpc_pkg: constants, label encoding and default look-up-table contents shared by the
// fully unrolled finite-alphabet LDPC decoder.
//
// Code: a (DV,DC) = (6,32)-regular code of length N = 2048 with M = 384 checks, the size of the
// 10GBASE-T (IEEE 802.3an) code. Its parity-check matrix is built here from DV x DC blocks of
// Z x Z cyclic permutation matrices (Z = 64). The block structure and sizes follow the 802.3an
// code; the permutations of the real standard are not reproduced: block (i,j) is the identity
// shifted by (i*j) mod Z, this design's own choice (see circ_shift).
//
// Labels: every message and channel LLR is a label in sign-magnitude form. The MSB is the sign
// (1 means "bit 1 is more likely", i.e. a negative LLR), the lower bits are a magnitude index
// 0 .. 2^(Q-1)-1 that orders the labels by reliability. Because the alphabets are symmetric
// the check node can run min-sum directly on the labels.
//
// LUT contents: a decoder built by the information-theoretic design method has one table set
// per iteration, tailored to a design SNR. Those tables are not published, so the defaults here
// implement a stand-in rule: a label stands for the odd integer s*(2*mag+1), a LUT adds the
// values of its inputs and re-quantises the sum (quant()). Any other table set can be passed in
// through the parameters of the stage modules without changing the hardware.
package ldpc_pkg;

  // ---------------- code and quantisation (defaults are the design's own numbers) -----------
  localparam int unsigned DV    = 6;         // variable node degree
  localparam int unsigned DC    = 32;        // check node degree
  localparam int unsigned Z     = 64;        // permutation block size
  localparam int unsigned N     = DC * Z;    // 2048 code bits
  localparam int unsigned M     = DV * Z;    // 384 checks
  localparam int unsigned ITER  = 5;         // decoding iterations I
  localparam int unsigned QMSG  = 3;         // message label bits
  localparam int unsigned QCH   = 4;         // channel LLR label bits

  // ---------------- LUT address widths --------------------------------------------------------
  // Variable node tree (dv = 6): level 1 pairs two CN messages, level 2 pairs two level-1
  // results, level 3 adds the fifth CN message, level 4 adds the channel LLR.
  localparam int unsigned VN_L1_AW = 2 * QMSG;          // 6
  localparam int unsigned VN_L4_AW = QMSG + QCH;        // 7
  // Decision node tree: two 3-input LUTs over CN messages, then a root with the LLR.
  localparam int unsigned DN_L1_AW = 3 * QMSG;          // 9
  localparam int unsigned DN_RT_AW = 2 * QMSG + QCH;    // 10

  // ---------------- Tanner graph ----------------------------------------------------------------
  // Block row i (0..DV-1), block column j (0..DC-1): check i*Z+r is connected to variable
  // j*Z + ((r + circ_shift(i,j,z)) mod z).
  function automatic int unsigned circ_shift(int unsigned i, int unsigned j, int unsigned z);
    return (i * j) % z;
  endfunction

  // ---------------- label arithmetic used only to fill the default tables --------------------
  function automatic int label_value(logic [15:0] lab, int unsigned q);
    int mag;
    mag = int'(lab) & ((1 << (q - 1)) - 1);
    return lab[q-1] ? -(2 * mag + 1) : (2 * mag + 1);
  endfunction

  // nearest-below re-quantisation of an integer sum to a q-bit label (saturating)
  function automatic logic [15:0] quant(int x, int unsigned q);
    int mag;
    int maxmag;
    logic [15:0] lab;
    maxmag = (1 << (q - 1)) - 1;
    mag    = ((x < 0) ? -x : x) / 2;
    if (mag > maxmag) mag = maxmag;
    lab = 16'(mag);
    if (x < 0) lab = lab | (16'd1 << (q - 1));
    return lab;
  endfunction

  // two Q_msg-bit inputs {a,b} -> Q_msg-bit label (VN tree levels 1..3)
  function automatic logic [(1<<VN_L1_AW)*QMSG-1:0] vn_pair_table();
    logic [(1<<VN_L1_AW)*QMSG-1:0] t;
    for (int a = 0; a < (1 << VN_L1_AW); a++) begin
      t[a*QMSG +: QMSG] = QMSG'(quant(label_value(16'(a >> QMSG), QMSG) +
                                      label_value(16'(a % (1 << QMSG)), QMSG), QMSG));
    end
    return t;
  endfunction

  // {message, LLR} -> Q_msg-bit label (VN tree level 4, the root)
  function automatic logic [(1<<VN_L4_AW)*QMSG-1:0] vn_root_table();
    logic [(1<<VN_L4_AW)*QMSG-1:0] t;
    for (int a = 0; a < (1 << VN_L4_AW); a++) begin
      t[a*QMSG +: QMSG] = QMSG'(quant(label_value(16'(a >> QCH), QMSG) +
                                      label_value(16'(a % (1 << QCH)), QCH), QMSG));
    end
    return t;
  endfunction

  // three Q_msg-bit messages -> Q_msg-bit label (decision tree, first level)
  function automatic logic [(1<<DN_L1_AW)*QMSG-1:0] dn_triple_table();
    logic [(1<<DN_L1_AW)*QMSG-1:0] t;
    for (int a = 0; a < (1 << DN_L1_AW); a++) begin
      t[a*QMSG +: QMSG] = QMSG'(quant(label_value(16'(a >> (2*QMSG)), QMSG) +
                                      label_value(16'((a >> QMSG) % (1 << QMSG)), QMSG) +
                                      label_value(16'(a % (1 << QMSG)), QMSG), QMSG));
    end
    return t;
  endfunction

  // {t1, t2, LLR} -> decoded bit (decision tree root): 1 when the summed value is negative
  function automatic logic [(1<<DN_RT_AW)-1:0] dn_root_table();
    logic [(1<<DN_RT_AW)-1:0] t;
    for (int a = 0; a < (1 << DN_RT_AW); a++) begin
      t[a] = (label_value(16'(a >> (QMSG + QCH)), QMSG) +
              label_value(16'((a >> QCH) % (1 << QMSG)), QMSG) +
              label_value(16'(a % (1 << QCH)), QCH)) < 0;
    end
    return t;
  endfunction

  // channel LLR label -> initial VN-to-CN message label
  function automatic logic [(1<<QCH)*QMSG-1:0] init_table();
    logic [(1<<QCH)*QMSG-1:0] t;
    for (int a = 0; a < (1 << QCH); a++) begin
      t[a*QMSG +: QMSG] = QMSG'(quant(label_value(16'(a), QCH), QMSG));
    end
    return t;
  endfunction

  // table types
  typedef logic [(1<<VN_L1_AW)*QMSG-1:0] vn_pair_tbl_t;
  typedef logic [(1<<VN_L4_AW)*QMSG-1:0] vn_root_tbl_t;
  typedef logic [(1<<DN_L1_AW)*QMSG-1:0] dn_triple_tbl_t;
  typedef logic [(1<<DN_RT_AW)-1:0]      dn_root_tbl_t;
  typedef logic [(1<<QCH)*QMSG-1:0]      init_tbl_t;

  localparam vn_pair_tbl_t   VN_PAIR_DEFAULT   = vn_pair_table();
  localparam vn_root_tbl_t   VN_ROOT_DEFAULT   = vn_root_table();
  localparam dn_triple_tbl_t DN_TRIPLE_DEFAULT = dn_triple_table();
  localparam dn_root_tbl_t   DN_ROOT_DEFAULT   = dn_root_table();
  localparam init_tbl_t      INIT_DEFAULT      = init_table();

endpackage
