// ldpc_unrolled_decoder: fully unrolled, fully parallel finite-alphabet LDPC decoder.
//
// Every decoding iteration has its own hardware, so the decoder is a systolic pipeline of
// 2*ITER stages through which codewords flow left to right:
//   llr_in -> [LLR->message map] -> VN-CN routing -> CN stage 1 -> CN-VN routing ->
//   VN stage 1 -> VN-CN routing -> CN stage 2 -> ... -> CN stage ITER -> CN-VN routing ->
//   DN stage -> codeword
// i.e. ITER check-node stages, ITER-1 LUT-based variable-node stages and one decision-node
// stage. Each stage registers its output messages, and every stage except the last also
// registers the N channel LLRs it forwards to later stages.
// Interface: one frame of N channel LLR labels (Q_ch-bit sign-magnitude, index n = code
// bit n) is taken on every rising clock edge; the hard decisions of the frame presented
// 2*ITER edges earlier appear on codeword (bit n = 1 means code bit 1). There is no
// handshake and no control logic besides clock and asynchronous active-low reset: the
// caller keeps the input valid every cycle and counts the latency itself.
// The look-up tables of VN stage k (k = 0..ITER-2) are VN_T1[k]..VN_T4[k]; the decision
// stage uses DN_TA and DN_TR; the initial LLR-to-message map uses INIT_T. Defaults are the
// stand-in tables of ldpc_pkg, identical for all iterations.
// Follows the paper: stage order, register placement, 2*ITER-cycle latency, one frame per
// cycle, the CN/VN/DN structure. This design's own: the parity-check permutations, the
// LLR-to-message map, the reset style and the default LUT contents.
module ldpc_unrolled_decoder #(
  parameter int unsigned Z    = ldpc_pkg::Z,
  parameter int unsigned DC   = ldpc_pkg::DC,
  parameter int unsigned ITER = ldpc_pkg::ITER,
  parameter ldpc_pkg::init_tbl_t      INIT_T = ldpc_pkg::INIT_DEFAULT,
  parameter ldpc_pkg::vn_pair_tbl_t   VN_T1 [ITER-1] = '{default: ldpc_pkg::VN_PAIR_DEFAULT},
  parameter ldpc_pkg::vn_pair_tbl_t   VN_T2 [ITER-1] = '{default: ldpc_pkg::VN_PAIR_DEFAULT},
  parameter ldpc_pkg::vn_pair_tbl_t   VN_T3 [ITER-1] = '{default: ldpc_pkg::VN_PAIR_DEFAULT},
  parameter ldpc_pkg::vn_root_tbl_t   VN_T4 [ITER-1] = '{default: ldpc_pkg::VN_ROOT_DEFAULT},
  parameter ldpc_pkg::dn_triple_tbl_t DN_TA = ldpc_pkg::DN_TRIPLE_DEFAULT,
  parameter ldpc_pkg::dn_root_tbl_t   DN_TR = ldpc_pkg::DN_ROOT_DEFAULT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [ldpc_pkg::QCH-1:0]  llr_in [DC*Z],
  output logic [DC*Z-1:0]           codeword
);
  localparam int unsigned N  = DC * Z;
  localparam int unsigned M  = ldpc_pkg::DV * Z;
  localparam int unsigned DV = ldpc_pkg::DV;
  localparam int unsigned QM = ldpc_pkg::QMSG;
  localparam int unsigned QC = ldpc_pkg::QCH;

  initial begin
    assert (ITER >= 2) else $fatal(1, "ldpc_unrolled_decoder: ITER must be at least 2");
  end

  // VN-ordered messages entering CN stage s (s = 0: from the LLR map)
  logic [QM-1:0] v2c   [ITER][N][DV];
  logic [QM-1:0] c_in  [ITER][M][DC];
  logic [QM-1:0] c_out [ITER][M][DC];
  logic [QC-1:0] c_llr [ITER][N];
  logic [QC-1:0] c_lin [ITER][N];   // LLRs entering CN stage s
  // CN-VN routed messages entering VN stage s (s = ITER-1: the DN stage)
  logic [QM-1:0] c2v   [ITER][N][DV];
  logic [QC-1:0] v_llr [ITER-1][N];

  llr_msg_map #(.N(N), .TI(INIT_T)) u_map (.llr(llr_in), .vmsg(v2c[0]));

  for (genvar s = 0; s < ITER; s++) begin : g_it
    if (s == 0) begin : g_lin0
      assign c_lin[s] = llr_in;
    end else begin : g_lin
      assign c_lin[s] = v_llr[s-1];
    end

    vn_cn_router #(.Z(Z), .DC(DC)) u_v2c (.vmsg(v2c[s]), .cmsg(c_in[s]));

    cn_stage #(.Z(Z), .DC(DC)) u_cn (
      .clk, .rst_n,
      .msg_in (c_in[s]),
      .llr_in (c_lin[s]),
      .msg_out(c_out[s]),
      .llr_out(c_llr[s]));

    cn_vn_router #(.Z(Z), .DC(DC)) u_c2v (.cmsg(c_out[s]), .vmsg(c2v[s]));

    if (s < ITER - 1) begin : g_vn
      vn_stage #(.Z(Z), .DC(DC),
                 .T1(VN_T1[s]), .T2(VN_T2[s]), .T3(VN_T3[s]), .T4(VN_T4[s])) u_vn (
        .clk, .rst_n,
        .msg_in (c2v[s]),
        .llr_in (c_llr[s]),
        .msg_out(v2c[s+1]),
        .llr_out(v_llr[s]));
    end else begin : g_dn
      dn_stage #(.Z(Z), .DC(DC), .TA(DN_TA), .TR(DN_TR)) u_dn (
        .clk, .rst_n,
        .msg_in  (c2v[s]),
        .llr_in  (c_llr[s]),
        .codeword(codeword));
    end
  end
endmodule
