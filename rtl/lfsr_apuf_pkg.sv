// lfsr_apuf_pkg: constants and types shared by the LFSR-APUF and the
// authentication datapath.
//
// The LFSR-APUF takes an (N+4)-bit external challenge C. N bits (C1) seed an
// N-stage Galois LFSR; the other 4 bits (C2) choose how often the LFSR is
// shifted (C2 * Base times) before its state drives the arbiter PUF. The
// numbers 64 (stages) and 4 (C2 width), the block segmentation with C2 first,
// and Cover's l = 128 / t = 10 follow the paper. The Base field width, the
// default tap polynomial, the vote count and the protocol field widths are
// this design's own choices and are marked as such below.
package lfsr_apuf_pkg;

  // Stages of the arbiter PUF and of the LFSR (paper: 64).
  localparam int unsigned PUF_STAGES = 64;
  // Width of the shift selector C2 (paper: 4).
  localparam int unsigned C2_WIDTH   = 4;
  // Width of the per-round Base value. Own choice: 8 bits hold every Base the
  // paper evaluates (0..20) and its recommended 10.
  localparam int unsigned BASE_WIDTH = 8;
  // Base used when the LFSR-APUF runs on its own (paper recommends 10).
  localparam int unsigned BASE_RECOMMENDED = 10;

  // Galois tap mask for x^64 + x^63 + x^61 + x^60 + 1, a maximal-length
  // polynomial from the usual LFSR tap tables. The
  // paper assigns each device its own primitive polynomial p_k but prints
  // none; this is only the default.
  localparam logic [63:0] POLY64_DEFAULT = 64'hD800_0000_0000_0000;
  // x^32 + x^22 + x^2 + x + 1, for the 32-stage variant.
  localparam logic [31:0] POLY32_DEFAULT = 32'h8020_0003;

  // Width of one covered protocol message {n_c, Base, r}: the full external
  // challenge, the Base field and the N-bit response. 140 bits for N = 64.
  localparam int unsigned MSG_WIDTH = 2 * PUF_STAGES + C2_WIDTH + BASE_WIDTH;

  // Cover function sizes (paper: l = 128, t = 10).
  localparam int unsigned COVER_L = 128;
  localparam int unsigned COVER_T = 10;

  // Votes per sub-challenge and the agreement needed to call a bit stable.
  // Own choice: the paper names voting and soft dark-bit masking only.
  localparam int unsigned VOTE_COUNT      = 5;
  localparam int unsigned VOTE_STABLE_MIN = 4;

  // Device identity and database index widths. ID width is an own choice;
  // the index width follows the paper's "length(ind) = 138".
  localparam int unsigned ID_WIDTH  = 32;
  localparam int unsigned IND_WIDTH = 138;

  // Messages the device sends to the server (Fig. 11 arrows 1, 3, 9 and the
  // registration response of Fig. 10).
  typedef enum logic [1:0] {
    MSG_ID      = 2'd0,   // ID_k
    MSG_ND_IND  = 2'd1,   // n_d || ind_i1
    MSG_RESP_R  = 2'd2,   // r_i (registration)
    MSG_RESP_RJ = 2'd3    // r_j' (authentication step 9)
  } dev_msg_e;

  // Outcome of one device run.
  typedef enum logic [1:0] {
    RES_NONE        = 2'd0,
    RES_REGISTERED  = 2'd1,
    RES_SERVER_OK   = 2'd2,   // r_i' == r_i, r_j' sent
    RES_ABORT       = 2'd3    // r_i' != r_i, server rejected
  } dev_result_e;

endpackage
