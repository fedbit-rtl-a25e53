// fedbit_pkg: constants and types shared by the BFV encryption/decryption accelerator.
//
// The ring is Z_q[X]/(X^N+1) with N = 4096 and the plaintext modulus t = 2281701377. Both
// numbers are the evaluated configuration. The ciphertext modulus q is kept in residue
// number system (RNS) form as QNUM limbs. Each limb is a 32-bit NTT-friendly prime,
// q_i = 1 (mod 2N). The limb count, the limb width and the primes themselves are this
// design's choice: the source names an RNS basis with "qNum" limbs but gives no numbers.
// Three 32-bit limbs give a 96-bit q. That stays under the 109-bit bound the homomorphic
// encryption standard sets for 128-bit security at N = 4096.
//
// Every polynomial buffer is split per limb into NBANK = sqrt(N) = 64 banks, each NBANK
// words deep. Coefficient index c sits in bank c % NBANK, at row c / NBANK. A "row" is the
// NBANK words that share one row index, one word from each bank.
//
// The constants below follow from the primes. psi is a primitive 2N-th root of unity mod
// q_i. N_INV = N^-1 mod q_i. MU = floor(2^64 / q_i) is the Barrett constant.
// DELTA = floor(q / t). DELTA_MOD = DELTA mod q_i. QSTAR = q / q_i, and
// QSTAR_INV = QSTAR^-1 mod q_i; the CRT needs both.
package fedbit_pkg;

  localparam int unsigned N       = 4096;              // polynomial degree
  localparam int unsigned LOGN    = 12;
  localparam int unsigned NBANK   = 64;                // n = sqrt(N) banks, n rows deep
  localparam int unsigned LOGB    = 6;
  localparam int unsigned QNUM    = 3;                 // RNS limbs
  localparam int unsigned W       = 32;                // bits per limb coefficient
  localparam int unsigned QW      = QNUM * W;          // bits of the full modulus q
  localparam int unsigned DDR_AW  = 32;                // DDR word address width

  typedef logic [W-1:0]      coeff_t;
  typedef logic [LOGN-1:0]   caddr_t;                  // coefficient index 0..N-1
  typedef logic [LOGB-1:0]   raddr_t;                  // row index 0..NBANK-1
  typedef logic [1:0]        bufsel_t;                 // BRAM0..BRAM2

  localparam logic [31:0] T_PLAIN = 32'd2281701377;

  localparam logic [W-1:0] Q     [QNUM] = '{32'd4294828033, 32'd4294729729, 32'd4294483969};
  localparam logic [W-1:0] PSI   [QNUM] = '{32'd1953722822, 32'd2971225970, 32'd4141853834};
  localparam logic [W-1:0] PSI_INV[QNUM]= '{32'd3374782581, 32'd2225874136, 32'd3979518161};
  localparam logic [W-1:0] N_INV [QNUM] = '{32'd4293779491, 32'd4293681211, 32'd4293435511};
  localparam logic [W:0]   MU    [QNUM] = '{33'd4295106563, 33'd4295204876, 33'd4295450677};
  localparam logic [W-1:0] DELTA_MOD[QNUM] = '{32'd3099715006, 32'd3099480832, 32'd3351512064};
  localparam logic [2*W-1:0] QSTAR [QNUM] = '{64'hfff5001cbbf50001, 64'hfff68011abf68001,
                                              64'hfffa4009b3fa4001};
  localparam logic [W-1:0] QSTAR_INV[QNUM] = '{32'd3536398256, 32'd3638632697, 32'd1414428506};
  localparam logic [QW-1:0] Q_FULL = 96'hfff2e0351bacf0b51bf2e001;
  localparam logic [QW-1:0] DELTA  = 96'h1e1c92d8d9a25331d;

  // One request to a polynomial buffer. In row mode the port touches row addr[LOGN-1:LOGB]
  // of every bank. In word mode it touches the single coefficient addr. we has one bit per
  // limb. In word mode only wdata[l][0] is used.
  typedef struct packed {
    logic                                  row_mode;
    caddr_t                                addr;
    logic [QNUM-1:0]                       we;
    logic [QNUM-1:0][NBANK-1:0][W-1:0]     wdata;
  } buf_req_t;

  typedef logic [QNUM-1:0][NBANK-1:0][W-1:0] row_data_t;
  typedef logic [QNUM-1:0][W-1:0]            word_data_t;

  localparam buf_req_t BUF_IDLE = '0;

  // Element-wise operations of the vector unit. Each runs row by row over one polynomial.
  typedef enum logic [2:0] {
    VOP_ADD    = 3'd0,   // dst = A + B
    VOP_MUL    = 3'd1,   // dst = A * B   (NTT domain)
    VOP_NEG    = 3'd2,   // dst = -A
    VOP_SCALE  = 3'd3,   // dst = DELTA * A
    VOP_MULNEG = 3'd4    // dst = A * B and A = -A, in the same pass
  } vop_e;

  // Host commands accepted by the FPGA controller.
  typedef enum logic [2:0] {
    CMD_LOAD  = 3'd0,    // DDR -> BRAM[buf]
    CMD_STORE = 3'd1,    // BRAM[buf] -> DDR
    CMD_PREP  = 3'd2,    // precompute NTT(-a) and as+e
    CMD_ENC   = 3'd3,    // c0 = as+e+DELTA*m, c1 = NTT(-a)
    CMD_DEC   = 3'd4,    // m' = round((c0 + c1*s)/DELTA) mod t
    CMD_NTT   = 3'd5,    // BRAM[buf] <- NTT(BRAM[buf])
    CMD_INTT  = 3'd6     // BRAM[buf] <- INTT(BRAM[buf])
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e            op;
    bufsel_t            buf_id;
    logic [DDR_AW-1:0]  ddr_addr;
  } host_cmd_t;

  // Macro operations run by the crypto engine's scheduler.
  typedef enum logic [2:0] {
    EOP_PREP = 3'd0,
    EOP_ENC  = 3'd1,
    EOP_DEC  = 3'd2,
    EOP_NTT  = 3'd3,
    EOP_INTT = 3'd4
  } eng_op_e;

  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] x);
    for (int i = 0; i < LOGN; i++) bitrev[i] = x[LOGN-1-i];
  endfunction

endpackage
