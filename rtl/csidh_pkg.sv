// csidh_pkg: types and constants shared by the CSIDH accelerator.
//
// Holds the CSIDH-512 prime p = 4*3*5*...*373*587 - 1 and its Montgomery
// constants for R = 2^512 (pinv = -p^-1 mod R, R^2 mod p, R mod p), the list
// of the 74 small odd primes l_i, the field-engine command and response
// structs that every control FSM uses to drive the shared ALU, and the fixed
// register map of the operand register file.  The prime and the prime list are
// those of CSIDH-512; the register map, operation encoding and struct layout
// are this design's own choices.
package csidh_pkg;

  localparam int WORD = 32;            // ALU word (chunk) width
  localparam int NW512 = 16;           // 512 / 32
  localparam int NPRIMES512 = 74;
  localparam int LBITS = 10;           // bits of the largest l_i (587)

  localparam logic [511:0] P512    = 512'h65b48e8f740f89bffc8ab0d15e3e4c4ab42d083aedc88c425afbfcc69322c9cda7aac6c567f35507516730cc1f0b4f25c2721bf457aca8351b81b90533c6c87b;
  localparam logic [511:0] PINV512 = 512'hd8c3904b18371bcd3512da337a97b3451232b9eb013dee1eb081b3aba7d05f8534ed3ea7f1de34c4f6fe2bc33e915395fe025ed7d0d3b1aa66c1301f632e294d;
  localparam logic [511:0] R2_512  = 512'h4ed759aea6f3917ead5f166e20e4f52d1e9248731776b3715dae03ee2f5de3d0192ea214bcc584b14faf3fbfd22370ca67086f4525f1f27d36905b572ffc1724;
  localparam logic [511:0] ONE512  = 512'h3496e2e117e0ec8006ea9e5d4383676a97a5ef8a246ee77b4a080672d9ba6c64b0aa7275301955f15d319e67c1e961b47b1bc81750a6af95c8fc8df598726f0a;

  typedef logic [LBITS-1:0] prime_t;
  localparam prime_t PRIMES512 [NPRIMES512] = '{3, 5, 7, 11, 13, 17, 19, 23, 29, 31, 37, 41, 43, 47, 53, 59, 61, 67, 71, 73, 79, 83, 89, 97, 101, 103, 107, 109, 113, 127, 131, 137, 139, 149, 151, 157, 163, 167, 173, 179, 181, 191, 193, 197, 199, 211, 223, 227, 229, 233, 239, 241, 251, 257, 263, 269, 271, 277, 281, 283, 293, 307, 311, 313, 317, 331, 337, 347, 349, 353, 359, 367, 373, 587};

  // ALU operations (Fig. 1 "OP").
  typedef enum logic [1:0] {
    ALU_ADD = 2'd0,   // (a + b) mod p
    ALU_SUB = 2'd1,   // (a - b) mod p
    ALU_MUL = 2'd2,   // a * b * R^-1 mod p (Montgomery)
    ALU_NOP = 2'd3
  } alu_op_e;

  // Field-engine operations issued by the control FSMs.
  typedef enum logic [2:0] {
    FE_ADD  = 3'd0,   // rf[dst] = rf[a] + rf[b] mod p
    FE_SUB  = 3'd1,   // rf[dst] = rf[a] - rf[b] mod p
    FE_MUL  = 3'd2,   // rf[dst] = rf[a] * rf[b] / R mod p
    FE_RND  = 3'd3,   // rf[dst] = PRNG word (raw, not reduced)
    FE_LDIN = 3'd4    // rf[dst] = external input operand
  } fe_op_e;

  localparam int RA = 6;               // register address width
  typedef logic [RA-1:0] raddr_t;

  typedef struct packed {
    logic   valid;
    fe_op_e op;
    raddr_t dst;
    raddr_t a;
    raddr_t b;
  } fe_cmd_t;

  typedef struct packed {
    logic done;   // one-cycle pulse: the command has been written back
    logic zero;   // the written value was zero
  } fe_rsp_t;

  localparam fe_cmd_t FE_IDLE = '{valid: 1'b0, op: FE_ADD, dst: '0, a: '0, b: '0};

  // Register map.  Addresses 0..3 are read-only constants.
  localparam raddr_t C_ZERO = 6'd0;    // 0
  localparam raddr_t C_ONE  = 6'd1;    // R mod p (Montgomery one)
  localparam raddr_t C_R2   = 6'd2;    // R^2 mod p (into Montgomery form)
  localparam raddr_t C_RAW1 = 6'd3;    // plain 1 (out of Montgomery form)
  // curve and points owned by csidh_ctrl
  localparam raddr_t R_A24  = 6'd4;    // A + 2C (projective, scaled)
  localparam raddr_t R_C24  = 6'd5;    // 4C
  localparam raddr_t R_PX   = 6'd6;    // torsion point P
  localparam raddr_t R_PZ   = 6'd7;
  localparam raddr_t R_MX   = 6'd8;    // xmul in/out point; kernel K for xisog
  localparam raddr_t R_MZ   = 6'd9;
  localparam raddr_t R_T0   = 6'd10;   // csidh_ctrl scratch
  localparam raddr_t R_T1   = 6'd11;
  localparam raddr_t R_OUT  = 6'd12;   // final public key (plain integer)
  // xmul ladder
  localparam raddr_t R_L0X  = 6'd13;
  localparam raddr_t R_L0Z  = 6'd14;
  localparam raddr_t R_L1X  = 6'd15;
  localparam raddr_t R_L1Z  = 6'd16;
  localparam raddr_t R_LDX  = 6'd17;
  localparam raddr_t R_LDZ  = 6'd18;
  // xdbladd scratch
  localparam raddr_t R_D0   = 6'd19;
  localparam raddr_t R_D1   = 6'd20;
  localparam raddr_t R_D2   = 6'd21;
  // xisog
  localparam raddr_t R_NA24 = 6'd22;   // new curve
  localparam raddr_t R_NC24 = 6'd23;
  localparam raddr_t R_NPX  = 6'd24;   // phi(P)
  localparam raddr_t R_NPZ  = 6'd25;
  localparam raddr_t R_W0X  = 6'd26;   // sliding window of kernel multiples
  localparam raddr_t R_W0Z  = 6'd27;
  localparam raddr_t R_W1X  = 6'd28;
  localparam raddr_t R_W1Z  = 6'd29;
  localparam raddr_t R_W2X  = 6'd30;
  localparam raddr_t R_W2Z  = 6'd31;
  localparam raddr_t R_IPP  = 6'd32;   // running products
  localparam raddr_t R_IPM  = 6'd33;
  localparam raddr_t R_ISP  = 6'd34;
  localparam raddr_t R_ISM  = 6'd35;
  localparam raddr_t R_ITP  = 6'd36;   // XP+ZP, XP-ZP, XK+ZK, XK-ZK
  localparam raddr_t R_ITM  = 6'd37;
  localparam raddr_t R_IKP  = 6'd38;
  localparam raddr_t R_IKM  = 6'd39;
  localparam raddr_t R_IS   = 6'd40;   // per-step temporaries
  localparam raddr_t R_ID   = 6'd41;
  localparam raddr_t R_IU   = 6'd42;
  localparam raddr_t R_IV   = 6'd43;
  localparam raddr_t R_IEA  = 6'd44;   // a^l, d^l
  localparam raddr_t R_IED  = 6'd45;
  localparam raddr_t R_IDD  = 6'd46;   // d = A - 2C
  // xaffinize / xtwist
  localparam raddr_t R_AFX  = 6'd47;   // xaffinize: X in, X/Z out
  localparam raddr_t R_AFZ  = 6'd48;
  localparam raddr_t R_AFA  = 6'd49;   // exponentiation accumulator
  localparam raddr_t R_TWX  = 6'd50;   // xtwist: x in
  localparam raddr_t R_TWW  = 6'd51;
  localparam raddr_t R_TWA  = 6'd52;
  localparam raddr_t R_TWH  = 6'd53;
  localparam int NREG = 54;

  function automatic fe_cmd_t fe(fe_op_e op, raddr_t dst, raddr_t a, raddr_t b);
    fe_cmd_t c;
    c.valid = 1'b1; c.op = op; c.dst = dst; c.a = a; c.b = b;
    return c;
  endfunction

endpackage
