// kal_pkg: types, constants and instruction encodings shared by the
// co-processor. Data are Fix-8 (1 sign, 2 integer, 5 fraction bits), so a
// product of two Fix-8 values carries 10 fraction bits and is brought back
// to Fix-8 by an arithmetic shift of 5 and saturation. The field layouts of
// the FPE and HPE instruction words are this design's own; the opcode names
// (START, FIN, MV, MVA, MVAA, LDR, LDP, MM, ACC, ACCA, ACCP) follow the paper.
package kal_pkg;

  localparam int FIX_FRAC   = 5;    // fraction bits of Fix-8
  localparam int IN_BYTES   = 64;   // raw bytes fed to the NNs
  localparam int HASH_W     = 32;   // Toeplitz hash width
  localparam int IDX_W      = 16;   // flow/query table index (64K)
  localparam int CLASS_W    = 8;

  typedef logic signed [7:0] fix8_t;

  // One inference job: the flow hash and the raw input bytes.
  typedef struct packed {
    logic [HASH_W-1:0]       hash;
    logic [IN_BYTES*8-1:0]   bytes;
  } job_t;

  // One PE result: 32 Fix-8 outputs and the hash of the flow.
  typedef struct packed {
    logic [HASH_W-1:0]       hash;
    logic [255:0]            data;
  } pe_result_t;

  // Rule written into the query table.
  typedef struct packed {
    logic [IDX_W-1:0]        idx;
    logic                    slow;     // 1: produced by the slow (elephant) path
    logic [CLASS_W-1:0]      cls;
  } rule_t;

  // ---------------- FPE instruction word (32 bit, three slots) -----------
  typedef enum logic [3:0] {
    F_NOP   = 4'd0,
    F_START = 4'd1,   // wait for a job, load its bytes into regfile 0..1
    F_MV    = 4'd2,   // acc  = v*M
    F_MVA   = 4'd3,   // acc += v*M
    F_MVAA  = 4'd4,   // acc += v*M, activate, write 8 bytes to regfile
    F_FIN   = 4'd5    // drain, emit regfile[dst] as the result, restart
  } fpe_op_e;

  typedef struct packed {
    fpe_op_e     op;        // [31:28] computation slot
    logic [4:0]  dst;       // [27:23] regfile entry (MVAA dest, FIN source)
    logic [1:0]  seg;       // [22:21] 8-byte segment of dst written by MVAA
    logic        lut;       // [20]    1: LUT activation, 0: saturate only
    logic        ldp_v;     // [19]    parameter-loading slot (LDP)
    logic [4:0]  ldp_addr;  // [18:14]
    logic        ldr_v;     // [13]    temporal-data slot (LDR)
    logic [4:0]  ldr_addr;  // [12:8]
    logic [7:0]  rsvd;      // [7:0]
  } fpe_instr_t;

  // ---------------- HPE instruction word (64 bit) ------------------------
  typedef enum logic [3:0] {
    H_NOP   = 4'd0,
    H_START = 4'd1,   // wait for a job, write its bytes into RAM1 rows 0..1
    H_MM    = 4'd2,   // RAM1 rows -> systolic array -> RAM2 or RAM3
    H_ACC   = 4'd3,   // RAM2 + RAM3 -> RAM1 (or RAM2)
    H_ACCA  = 4'd4,   // as ACC, with LUT activation
    H_ACCP  = 4'd5,   // as ACCA, followed by max-pooling
    H_FIN   = 4'd6    // drain, emit RAM1[a] as the result, restart
  } hpe_op_e;

  typedef struct packed {
    hpe_op_e     op;        // [63:60]
    logic [9:0]  a;         // [59:50] MM: RAM1 source row; ACC: RAM2 row; FIN: RAM1 row
    logic [9:0]  b;         // [49:40] ACC: RAM3 row
    logic [9:0]  d;         // [39:30] destination row
    logic [7:0]  len;       // [29:22] number of rows (1..255)
    logic        bank;      // [21]    MM: 0 RAM2, 1 RAM3; ACC: 0 RAM1, 1 RAM2
    logic        bzero;     // [20]    ACC: treat RAM3 operand as zero
    logic [1:0]  pool;      // [19:18] ACCP: window 2**pool rows
    logic        barrier;   // [17]    wait for all engines idle before issue
    logic        ldp_v;     // [16]    LDP slot: load a weight tile
    logic [15:0] ldp_tile;  // [15:0]  tile number in pCache
  } hpe_instr_t;

  // Requantize a wide sum with FIX_FRAC fraction bits of extra scale to Fix-8.
  function automatic fix8_t requant(input logic signed [31:0] v);
    logic signed [31:0] s;
    s = v >>> FIX_FRAC;
    if (s > 32'sd127)       return 8'sd127;
    else if (s < -32'sd128) return -8'sd128;
    else                    return s[7:0];
  endfunction

  // Saturating Fix-8 addition.
  function automatic fix8_t sat_add(input fix8_t a, input fix8_t b);
    logic signed [8:0] s;
    s = {a[7], a} + {b[7], b};
    if (s > 9'sd127)       return 8'sd127;
    else if (s < -9'sd128) return -8'sd128;
    else                   return s[7:0];
  endfunction

endpackage
