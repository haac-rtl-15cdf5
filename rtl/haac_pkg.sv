// haac_pkg: types and constants shared by the HAAC garbled-circuit accelerator.
//
// A HAAC program is a stream of gate instructions. Each instruction holds a 2-bit
// opcode, two 17-bit input wire addresses into the sliding wire window (SWW) and one
// "live" bit; the output wire address is not encoded because outputs are numbered in
// program order. These field widths and the XOR=01 / AND=10 encodings follow the paper
// (17 bits address a 2 MB SWW of 16-byte labels). Address 0 is reserved: it means
// "take this operand from the out-of-range wire (OoRW) queue". NOP=00 is this design's
// choice for the third instruction type, and 11 is also decoded as a NOP.
//
// The S-box of AES is computed here by a constant function (multiplicative inverse in
// GF(2^8) followed by the affine map) rather than typed in as a table.
package haac_pkg;

  localparam int LABEL_W   = 128;   // wire label width
  localparam int TABLE_W   = 256;   // two 128-bit half-gate table rows
  localparam int DADDR_W   = 32;    // off-chip wire address width (OoR addresses)

  typedef logic [LABEL_W-1:0] label_t;
  typedef logic [TABLE_W-1:0] table_t;
  typedef logic [DADDR_W-1:0] daddr_t;

  typedef enum logic [1:0] {
    OP_NOP  = 2'b00,
    OP_XOR  = 2'b01,
    OP_AND  = 2'b10,
    OP_NOP2 = 2'b11
  } op_e;

  localparam int WADDR_W  = 17;    // SWW address field of an instruction (2 MB SWW)

  // One HAAC instruction: 2+17+17+1 = 37 bits.
  typedef struct packed {
    op_e                op;
    logic [WADDR_W-1:0] wa;    // input wire A (SWW entry, 0 = OoRW queue)
    logic [WADDR_W-1:0] wb;    // input wire B (SWW entry, 0 = OoRW queue)
    logic               live;  // output must also be written to DRAM
  } instr_t;

  // Event counters kept by the top level (free-running, cleared by reset).
  typedef struct packed {
    logic [31:0] issue_cycles;   // cycles in which the engines issued a bundle
    logic [31:0] and_gates;      // AND gates sent to Half-Gate units
    logic [31:0] xor_gates;      // XOR gates sent to FreeXOR units
    logic [31:0] fwd_operands;   // operands delivered by the forwarding network
    logic [31:0] oor_operands;   // operands taken from OoRW queues
    logic [31:0] rd_conflicts;   // engine-cycles with an SWW read refused by the crossbar
    logic [31:0] fwd_waits;      // engine-cycles spent in R3 waiting for a forwarded wire
    logic [31:0] be_stalls;      // engine-cycles with the compute units frozen
    logic [31:0] oor_retries;    // OoR DRAM reads repeated because the wire was not yet valid
    logic [31:0] live_writes;    // live wires written to DRAM
  } perf_t;

  // GF(2^8) multiply with the AES polynomial x^8+x^4+x^3+x+1
  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = {x[6:0], 1'b0} ^ (x[7] ? 8'h1b : 8'h00);
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox_calc(input logic [7:0] a);
    logic [7:0] inv, s, sq;
    // inverse as a^254 (and 0 maps to 0): 254 = 0b11111110
    inv = 8'h01;
    sq  = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) inv = gf_mul(inv, sq);
      sq = gf_mul(sq, sq);
    end
    s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]}
            ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    return s;
  endfunction

  typedef logic [7:0] sbox_t [256];

  function automatic sbox_t gen_sbox();
    sbox_t t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  localparam sbox_t SBOX = gen_sbox();

  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  // Bytes are numbered as in FIPS-197: byte 0 is bits [127:120], column c holds
  // bytes 4c..4c+3.
  function automatic logic [7:0] get_byte(input logic [127:0] s, input int i);
    return s[127-8*i -: 8];
  endfunction

  function automatic logic [127:0] sub_shift(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(4*c+r) -: 8] = SBOX[get_byte(s, 4*((c+r)%4)+r)];
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c);   a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2); a3 = get_byte(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // One step of AES-128 key expansion: round key k from round key k-1.
  function automatic logic [127:0] key_step(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = {SBOX[w3[23:16]] ^ rcon, SBOX[w3[15:8]], SBOX[w3[7:0]], SBOX[w3[31:24]]};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  function automatic logic [7:0] rcon_of(input int round);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 1; i < round; i++) r = xtime(r);
    return r;
  endfunction

endpackage
