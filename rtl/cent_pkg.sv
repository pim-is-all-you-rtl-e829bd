// cent_pkg: types, constants and BF16 arithmetic shared by every block of the
// CENT device (a CXL memory device whose GDDR6 banks each carry a small
// multiply-accumulate unit, plus near-memory "PNM" accelerators).
//
// Contents
//  * BF16 element type and the 256-bit "slot" (16 BF16 lanes). The 256-bit
//    width of shared-buffer slots, global-buffer words and bank columns is the
//    paper's; so is BF16 as the only number format.
//  * The 128-bit CENT instruction word. The paper lists each instruction's
//    operands (CHmask, OPsize, RO, CO, Regid, AFid, Rd, Rs, DVid, DVcount, BK,
//    CHid, PC) but no encoding or field widths; the layout below is this
//    design's own. CHid, DVid and DVcount share the CHmask field; the RISCV
//    start PC shares the RO field. The `nb` bit (MAC operand taken from the
//    neighbouring bank instead of the global buffer) and the BK field of
//    COPY_BKGB/COPY_GBBK are additions: the paper describes the behaviour but
//    its operand lists carry no field that could select it.
//  * Micro-ops (decoder -> PIM controller), channel commands (PIM controller
//    -> GDDR6-PIM channel) and the CXL message ("flit") format.
//  * bf16_mul / bf16_add: combinational BF16 arithmetic. Both truncate (round
//    toward zero), flush subnormals to zero and saturate on overflow; NaN and
//    infinity are not handled. The paper fixes BF16 but not rounding.
//  * crc16: CRC-16/CCITT (polynomial 0x1021, initial value 0xFFFF) used by the
//    CXL port's integrity check. The paper shows an integrity check but not
//    which code it uses.
package cent_pkg;

  // ---------------------------------------------------------------- data
  typedef logic [15:0]  bf16_t;
  localparam int unsigned LANES  = 16;       // BF16 lanes per 256-bit word
  localparam int unsigned SLOT_W = 256;
  typedef logic [SLOT_W-1:0] slot_t;

  // ------------------------------------------------------- device geometry
  localparam int unsigned SB_SLOTS  = 2048;  // 64KB shared buffer / 32B
  localparam int unsigned SB_AW     = 11;
  localparam int unsigned ROW_W     = 14;    // 16384 rows x 2KB = 32MB bank
  localparam int unsigned COL_W     = 6;     // 64 x 256-bit columns per row
  localparam int unsigned NUM_ACC   = 32;    // accumulation registers per PU
  localparam int unsigned NUM_BANKS = 16;    // banks per PIM channel
  localparam int unsigned NODE_W    = 6;     // CXL node id (devices + host)
  localparam int unsigned MASK_W    = 64;    // broadcast device-id mask
  localparam logic [NODE_W-1:0] HOST_ID = 6'h3F; // node id of the host

  // --------------------------------------------------------- instructions
  typedef enum logic [7:0] {
    OP_NOP       = 8'd0,
    OP_MAC_ABK   = 8'd1,
    OP_EW_MUL    = 8'd2,
    OP_AF        = 8'd3,
    OP_EXP       = 8'd4,
    OP_RED       = 8'd5,
    OP_ACC       = 8'd6,
    OP_RISCV     = 8'd7,
    OP_SEND_CXL  = 8'd8,
    OP_RECV_CXL  = 8'd9,
    OP_BCAST_CXL = 8'd10,
    OP_WR_SBK    = 8'd11,
    OP_RD_SBK    = 8'd12,
    OP_WR_ABK    = 8'd13,
    OP_COPY_BKGB = 8'd14,
    OP_COPY_GBBK = 8'd15,
    OP_WR_BIAS   = 8'd16,
    OP_RD_MAC    = 8'd17,
    OP_WR_GB     = 8'd18
  } opcode_e;

  typedef struct packed {
    opcode_e     op;      // [127:120]
    logic [31:0] chmask;  // CHmask; CHid = [4:0]; DVid / DVcount = [7:0]
    logic [15:0] opsize;  // OPsize: number of micro-ops / slots
    logic [15:0] ro;      // RO (row); PC for RISCV
    logic [7:0]  co;      // CO (column)
    logic [3:0]  bk;      // BK (bank)
    logic [4:0]  regid;   // Regid (accumulation register / lane for WR_ABK)
    logic [3:0]  afid;    // AFid (activation-function table)
    logic        nb;      // MAC_ABK: second operand from neighbour bank
    logic [15:0] rd;      // Rd (destination shared-buffer slot)
    logic [15:0] rs;      // Rs (source shared-buffer slot)
    logic [1:0]  rsvd;
  } instr_t;              // 128 bits

  // --------------------------------------------- PIM micro-ops and commands
  typedef enum logic [3:0] {
    U_MAC, U_EWMUL, U_AF, U_WRSBK, U_RDSBK, U_WRABK,
    U_BKGB, U_GBBK, U_WRBIAS, U_RDMAC, U_WRGB
  } uop_e;

  typedef struct packed {
    uop_e             kind;
    logic [1:0]       chmask;   // which of the controller's two channels
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
    logic [3:0]       bk;
    logic [4:0]       regid;
    logic [3:0]       afid;
    logic             nb;
    logic [SB_AW-1:0] sb_addr;  // destination slot of read data
    logic             last;     // last micro-op of its instruction
    slot_t            data;     // write data (from the shared buffer)
  } uop_t;

  typedef enum logic [3:0] {
    C_NOP, C_ACT, C_PRE, C_RD, C_WR, C_MAC, C_EWMUL, C_AF,
    C_WRGB, C_BKGB, C_GBBK, C_WRBIAS, C_RDMAC, C_WRABK
  } ccmd_e;

  typedef struct packed {
    ccmd_e            cmd;
    logic [15:0]      bmask;    // banks addressed by ACT / PRE
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
    logic [3:0]       bk;
    logic [4:0]       regid;
    logic [3:0]       afid;
    logic             nb;
    logic [SB_AW-1:0] tag;      // returned with read data
    slot_t            data;
  } chcmd_t;

  // Which unit drives the shared buffer's narrow port (the decoder runs one
  // instruction at a time, so owners never overlap).
  typedef enum logic [2:0] {
    OWN_HOST, OWN_DEC, OWN_LDST, OWN_PNM, OWN_IDC, OWN_RV
  } sb_owner_e;

  // Row that holds activation-function table `afid` (top rows of the bank).
  function automatic logic [ROW_W-1:0] af_row(input logic [3:0] afid);
    return ROW_W'((1 << ROW_W) - 1 - int'(afid));
  endfunction

  // ---------------------------------------------------------- CXL messages
  // M_BRWD is the broadcast request-with-data: a reserved header code that
  // the switch forwards to every device named in dmask.
  typedef enum logic [2:0] {
    M_REQ = 3'd0, M_RWD = 3'd1, M_NDR = 3'd2, M_DRS = 3'd3, M_BRWD = 3'd4
  } msg_e;

  typedef struct packed {
    msg_e              typ;
    logic [NODE_W-1:0] src;
    logic [NODE_W-1:0] dst;
    logic [MASK_W-1:0] dmask;
    logic [31:0]       addr;
    slot_t             data;
    logic [15:0]       crc;
  } flit_t;

  localparam int unsigned FLIT_PAYLOAD_W = $bits(flit_t) - 16;

  // Host address map: addr[31:30] selects the region.
  localparam logic [1:0] REG_IBUF = 2'd0;   // [16:0] instruction index
  localparam logic [1:0] REG_SB   = 2'd1;   // [10:0] slot
  localparam logic [1:0] REG_DRAM = 2'd2;   // {ch[28:24], bk[23:20], row[19:6], col[5:0]}
  localparam logic [1:0] REG_CTRL = 2'd3;   // write: start (data = length); read: status

  function automatic logic [15:0] crc16(input logic [FLIT_PAYLOAD_W-1:0] d);
    logic [15:0] c;
    logic fb;
    c = 16'hFFFF;
    for (int i = FLIT_PAYLOAD_W - 1; i >= 0; i--) begin
      fb = c[15] ^ d[i];
      c  = {c[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0000);
    end
    return c;
  endfunction

  function automatic flit_t flit_seal(input flit_t f);
    flit_t r;
    r     = f;
    r.crc = crc16(f[$bits(flit_t)-1:16]);
    return r;
  endfunction

  function automatic logic flit_ok(input flit_t f);
    return f.crc == crc16(f[$bits(flit_t)-1:16]);
  endfunction

  // ------------------------------------------------------ BF16 arithmetic
  function automatic bf16_t bf16_mul(input bf16_t a, input bf16_t b);
    logic        s;
    logic [15:0] p;
    logic [6:0]  m;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 15'd0};
    p = {8'd0, 1'b1, a[6:0]} * {8'd0, 1'b1, b[6:0]};
    e = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (p[15]) begin
      m = p[14:8];
      e = e + 1;
    end else begin
      m = p[13:7];
    end
    if (e <= 0)   return {s, 15'd0};
    if (e >= 255) return {s, 8'hFE, 7'h7F};
    return {s, e[7:0], m};
  endfunction

  function automatic bf16_t bf16_add(input bf16_t a, input bf16_t b);
    bf16_t       x, y;
    logic [7:0]  d;
    logic [10:0] mx, my;
    logic [11:0] sum;
    int          e;
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    if (x[14:7] == 8'd0) return 16'h0000;
    if (y[14:7] == 8'd0) return x;
    d  = x[14:7] - y[14:7];
    mx = {1'b1, x[6:0], 3'b000};
    my = (d > 8'd10) ? 11'd0 : ({1'b1, y[6:0], 3'b000} >> d);
    if (x[15] == y[15]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == 12'd0) return 16'h0000;
    e = int'(x[14:7]);
    if (sum[11]) begin
      sum = sum >> 1;
      e   = e + 1;
    end else begin
      for (int i = 0; i < 11; i++) begin
        if (!sum[10]) begin
          sum = sum << 1;
          e   = e - 1;
        end
      end
    end
    if (e <= 0)   return 16'h0000;
    if (e >= 255) return {x[15], 8'hFE, 7'h7F};
    return {x[15], e[7:0], sum[9:3]};
  endfunction

  function automatic bf16_t lane(input slot_t s, input int unsigned i);
    return s[i*16 +: 16];
  endfunction

endpackage
