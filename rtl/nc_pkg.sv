// nc_pkg: types and constants shared by the Neural Cache RTL.
//
// Geometry: an 8 KB compute array has 256 word lines (rows) and 256 bit
// lines (columns); a slice has up to 20 ways of 4 banks, each bank has 4
// arrays. These numbers follow the Xeon-E5-like cache the design targets.
//
// Instruction set. The in-cache operations (add, multiply, reduce, move,
// max/min, ReLU, plus zero/ones/copy helpers) and their fields are this
// design's own encoding; only the list of operations comes from the
// architecture description. All operands are stored transposed: an n-bit
// operand at row r occupies rows r .. r+n-1, least significant bit first,
// one element per bit line.
//
// Constant rows: by software convention row ZERO_ROW holds all zeros and
// row ONES_ROW all ones. The control FSM reads them to zero-extend a short
// operand and to invert an operand for subtraction (max/min).
package nc_pkg;

  localparam int ROWS      = 256;
  localparam int COLS      = 256;
  localparam int ROW_W     = 8;
  localparam int NWAYS_MAX = 20;
  localparam int CHUNK_W   = 32;            // bits per array per bus cycle
  localparam int NCHUNK    = COLS / CHUNK_W; // 8 chunks per row
  localparam int BANK_W    = 64;            // quadrant bus width
  localparam int BUS_W     = 256;           // intra-slice data bus
  localparam int NBANKS    = 4;             // banks (quadrants) per way

  localparam logic [ROW_W-1:0] ZERO_ROW = 8'd255;
  localparam logic [ROW_W-1:0] ONES_ROW = 8'd254;

  // ---------------------------------------------------------------- ISA
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_ZERO   = 4'd1,  // d[0..n-1]  <= 0
    OP_ONES   = 4'd2,  // d[0..n-1]  <= all ones
    OP_COPY   = 4'd3,  // d[0..n-1]  <= a[0..n-1]
    OP_ADD    = 4'd4,  // d[0..n]    <= a[0..n-1] + b[0..nb-1]   (n+1 cycles)
    OP_MUL    = 4'd5,  // d[0..2n-1] <= a[0..n-1] * b[0..n-1]    (unsigned)
    OP_MOVE   = 4'd6,  // d[i] <= a[i] shifted 'shift' bit lines toward bit line 0
    OP_REDUCE = 4'd7,  // d <= a shifted; a[0..n] <= a + d       (one reduction step)
    OP_MAX    = 4'd8,  // a <= max(a,b), unsigned, scratch d[0..n]
    OP_MIN    = 4'd9,  // a <= min(a,b), unsigned, scratch d[0..n]
    OP_RELU   = 4'd10  // a <= (a < 0) ? 0 : a, two's complement
  } op_e;

  typedef struct packed {
    op_e              op;
    logic [ROW_W-1:0] a;      // first operand row
    logic [ROW_W-1:0] b;      // second operand row
    logic [ROW_W-1:0] d;      // destination / scratch row
    logic [5:0]       n;      // width in bits of a (and of the result)
    logic [5:0]       nb;     // width of b for OP_ADD (zero extended to n)
    logic [ROW_W-1:0] shift;  // bit-line distance for OP_MOVE / OP_REDUCE
  } instr_t;

  // ------------------------------------------------ per-cycle array control
  // Write-back mux of the column peripheral (4:1 mux of the bit-line
  // peripheral figure: Sum, Carry_out, Data_in, Tag).
  typedef enum logic [1:0] {
    WS_SUM  = 2'd0,
    WS_COUT = 2'd1,
    WS_DIN  = 2'd2,
    WS_TAG  = 2'd3
  } wsel_e;

  typedef struct packed {
    logic             ren_a;     // activate read word line row_a
    logic [ROW_W-1:0] row_a;
    logic             ren_b;     // activate read word line row_b
    logic [ROW_W-1:0] row_b;
    logic             wen;       // activate write word line row_w
    logic [ROW_W-1:0] row_w;
    wsel_e            wsel;      // write-back mux select
    logic             c_en;      // carry latch enable (C_EN)
    logic             t_en;      // tag latch enable (T_EN)
    logic             pred;      // predication: write only where tag = 1
    logic             lat_rst;   // clear carry and tag latches at the clock edge
    logic             din_shift; // Data_in = sensed row shifted by 'shift'
    logic [ROW_W-1:0] shift;
  } actl_t;

  localparam actl_t ACTL_IDLE = '0;

  // ------------------------------------------------------- slice commands
  typedef enum logic [3:0] {
    C_NOP       = 4'd0,
    C_INSTR     = 4'd1,  // broadcast instr to the banks of way_mask
    C_WRITE     = 4'd2,  // bus write of data to way_mask at row/chunk/sel
    C_WRITE_T   = 4'd3,  // bus write of TMU 'tmu' column 'row2'
    C_READ      = 4'd4,  // read way 'way' at row/chunk/sel, reply with data
    C_XFER      = 4'd5,  // read way 'way' row/chunk/sel, write way_mask row2/chunk2/sel2
    C_TMU_WR    = 4'd6,  // write data into TMU row 'row'   (regular layout in)
    C_TMU_WRCOL = 4'd7,  // write data into TMU column 'row' (transposed layout in)
    C_TMU_RD    = 4'd8   // reply with TMU row 'row'         (regular layout out)
  } ckind_e;

  typedef struct packed {
    ckind_e                kind;
    logic [NWAYS_MAX-1:0]  way_mask;
    logic [4:0]            way;
    logic [ROW_W-1:0]      row;
    logic [2:0]            chunk;
    logic                  sel;     // array within the sense-amp pair
    logic                  rep;     // replay through the 64-bit bank latch
    logic [ROW_W-1:0]      row2;
    logic [2:0]            chunk2;
    logic                  sel2;
    logic                  tmu;     // TMU index
    instr_t                instr;
    logic [BUS_W-1:0]      data;
  } cmd_t;

  // Ring packets: requests travel one way round the ring, replies the other.
  typedef struct packed {
    logic       bcast;   // deliver to every slice
    logic [3:0] dst;     // destination slice for unicast
    logic [3:0] hops;    // stops still to visit after this one
    cmd_t       cmd;
  } req_t;

  typedef struct packed {
    logic [3:0]       src;   // slice that produced the reply
    logic [BUS_W-1:0] data;
  } rsp_t;

endpackage
