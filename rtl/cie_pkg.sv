// cie_pkg: constants and types shared by the compute-in-entropy HDC encoder.
//
// The encoder maps a 64-element feature vector (6 bits per feature) onto a
// 1024-element hyper-vector. The hyper-vector is produced by 32 tiles of
// 64x32 entropy cells; each tile yields 32 elements as 10-bit counts. The
// sizes FEAT_W, ROWS, COLS, TILES and CNT_W follow the paper. Everything else
// (fixed-point format of the analog models, SRAM word layout, register map)
// is a choice of this design and is marked as such below.
package cie_pkg;

  // ---- sizes given by the paper ----
  localparam int unsigned FEAT_W = 6;     // bits per feature
  localparam int unsigned ROWS   = 64;    // max feature-vector length = rows per tile
  localparam int unsigned COLS   = 32;    // columns (hyper-vector elements) per tile
  localparam int unsigned TILES  = 32;    // tiles, d = TILES*COLS = 1024
  localparam int unsigned CNT_W  = 10;    // bundler counter width, h[9:0]

  // ---- design choices ----
  localparam int unsigned V_W        = 16;     // analog voltage, unsigned fixed point
  localparam int unsigned V_ONE      = 65535;  // 1.0 (VDD / NMOS-threshold unity)
  localparam int unsigned TMAX       = 64;     // full-scale CDF/VTT pulse, cycles
  localparam int unsigned VTC_FS     = 1023;   // full-scale final VTC pulse, cycles
  localparam int unsigned ELEM_W     = 16;     // class-vector element in SRAM, signed
  localparam int unsigned Q_W        = CNT_W + 1; // centred query element, signed
  localparam int unsigned SRAM_BYTES = 28 * 1024; // 28 KB, from the paper
  localparam int unsigned SRAM_DEPTH = SRAM_BYTES * 8 / (COLS * ELEM_W); // 448 words
  localparam int unsigned SRAM_AW    = $clog2(SRAM_DEPTH);
  localparam int unsigned NGRAM_MAX  = 8;
  localparam int unsigned CLASS_W    = 4;      // up to 14 classes in 28 KB

  // ---- register map seen through SPI (16-bit address, 16-bit data) ----
  localparam logic [15:0] A_CMD      = 16'h0000; // write: [1:0] op, [7:4] class
  localparam logic [15:0] A_NGRAM    = 16'h0001; // N of the N-gram, 1..NGRAM_MAX
  localparam logic [15:0] A_NCLASS   = 16'h0002; // classes compared at inference
  localparam logic [15:0] A_GAIN     = 16'h0003; // VGA bias code (3 bits)
  localparam logic [15:0] A_OFFSET   = 16'h0004; // query centring offset
  localparam logic [15:0] A_FLEN     = 16'h0005; // feature-vector length M, 1..64
  localparam logic [15:0] A_STATUS   = 16'h0006; // read: [0] busy [1] done [7:4] class
  localparam logic [15:0] A_CYCLES   = 16'h0007; // read: cycles of the last command
  localparam logic [15:0] A_FEAT     = 16'h0100; // +n*64+i : feature i of gram n
  localparam logic [15:0] A_HV       = 16'h4000; // +j : bundler count h_j (read)
  localparam logic [15:0] A_SRAM     = 16'h8000; // +e : SRAM element e

  typedef enum logic [1:0] {
    OP_NONE   = 2'd0,
    OP_ENCODE = 2'd1,
    OP_TRAIN  = 2'd2,
    OP_INFER  = 2'd3
  } op_e;

  // Register bus from the SPI slave to the control logic.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [15:0] addr;
    logic [15:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        ack;     // one-cycle pulse; rdata valid with it on reads
    logic [15:0] rdata;
  } bus_rsp_t;

  // Transfer curve of the VGA model, shared by the CDF model and the
  // testbenches: V_out = 0.5 + dv * 2^gain / 2^20, clamped to [0, 1]
  // (in units of V_ONE). Low codes keep a narrow normal shape, middle codes
  // spread it towards uniform, high codes saturate most samples into a
  // bimodal shape.
  function automatic logic [V_W-1:0] vga_cdf(input logic signed [31:0] dv,
                                             input logic [2:0] gain);
    longint v;
    v = 64'sd32768 + ((longint'(dv) <<< gain) >>> 4);
    if (v < 0) v = 0;
    if (v > longint'(V_ONE)) v = longint'(V_ONE);
    return V_W'(v);
  endfunction

  // Pulse width, in cycles, of a voltage v converted with full scale fs.
  function automatic int unsigned v2t(input logic [V_W-1:0] v, input int unsigned fs);
    return (int'(v) * fs + 32768) / 65536;
  endfunction

  // Current mismatch I1-I2 of one entropy cell, the model's stand-in for
  // process variation: a hash of (die seed, tile, row, column) mixed by a
  // murmur-style finaliser, its four bytes summed, minus 510 (about
  // Gaussian, zero mean, standard deviation near 148).
  function automatic logic signed [15:0] cell_weight(input logic [31:0] seed,
      input int unsigned tile, input int unsigned row, input int unsigned col);
    logic [31:0] x;
    x = seed ^ (32'(tile) * 32'h9E37_79B9) ^ (32'(row) * 32'h85EB_CA6B)
             ^ (32'(col) * 32'hC2B2_AE35);
    x = x ^ (x >> 16); x = x * 32'h7FEB_352D;
    x = x ^ (x >> 15); x = x * 32'h846C_A68B;
    x = x ^ (x >> 16);
    return 16'(signed'({8'd0, x[7:0]}) + signed'({8'd0, x[15:8]})
             + signed'({8'd0, x[23:16]}) + signed'({8'd0, x[31:24]}) - 16'sd510);
  endfunction

endpackage
