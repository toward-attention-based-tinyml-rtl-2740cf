// ita_pkg: constants and types shared by the attention-accelerator cluster.
//
// The sizes follow the cluster described in the accompanying documentation:
// an L1 TCDM of 32 banks x 4 KiB reached through a 64-bit crossbar, an HWPE
// subsystem with 16 TCDM master ports, and the ITA engine with N = 16 dot
// product units of vector length M = 64 and a D = 26-bit accumulator.
// Everything else here (register map, task layout, bus structs) is this
// design's own choice; see the per-field comments.
package ita_pkg;

  // ---------------- ITA engine geometry ----------------
  localparam int unsigned N      = 16;  // dot product units
  localparam int unsigned M      = 64;  // vector length = tile edge
  localparam int unsigned D      = 26;  // accumulator width
  localparam int unsigned BIAS_W = 24;  // bias width
  localparam int unsigned SUM_W  = 19;  // ITAMax denominator width
  localparam int unsigned GROUPS = M / N;  // weight groups per tile (4)

  // ---------------- TCDM ----------------
  localparam int unsigned TCDM_DW     = 64;
  localparam int unsigned TCDM_AW     = 32;
  localparam int unsigned NB_BANKS    = 32;
  localparam int unsigned BANK_BYTES  = 4096;
  localparam int unsigned BANK_WORDS  = BANK_BYTES / (TCDM_DW / 8);  // 512
  localparam int unsigned N_HWPE      = 16;  // HWPE master ports
  localparam int unsigned N_CORES     = 9;   // 8 worker + 1 DMA-control core
  localparam int unsigned N_DMA_PORTS = 8;   // 512-bit DMA = 8 x 64-bit

  typedef logic [TCDM_AW-1:0] addr_t;
  typedef logic [TCDM_DW-1:0] data_t;
  typedef logic [TCDM_DW/8-1:0] strb_t;

  // Request from a master towards the TCDM interconnect.
  typedef struct packed {
    logic  req;
    addr_t addr;   // byte address, 64-bit word aligned
    logic  we;     // 1 = write
    strb_t be;
    data_t wdata;
  } tcdm_req_t;

  // Response: gnt in the request cycle, rvalid/rdata one cycle after a grant.
  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    data_t rdata;
  } tcdm_rsp_t;

  // ---------------- HWPE streams ----------------
  localparam int unsigned LINE_WORDS = 8;                    // 64-byte line
  localparam int unsigned LINE_W     = LINE_WORDS * TCDM_DW;  // 512 bit
  localparam int unsigned OUT_WORDS  = N * 8 / TCDM_DW;       // 2 words
  localparam int unsigned OUT_W      = N * 8;                 // 128 bit

  // Streamer configuration: addr = base + i0*stride0 + i1*stride1,
  // i0 runs fastest over len0, i1 over len1.
  typedef struct packed {
    addr_t       base;
    logic [31:0] stride0;
    logic [15:0] len0;
    logic [31:0] stride1;
    logic [15:0] len1;
  } stream_cfg_t;

  // ---------------- Task (one context of the register file) ----------------
  typedef enum logic [1:0] {
    OP_GEMM = 2'd0,   // plain matrix multiplication
    OP_QK   = 2'd1,   // Q x K^T: outputs also feed ITAMax DA
    OP_AV   = 2'd2    // A x V: inputs pass through ITAMax EN
  } ita_op_e;

  typedef enum logic [1:0] {
    ACT_IDENTITY = 2'd0,
    ACT_RELU     = 2'd1,
    ACT_GELU     = 2'd2
  } ita_act_e;

  typedef struct packed {
    logic [7:0] mult;   // unsigned multiplier
    logic [4:0] shift;  // arithmetic right shift
  } requant_t;

  typedef struct packed {
    addr_t       in_base;
    logic [31:0] in_stride;    // bytes between input rows
    addr_t       w_base;
    logic [31:0] w_stride;     // bytes between weight rows
    addr_t       bias_base;    // 64 x 32-bit words (low 24 bits used)
    addr_t       out_base;
    logic [31:0] out_stride;   // bytes between output rows
    ita_op_e     op;
    ita_act_e    act;
    logic        first_k;      // first K-tile: no partial sum read
    logic        last_k;       // last K-tile: requantise and write output
    logic        bias_en;      // add bias (on the first K-tile)
    logic        max_clear;    // QK: start of a row block, clear ITAMax buffers
    logic        max_invert;   // QK: last column tile, run DI afterwards
    requant_t    rq;           // accumulator requantiser
    logic signed [7:0]  gelu_b;    // i-GeLU: floor(b / S), b = -1.769
    logic signed [D-1:0] gelu_c;   // i-GeLU: floor(-1 / (a S^2)), a = -0.2888
    logic signed [D-1:0] gelu_one; // i-GeLU: 1 in the erf output scale (= c)
    requant_t    act_rq;       // requantiser after i-GeLU
  } ita_task_t;

  // Number of 32-bit job registers per context and their order.
  localparam int unsigned NUM_JOB_REGS = 13;
  localparam int unsigned NUM_CTX      = 2;  // dual-context register file

  // Register map (byte offsets on the peripheral interface).
  localparam logic [7:0] REG_TRIGGER  = 8'h00;  // W: commit programmed context
  localparam logic [7:0] REG_ACQUIRE  = 8'h04;  // R: free context id, or all ones
  localparam logic [7:0] REG_STATUS   = 8'h08;  // R: {queued[1:0], busy}
  localparam logic [7:0] REG_RUNNING  = 8'h0C;  // R: context id being run
  localparam logic [7:0] REG_CLEAR    = 8'h10;  // W: soft clear
  localparam logic [7:0] REG_DONE_CNT = 8'h14;  // R: finished tasks
  localparam logic [7:0] REG_JOB_BASE = 8'h40;  // job registers 0x40..0x70

  function automatic ita_task_t unpack_task(input logic [NUM_JOB_REGS-1:0][31:0] r);
    ita_task_t t;
    t.in_base    = r[0];
    t.in_stride  = r[1];
    t.w_base     = r[2];
    t.w_stride   = r[3];
    t.bias_base  = r[4];
    t.out_base   = r[5];
    t.out_stride = r[6];
    t.op         = ita_op_e'(r[7][1:0]);
    t.act        = ita_act_e'(r[7][3:2]);
    t.first_k    = r[7][4];
    t.last_k     = r[7][5];
    t.bias_en    = r[7][6];
    t.max_clear  = r[7][7];
    t.max_invert = r[7][8];
    t.rq.mult    = r[8][7:0];
    t.rq.shift   = r[8][12:8];
    t.gelu_b     = r[9][7:0];
    t.gelu_c     = r[10][D-1:0];
    t.gelu_one   = r[11][D-1:0];
    t.act_rq.mult  = r[12][7:0];
    t.act_rq.shift = r[12][12:8];
    return t;
  endfunction

  // ---------------- Peripheral (register) interface ----------------
  typedef struct packed {
    logic        req;
    logic [31:0] addr;
    logic        we;     // 1 = write
    logic [3:0]  be;
    logic [31:0] wdata;
  } per_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;  // one cycle after gnt, for reads and writes
    logic [31:0] rdata;
  } per_rsp_t;

  // ---------------- Narrow AXI (64-bit data, 4-bit ids) ----------------
  localparam int unsigned AXI_IW = 4;
  typedef struct packed {
    logic              aw_valid;
    logic [AXI_IW-1:0] aw_id;
    logic [31:0]       aw_addr;
    logic [7:0]        aw_len;
    logic [2:0]        aw_size;
    logic [1:0]        aw_burst;
    logic              w_valid;
    logic [63:0]       w_data;
    logic [7:0]        w_strb;
    logic              w_last;
    logic              b_ready;
    logic              ar_valid;
    logic [AXI_IW-1:0] ar_id;
    logic [31:0]       ar_addr;
    logic [7:0]        ar_len;
    logic [2:0]        ar_size;
    logic [1:0]        ar_burst;
    logic              r_ready;
  } axi_req_t;

  typedef struct packed {
    logic              aw_ready;
    logic              w_ready;
    logic              b_valid;
    logic [AXI_IW-1:0] b_id;
    logic [1:0]        b_resp;
    logic              ar_ready;
    logic              r_valid;
    logic [AXI_IW-1:0] r_id;
    logic [63:0]       r_data;
    logic [1:0]        r_resp;
    logic              r_last;
  } axi_rsp_t;

  // Requantisation: clip((x * mult + 2^(shift-1)) >>> shift, -128, 127),
  // i.e. multiply, round to nearest, shift, saturate to int8.
  localparam int unsigned RQ_IN_W = 48;
  function automatic logic signed [7:0] requant_wide(input logic signed [RQ_IN_W-1:0] x,
                                                    input requant_t rq);
    logic signed [RQ_IN_W+9:0] p;
    logic signed [RQ_IN_W+9:0] r;
    p = x * $signed({1'b0, rq.mult});
    if (rq.shift != 0) p = p + ((RQ_IN_W+10)'(1) << (rq.shift - 5'd1));
    r = p >>> rq.shift;
    if (r > 127) return 8'sd127;
    if (r < -128) return -8'sd128;
    return r[7:0];
  endfunction

  function automatic logic signed [7:0] requant(input logic signed [D-1:0] x,
                                               input requant_t rq);
    return requant_wide(RQ_IN_W'(x), rq);
  endfunction

endpackage
