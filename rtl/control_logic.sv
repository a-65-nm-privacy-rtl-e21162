// control_logic: register file, feature buffer and operation sequencer.
//
// The host writes the configuration and up to NGRAM_MAX feature vectors of
// ROWS 6-bit features through the register bus (see the map in cie_pkg), then
// writes a command. The sequencer drives the mixed-signal encoder one N-gram
// step at a time and then either stops (ENCODE), adds the encoded vector to a
// class vector in SRAM (TRAIN, the continual-learning update) or runs the
// similarity check (INFER, the prediction).
//
// One N-gram step n (n = 0..N-1):
//   PRE    1 cycle   bit lines pre-charged, the DTCs load gram n's features
//   DTC    63 cycles word-line pulses of up to 63 cycles integrate on the BLs
//   PHI1   1 cycle   CDF samples the VGA output
//   PHI2   1 cycle   CDF starts its time pulse
//   CONV   TMAX      permutator integrates neighbour bias x pulse on C_M
//   LATCH  1 cycle   C_L/C_R swap; the new product becomes the bias
// after which VTC (1 cycle) starts the converters and COUNT (VTC_FS+1 cycles)
// lets the bundler counters measure the pulses. An encoding therefore takes
// 1 + N*(67+TMAX) + 1 + VTC_FS+1 cycles plus one final cycle: 1157 cycles for
// N=1 at the default sizes. TRAIN then spends 2 cycles per SRAM word
// (read, write back) and INFER runs the similarity check (classes*32+3
// cycles) plus one cycle. A_CYCLES reports the count of the last command.
//
// Training adds (h_j - offset) to element j of class k with 16-bit signed
// saturation; the query fed to the similarity check is centred the same way.
// Rows at or beyond the programmed feature length, and every row while no
// encoding runs, are power-gated through pg. The per-step schedule follows
// the order of operations the paper describes (pre-charge, DTC pulse, CDF,
// permutation, VTC, counting); the cycle counts, the command set, the
// centring offset and the register map are this design's own. Host access to
// the SRAM is served only while no command runs (reads then return 0 and
// writes are dropped). Register reads answer one cycle after the request,
// SRAM reads two cycles after.
module control_logic
  import cie_pkg::FEAT_W, cie_pkg::CNT_W, cie_pkg::ELEM_W, cie_pkg::Q_W, cie_pkg::CLASS_W;
  import cie_pkg::bus_req_t, cie_pkg::bus_rsp_t, cie_pkg::op_e;
  import cie_pkg::OP_NONE, cie_pkg::OP_TRAIN, cie_pkg::OP_INFER;
  import cie_pkg::A_CMD, cie_pkg::A_NGRAM, cie_pkg::A_NCLASS, cie_pkg::A_GAIN, cie_pkg::A_OFFSET;
  import cie_pkg::A_FLEN, cie_pkg::A_STATUS, cie_pkg::A_CYCLES, cie_pkg::A_FEAT, cie_pkg::A_HV, cie_pkg::A_SRAM;
#(
  parameter int unsigned ROWS      = cie_pkg::ROWS,
  parameter int unsigned COLS      = cie_pkg::COLS,
  parameter int unsigned TILES     = cie_pkg::TILES,
  parameter int unsigned NGRAM_MAX = cie_pkg::NGRAM_MAX,
  parameter int unsigned TMAX      = cie_pkg::TMAX,
  parameter int unsigned VTC_FS    = cie_pkg::VTC_FS,
  parameter int unsigned AW        = cie_pkg::SRAM_AW
) (
  input  logic clk,
  input  logic rst_n,
  // register bus
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp,
  // DTCs and array
  output logic                          dtc_start,
  output logic [ROWS-1:0][FEAT_W-1:0]   dtc_feat,
  output logic                          pre,
  output logic [ROWS-1:0]               pg,
  // CDF, permutator, VTC, bundler
  output logic                          phi1,
  output logic                          phi2,
  output logic [2:0]                    gain_sel,
  output logic                          perm_init,
  output logic                          perm_latch,
  output logic                          vtc_start,
  output logic                          bnd_clr,
  input  logic [TILES-1:0][COLS-1:0][CNT_W-1:0] h_all,
  // SRAM
  output logic                          sram_en,
  output logic [COLS-1:0]               sram_we,
  output logic [AW-1:0]                 sram_addr,
  output logic [COLS-1:0][ELEM_W-1:0]   sram_wdata,
  input  logic [COLS-1:0][ELEM_W-1:0]   sram_rdata,
  // similarity check
  output logic                          sim_start,
  output logic [CLASS_W-1:0]            sim_n_classes,
  input  logic                          sim_mem_req,
  input  logic [AW-1:0]                 sim_mem_addr,
  input  logic [$clog2(TILES)-1:0]      sim_q_word,
  output logic signed [COLS-1:0][Q_W-1:0] sim_q_data,
  input  logic                          sim_done,
  input  logic [CLASS_W-1:0]            sim_best,
  // status
  output logic                          busy,
  output logic                          done
);
  localparam int unsigned TWW  = $clog2(TILES);
  localparam int unsigned DTC_CYC = (1 << FEAT_W) - 1;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_PRE, S_DTC, S_PHI1, S_PHI2, S_CONV, S_LATCH,
    S_VTC, S_COUNT, S_RD, S_WR, S_SIM_START, S_SIM_WAIT
  } state_e;

  state_e state;

  // ---------------- configuration registers ----------------
  logic [3:0]         n_gram;        // 1..NGRAM_MAX
  logic [CLASS_W-1:0] n_classes;
  logic [CNT_W-1:0]   offset;
  logic [6:0]         flen;          // 1..ROWS
  logic [CLASS_W-1:0] cls, pred;
  op_e                op;
  logic [15:0]        cycles;
  logic [FEAT_W-1:0]  feat [NGRAM_MAX][ROWS];

  // ---------------- sequencer counters ----------------
  logic [10:0]        wait_cnt;
  logic [3:0]         gram;
  logic [TWW-1:0]     word;

  wire cmd_wr = bus_req.req && bus_req.we && bus_req.addr == A_CMD && state == S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_gram    <= 4'd1;
      n_classes <= CLASS_W'(1);
      gain_sel  <= 3'd4;
      offset    <= '0;
      flen      <= 7'(ROWS);
      cls       <= '0;
      op        <= OP_NONE;
    end else if (bus_req.req && bus_req.we) begin
      unique case (bus_req.addr)
        A_NGRAM:  n_gram    <= (bus_req.wdata[3:0] == 0) ? 4'd1 :
                               (bus_req.wdata[3:0] > 4'(NGRAM_MAX)) ? 4'(NGRAM_MAX) : bus_req.wdata[3:0];
        A_NCLASS: n_classes <= bus_req.wdata[CLASS_W-1:0];
        A_GAIN:   gain_sel  <= bus_req.wdata[2:0];
        A_OFFSET: offset    <= bus_req.wdata[CNT_W-1:0];
        A_FLEN:   flen      <= (bus_req.wdata[6:0] == 0 || bus_req.wdata[6:0] > 7'(ROWS)) ? 7'(ROWS) : bus_req.wdata[6:0];
        A_CMD: if (state == S_IDLE) begin
          op  <= op_e'(bus_req.wdata[1:0]);
          cls <= bus_req.wdata[4 +: CLASS_W];
        end
        default: ;
      endcase
    end
  end

  // feature buffer: gram n, row i at A_FEAT + n*ROWS + i
  localparam int unsigned GW = $clog2(NGRAM_MAX);
  localparam int unsigned RW = $clog2(ROWS);
  wire [15:0]   feat_off  = bus_req.addr - A_FEAT;
  wire [GW-1:0] feat_gram = GW'(feat_off / 16'(ROWS));
  wire [RW-1:0] feat_row  = RW'(feat_off % 16'(ROWS));
  always_ff @(posedge clk) begin
    if (bus_req.req && bus_req.we && bus_req.addr >= A_FEAT &&
        feat_off < 16'(NGRAM_MAX * ROWS))
      feat[feat_gram][feat_row] <= bus_req.wdata[FEAT_W-1:0];
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      wait_cnt <= '0;
      gram     <= '0;
      word     <= '0;
      pred     <= '0;
      done     <= 1'b0;
      cycles   <= '0;
    end else begin
      if (state != S_IDLE) cycles <= cycles + 1'b1;
      unique case (state)
        S_IDLE: if (cmd_wr && bus_req.wdata[1:0] != OP_NONE) begin
          state  <= S_INIT;
          done   <= 1'b0;
          cycles <= 16'd0;
        end
        S_INIT:  begin gram <= '0; state <= S_PRE; end
        S_PRE:   begin wait_cnt <= 11'(DTC_CYC - 1); state <= S_DTC; end
        S_DTC:   if (wait_cnt == 0) state <= S_PHI1; else wait_cnt <= wait_cnt - 1'b1;
        S_PHI1:  state <= S_PHI2;
        S_PHI2:  begin wait_cnt <= 11'(TMAX - 1); state <= S_CONV; end
        S_CONV:  if (wait_cnt == 0) state <= S_LATCH; else wait_cnt <= wait_cnt - 1'b1;
        S_LATCH: begin
          gram  <= gram + 1'b1;
          state <= (gram + 1'b1 == n_gram) ? S_VTC : S_PRE;
        end
        S_VTC:   begin wait_cnt <= 11'(VTC_FS); state <= S_COUNT; end
        S_COUNT: if (wait_cnt == 0) begin
          word <= '0;
          unique case (op)
            OP_TRAIN: state <= S_RD;
            OP_INFER: state <= S_SIM_START;
            default:  begin state <= S_IDLE; done <= 1'b1; end
          endcase
        end else wait_cnt <= wait_cnt - 1'b1;
        S_RD:    state <= S_WR;
        S_WR: begin
          word <= word + 1'b1;
          if (word == TWW'(TILES - 1)) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_RD;
        end
        S_SIM_START: state <= S_SIM_WAIT;
        S_SIM_WAIT: if (sim_done) begin
          pred  <= sim_best;
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  wire encoding = state inside {S_INIT, S_PRE, S_DTC, S_PHI1, S_PHI2, S_CONV, S_LATCH, S_VTC, S_COUNT};

  assign busy       = (state != S_IDLE);
  assign pre        = (state == S_PRE);
  assign dtc_start  = (state == S_PRE);
  assign phi1       = (state == S_PHI1);
  assign phi2       = (state == S_PHI2);
  assign perm_init  = (state == S_INIT);
  assign bnd_clr    = (state == S_INIT);
  assign perm_latch = (state == S_LATCH);
  assign vtc_start  = (state == S_VTC);
  assign sim_start  = (state == S_SIM_START);
  assign sim_n_classes = n_classes;

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      dtc_feat[i] = feat[gram[$clog2(NGRAM_MAX)-1:0]][i];
      pg[i]       = encoding && (7'(i) < flen);
    end
  end

  // centred query / training update for one word
  logic signed [COLS-1:0][Q_W-1:0] centred;
  always_comb begin
    for (int l = 0; l < COLS; l++)
      centred[l] = signed'({1'b0, h_all[(state == S_SIM_WAIT) ? sim_q_word : word][l]})
                 - signed'({1'b0, offset});
  end
  assign sim_q_data = centred;

  function automatic logic [ELEM_W-1:0] sat_add(input logic [ELEM_W-1:0] a,
                                                input logic signed [Q_W-1:0] b);
    logic signed [ELEM_W:0] s;
    s = signed'({a[ELEM_W-1], a}) + (ELEM_W+1)'(b);
    if (s > signed'((ELEM_W+1)'((1 << (ELEM_W-1)) - 1)))  return {1'b0, {(ELEM_W-1){1'b1}}};
    if (s < -signed'((ELEM_W+1)'(1 << (ELEM_W-1))))       return {1'b1, {(ELEM_W-1){1'b0}}};
    return s[ELEM_W-1:0];
  endfunction

  // ---------------- SRAM port and host access ----------------
  wire [15:0] elem      = bus_req.addr - A_SRAM;
  wire        host_sram = bus_req.req && bus_req.addr >= A_SRAM && state == S_IDLE;
  wire [AW-1:0] host_word = AW'(elem / 16'(COLS));
  wire [$clog2(COLS)-1:0] host_lane = elem[$clog2(COLS)-1:0];
  logic [$clog2(COLS)-1:0] rd_lane;

  always_comb begin
    sram_en    = 1'b0;
    sram_we    = '0;
    sram_addr  = '0;
    sram_wdata = '0;
    if (state == S_SIM_WAIT) begin
      sram_en   = sim_mem_req;
      sram_addr = sim_mem_addr;
    end else if (state == S_RD || state == S_WR) begin
      sram_en   = 1'b1;
      sram_addr = AW'(cls) * AW'(TILES) + AW'(word);
      if (state == S_WR) begin
        sram_we = '1;
        for (int l = 0; l < COLS; l++) sram_wdata[l] = sat_add(sram_rdata[l], centred[l]);
      end
    end else if (host_sram) begin
      sram_en   = 1'b1;
      sram_addr = host_word;
      if (bus_req.we) begin
        sram_we[host_lane]    = 1'b1;
        sram_wdata[host_lane] = bus_req.wdata;
      end
    end
  end

  // ---------------- register read path ----------------
  logic        sram_rd_pend;
  wire [15:0]  hv_off = bus_req.addr - A_HV;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_rsp      <= '0;
      sram_rd_pend <= 1'b0;
      rd_lane      <= '0;
    end else begin
      bus_rsp.ack  <= 1'b0;
      sram_rd_pend <= 1'b0;
      if (sram_rd_pend) begin
        bus_rsp.ack   <= 1'b1;
        bus_rsp.rdata <= sram_rdata[rd_lane];
      end
      if (bus_req.req) begin
        if (host_sram && !bus_req.we) begin
          sram_rd_pend <= 1'b1;
          rd_lane      <= host_lane;
        end else begin
          bus_rsp.ack   <= 1'b1;
          bus_rsp.rdata <= '0;
          if (bus_req.addr >= A_SRAM)
            bus_rsp.rdata <= '0;
          else if (bus_req.addr >= A_HV) begin
            if (hv_off < 16'(TILES * COLS))
              bus_rsp.rdata <= 16'(h_all[hv_off / 16'(COLS)][hv_off % 16'(COLS)]);
          end else if (bus_req.addr >= A_FEAT) begin
            if (feat_off < 16'(NGRAM_MAX * ROWS))
              bus_rsp.rdata <= 16'(feat[feat_gram][feat_row]);
          end else begin
            unique case (bus_req.addr)
              A_NGRAM:  bus_rsp.rdata <= 16'(n_gram);
              A_NCLASS: bus_rsp.rdata <= 16'(n_classes);
              A_GAIN:   bus_rsp.rdata <= 16'(gain_sel);
              A_OFFSET: bus_rsp.rdata <= 16'(offset);
              A_FLEN:   bus_rsp.rdata <= 16'(flen);
              A_STATUS: bus_rsp.rdata <= {8'd0, 4'(pred), 2'b00, done, busy};
              A_CYCLES: bus_rsp.rdata <= cycles;
              default:  bus_rsp.rdata <= '0;
            endcase
          end
        end
      end
    end
  end
endmodule
