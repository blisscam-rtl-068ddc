// insensor_npu -- the small NPU on the sensor's logic layer that runs the ROI
// prediction network and hands the ROI corners to the pixel array.
//
// It consists of an N x N systolic MAC array, a scratchpad of SPAD_BYTES bytes
// organised as N-byte words, and a command sequencer that executes three
// commands issued by the ROI-network schedule:
//   NPU_LOAD_EVENTS  copy the binary event map out of the pixel SRAMs into the
//                    scratchpad from a_addr on: row r of the array, COLS bits,
//                    fills ceil(COLS/(8N)) words, bit c of the row at bit c of
//                    the row's words.  One word per cycle.
//   NPU_GEMM         C = A x B for one N x N tile with reduction length k:
//                    word a_addr+k holds column k of A (byte i = A[i][k]),
//                    word b_addr+k row k of B (byte j = B[k][j]).  The 32-bit
//                    results are shifted right arithmetically by `shift`,
//                    optionally clamped at 0 (relu), saturated to int8 and
//                    written as N words from c_addr on (word i = row i of C).
//   NPU_SET_ROI      read the word at a_addr and publish its four 16-bit fields
//                    {y2, y1, x2, x1} (x1 in the low bits) as the ROI; roi_valid
//                    pulses for one cycle.
// The host port (ext_*) reaches the scratchpad while no command runs; the
// host uses it to load the network's weights and, every frame, the previous
// frame's segmentation map returned over MIPI.
//
// The 8 x 8 array and 512 KB scratchpad sizes are those of the design.  The
// command set, data layout, int8/int32 arithmetic and requantisation are
// choices of this implementation; the layer schedule of the ROI network is
// not part of this module.
//
// Timing: the scratchpad reads synchronously (one cycle).  LOAD_EVENTS takes
// ROWS*ceil(COLS/(8N)) cycles, GEMM 2k + 3N + 1 cycles, SET_ROI 2 (busy
// cycles after the command is accepted).
//
// Lint note: the simulation assertions use `disable iff (!rst_n)`, which the
// linter reports as rst_n being used both as an asynchronous reset and as a
// synchronous signal (SYNCASYNCNET).  The assertions are not hardware; the
// flops themselves use rst_n only as an asynchronous reset.
module insensor_npu
  import blisscam_pkg::*;
#(
  parameter int unsigned N          = 8,
  parameter int unsigned SPAD_BYTES = 524288,
  parameter int unsigned ROWS       = 400,
  parameter int unsigned COLS       = 640
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // commands
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  npu_cmd_t              cmd,
  output logic                  busy,
  // host access to the scratchpad (only while idle)
  input  logic                  ext_en,
  input  logic                  ext_we,
  input  logic [19:0]           ext_addr,
  input  logic [8*N-1:0]        ext_wdata,
  output logic [8*N-1:0]        ext_rdata,
  // event map from the pixel array
  output logic [COORD_W-1:0]    ev_row_addr,
  input  logic [COLS-1:0]       ev_row_bits,
  // ROI to the pixel array
  output roi_t                  roi,
  output logic                  roi_valid
);
  localparam int unsigned WW    = 8 * N;                 // word width
  localparam int unsigned DEPTH = SPAD_BYTES / N;        // words
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned WPR   = (COLS + WW - 1) / WW;  // words per event row

  typedef enum logic [3:0] {
    S_IDLE, S_EV, S_G_RA, S_G_RB, S_G_FEED, S_G_DRAIN, S_G_WB, S_ROI_RD, S_ROI_SET
  } state_e;

  state_e   state;
  npu_cmd_t cur;

  // ---------------- scratchpad (single port, synchronous read) ------------
  logic [WW-1:0] spad [DEPTH];
  logic          sp_en, sp_we;
  logic [AW-1:0] sp_addr;
  logic [WW-1:0] sp_wdata, sp_rdata;

  always_ff @(posedge clk) begin
    if (sp_en) begin
      if (sp_we) spad[sp_addr] <= sp_wdata;
      else       sp_rdata      <= spad[sp_addr];
    end
  end
  // word addresses beyond the scratchpad are ignored (writes dropped)
  logic ext_in_range;
  assign ext_in_range = (32'(ext_addr) < DEPTH);
  assign ext_rdata = sp_rdata;

  // ---------------- systolic array -----------------------------------------
  logic              sa_clr, sa_valid;
  logic signed [7:0] sa_a [N];
  logic signed [7:0] sa_b [N];
  logic signed [31:0] sa_acc [N][N];
  logic [WW-1:0]     a_word;

  systolic_array #(.N(N)) u_sa (
    .clk, .rst_n, .clr(sa_clr), .in_valid(sa_valid), .a_col(sa_a), .b_row(sa_b), .acc(sa_acc)
  );

  always_comb
    for (int i = 0; i < N; i++) begin
      sa_a[i] = a_word[8*i +: 8];
      sa_b[i] = sp_rdata[8*i +: 8];
    end

  // ---------------- sequencer ----------------------------------------------
  logic [COORD_W-1:0] ev_row;
  logic [15:0]        ev_w, kcnt, cnt;

  function automatic logic [7:0] requant(input logic signed [31:0] v,
                                         input logic [4:0] sh, input logic relu);
    logic signed [31:0] s;
    s = v >>> sh;
    if (relu && s < 0) s = 0;
    if (s > 127)       return 8'd127;
    else if (s < -128) return 8'h80;
    else               return s[7:0];
  endfunction

  logic [WW-1:0] ev_word;
  always_comb begin
    ev_word = '0;
    for (int b = 0; b < int'(WW); b++)
      if (int'(ev_w) * int'(WW) + b < int'(COLS)) ev_word[b] = ev_row_bits[int'(ev_w) * int'(WW) + b];
  end

  logic [WW-1:0] c_word;
  always_comb begin
    c_word = '0;
    for (int j = 0; j < N; j++)
      c_word[8*j +: 8] = requant(sa_acc[cnt[$clog2(N)-1:0]][j], cur.shift, cur.relu);
  end

  assign cmd_ready   = (state == S_IDLE);
  assign busy        = (state != S_IDLE);
  assign ev_row_addr = ev_row;

  always_comb begin
    sp_en = 1'b0; sp_we = 1'b0; sp_addr = '0; sp_wdata = '0;
    sa_clr = 1'b0; sa_valid = 1'b0;
    unique case (state)
      S_IDLE: begin
        sp_en = ext_en && ext_in_range; sp_we = ext_we; sp_addr = AW'(ext_addr); sp_wdata = ext_wdata;
        sa_clr = cmd_valid && cmd.op == NPU_GEMM;
      end
      S_EV: begin
        sp_en = 1'b1; sp_we = 1'b1;
        sp_addr  = AW'(cur.a_addr) + AW'(ev_row) * AW'(WPR) + AW'(ev_w);
        sp_wdata = ev_word;
      end
      S_G_RA:   begin sp_en = 1'b1; sp_addr = AW'(cur.a_addr) + AW'(kcnt); end
      S_G_RB:   begin sp_en = 1'b1; sp_addr = AW'(cur.b_addr) + AW'(kcnt); end
      S_G_FEED: begin
        sa_valid = 1'b1;
        if (kcnt + 16'd1 < cur.k) begin sp_en = 1'b1; sp_addr = AW'(cur.a_addr) + AW'(kcnt) + AW'(1); end
      end
      S_G_WB: begin
        sp_en = 1'b1; sp_we = 1'b1; sp_addr = AW'(cur.c_addr) + AW'(cnt); sp_wdata = c_word;
      end
      S_ROI_RD: begin sp_en = 1'b1; sp_addr = AW'(cur.a_addr); end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; ev_row <= '0; ev_w <= '0; kcnt <= '0; cnt <= '0;
      a_word <= '0; roi <= '0; roi_valid <= 1'b0;
    end else begin
      roi_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cur <= cmd; ev_row <= '0; ev_w <= '0; kcnt <= '0; cnt <= '0;
          unique case (cmd.op)
            NPU_LOAD_EVENTS: state <= S_EV;
            NPU_GEMM:        state <= (cmd.k == '0) ? S_G_DRAIN : S_G_RA;
            NPU_SET_ROI:     state <= S_ROI_RD;
            default:         state <= S_IDLE;
          endcase
        end
        S_EV: begin
          if (ev_w == 16'(WPR - 1)) begin
            ev_w <= '0;
            if (ev_row == COORD_W'(ROWS - 1)) state <= S_IDLE;
            else ev_row <= ev_row + 1'b1;
          end else ev_w <= ev_w + 1'b1;
        end
        S_G_RA:   state <= S_G_RB;
        S_G_RB:   begin a_word <= sp_rdata; state <= S_G_FEED; end
        S_G_FEED: begin
          kcnt <= kcnt + 1'b1;
          if (kcnt + 16'd1 < cur.k) state <= S_G_RB;
          else begin state <= S_G_DRAIN; cnt <= '0; end
        end
        S_G_DRAIN: begin
          if (cnt == 16'(2*N - 1)) begin cnt <= '0; state <= S_G_WB; end
          else cnt <= cnt + 1'b1;
        end
        S_G_WB: begin
          if (cnt == 16'(N - 1)) state <= S_IDLE;
          else cnt <= cnt + 1'b1;
        end
        S_ROI_RD:  state <= S_ROI_SET;
        S_ROI_SET: begin
          roi <= '{x1: sp_rdata[15:0], x2: sp_rdata[31:16], y1: sp_rdata[47:32], y2: sp_rdata[63:48]};
          roi_valid <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cur_op: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_EV |-> cur.op == NPU_LOAD_EVENTS) and (state == S_ROI_RD |-> cur.op == NPU_SET_ROI));
  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n) ext_en |-> state == S_IDLE);
endmodule
