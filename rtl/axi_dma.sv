// axi_dma: AXI4 master of the accelerator (the 128-bit HP port).
//
// Read side: rd_start with a byte address and a word count fetches
// ceil(len/4) beats in bursts of at most MAX_BURST beats that never cross a
// 4 KB boundary, one burst outstanding at a time, and hands the 32-bit words
// of each beat out one per cycle on rd_word_valid/rd_word (word 0 = bits
// 31:0). rd_done pulses after the last word.
// Write side: wr_start with a byte address and word count fetches words from
// the source buffer through src_idx/src_data (combinational read), packs four
// per beat and writes them in bursts; the last beat's strobes cover only the
// words that exist. wr_done pulses after the last write response.
// The paper specifies only the port (AXI master on a 128-bit HP port); the
// packing of one value per 32-bit word, the burst policy and the 16-byte
// alignment required of the addresses are this design's choices.
module axi_dma #(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 128,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // read command and word stream
  input  logic                rd_start,
  input  logic [ADDR_W-1:0]   rd_addr,
  input  logic [31:0]         rd_len,
  output logic                rd_word_valid,
  output logic [31:0]         rd_word,
  output logic                rd_done,
  // write command and source buffer
  input  logic                wr_start,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [31:0]         wr_len,
  output logic [31:0]         src_idx,
  input  logic [31:0]         src_data,
  output logic                wr_done,
  // AXI4 master
  output logic [ADDR_W-1:0]   m_axi_araddr,
  output logic [7:0]          m_axi_arlen,
  output logic [2:0]          m_axi_arsize,
  output logic [1:0]          m_axi_arburst,
  output logic                m_axi_arvalid,
  input  logic                m_axi_arready,
  input  logic [DATA_W-1:0]   m_axi_rdata,
  input  logic                m_axi_rlast,
  input  logic                m_axi_rvalid,
  output logic                m_axi_rready,
  output logic [ADDR_W-1:0]   m_axi_awaddr,
  output logic [7:0]          m_axi_awlen,
  output logic [2:0]          m_axi_awsize,
  output logic [1:0]          m_axi_awburst,
  output logic                m_axi_awvalid,
  input  logic                m_axi_awready,
  output logic [DATA_W-1:0]   m_axi_wdata,
  output logic [DATA_W/8-1:0] m_axi_wstrb,
  output logic                m_axi_wlast,
  output logic                m_axi_wvalid,
  input  logic                m_axi_wready,
  input  logic                m_axi_bvalid,
  output logic                m_axi_bready
);
  localparam int unsigned WPB = DATA_W / 32;        // words per beat
  localparam int unsigned BB  = DATA_W / 8;         // bytes per beat

  function automatic logic [8:0] burst_beats(input logic [ADDR_W-1:0] a, input logic [31:0] left);
    logic [31:0] to4k, n;
    to4k = (32'd4096 - 32'(a[11:0])) / BB;
    n = (left < MAX_BURST) ? left : MAX_BURST;
    if (to4k < n) n = to4k;
    return 9'(n);
  endfunction

  assign m_axi_arsize  = 3'($clog2(BB));
  assign m_axi_awsize  = 3'($clog2(BB));
  assign m_axi_arburst = 2'b01;
  assign m_axi_awburst = 2'b01;
  assign m_axi_bready  = 1'b1;

  // ---------------- read side ----------------
  typedef enum logic [1:0] {R_IDLE, R_AR, R_DATA} rstate_t;
  rstate_t rstate;
  logic [ADDR_W-1:0] r_addr;
  logic [31:0] r_beats_left, r_words_left;
  logic [DATA_W-1:0] r_buf;
  logic [$clog2(WPB):0] r_cnt;        // words left in r_buf
  logic [$clog2(WPB)-1:0] r_pos;

  assign m_axi_rready  = (rstate == R_DATA) && (r_cnt == 0);
  assign rd_word_valid = (r_cnt != 0);
  assign rd_word       = r_buf[32*r_pos +: 32];
  assign m_axi_arvalid = (rstate == R_AR);
  assign m_axi_araddr  = r_addr;
  assign m_axi_arlen   = 8'(burst_beats(r_addr, r_beats_left) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= R_IDLE; r_addr <= '0; r_beats_left <= '0; r_words_left <= '0;
      r_buf <= '0; r_cnt <= '0; r_pos <= '0; rd_done <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      if (r_cnt != 0) begin
        r_cnt <= r_cnt - 1'b1;
        r_pos <= r_pos + 1'b1;
        r_words_left <= r_words_left - 1;
        if (r_words_left == 1) begin rd_done <= 1'b1; r_cnt <= '0; end
      end
      case (rstate)
        R_IDLE: if (rd_start && rd_len != 0) begin
          r_addr <= rd_addr; r_words_left <= rd_len;
          r_beats_left <= (rd_len + WPB - 1) / WPB;
          rstate <= R_AR;
        end
        R_AR: if (m_axi_arready) begin
          r_addr <= r_addr + ADDR_W'(32'(burst_beats(r_addr, r_beats_left)) * BB);
          r_beats_left <= r_beats_left - 32'(burst_beats(r_addr, r_beats_left));
          rstate <= R_DATA;
        end
        R_DATA: if (m_axi_rvalid && m_axi_rready) begin
          r_buf <= m_axi_rdata; r_pos <= '0;
          r_cnt <= ($clog2(WPB)+1)'(WPB);
          if (m_axi_rlast) rstate <= (r_beats_left == 0) ? R_IDLE : R_AR;
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // ---------------- write side ----------------
  typedef enum logic [2:0] {W_IDLE, W_AW, W_FILL, W_BEAT, W_RESP} wstate_t;
  wstate_t wstate;
  logic [ADDR_W-1:0] w_addr;
  logic [31:0] w_words_left, w_idx;
  logic [8:0]  w_beats_burst, w_beat;
  logic [$clog2(WPB):0] w_fill;
  logic [DATA_W-1:0] w_buf;
  logic [BB-1:0] w_strb;

  assign src_idx       = w_idx;
  assign m_axi_awvalid = (wstate == W_AW);
  assign m_axi_awaddr  = w_addr;
  assign m_axi_awlen   = 8'(burst_beats(w_addr, (w_words_left + WPB - 1) / WPB) - 1);
  assign m_axi_wvalid  = (wstate == W_BEAT);
  assign m_axi_wdata   = w_buf;
  assign m_axi_wstrb   = w_strb;
  assign m_axi_wlast   = (w_beat == w_beats_burst - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate <= W_IDLE; w_addr <= '0; w_words_left <= '0; w_idx <= '0;
      w_beats_burst <= '0; w_beat <= '0; w_fill <= '0; w_buf <= '0; w_strb <= '0; wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      case (wstate)
        W_IDLE: if (wr_start && wr_len != 0) begin
          w_addr <= wr_addr; w_words_left <= wr_len; w_idx <= '0;
          wstate <= W_AW;
        end
        W_AW: begin
          if (m_axi_awready) begin
            w_beats_burst <= burst_beats(w_addr, (w_words_left + WPB - 1) / WPB);
            w_beat <= '0; w_fill <= '0; w_buf <= '0; w_strb <= '0;
            wstate <= W_FILL;
          end
        end
        W_FILL: begin
          if (w_words_left != 0) begin
            w_buf[32*w_fill +: 32] <= src_data;
            w_strb[4*w_fill +: 4]  <= 4'hF;
            w_idx <= w_idx + 1;
            w_words_left <= w_words_left - 1;
          end
          w_fill <= w_fill + 1'b1;
          if (w_fill == ($clog2(WPB)+1)'(WPB - 1)) wstate <= W_BEAT;
        end
        W_BEAT: if (m_axi_wready) begin
          w_addr <= w_addr + ADDR_W'(BB);
          w_fill <= '0; w_buf <= '0; w_strb <= '0;
          if (m_axi_wlast) wstate <= W_RESP;
          else begin w_beat <= w_beat + 1'b1; wstate <= W_FILL; end
        end
        W_RESP: if (m_axi_bvalid) begin
          if (w_words_left == 0) begin wr_done <= 1'b1; wstate <= W_IDLE; end
          else wstate <= W_AW;
        end
        default: wstate <= W_IDLE;
      endcase
    end
  end
endmodule
