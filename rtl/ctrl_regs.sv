// ctrl_regs: AXI4-Lite control-register slave of the accelerator.
//
// The host reaches the core only through these registers (32-bit AXI-Lite,
// as in the paper): it picks the operation mode, the number of ODE
// iterations C, the DRAM addresses, and starts an operation. The register
// map is this design's own:
//   0x00 CTRL   W: bit 0 = start (self-clearing pulse)
//   0x04 STATUS R: bit 0 = busy, bit 1 = done (sticky, cleared by start)
//   0x08 MODE   RW: 0 = load parameters, 1 = inference
//   0x0C ITERS  RW: C, number of Euler steps of every iterated block (reset 10)
//   0x10 SRC    RW: DRAM byte address read from (parameters or input map)
//   0x14 DST    RW: parameter-space word address written in load mode
//   0x18 LEN    RW: number of 32-bit words to load in load mode
//   0x1C OUT    RW: DRAM byte address of the output map (inference)
//   0x20 CYCLES R: clock cycles taken by the last operation
// Write address and data are accepted together in one cycle; one
// outstanding write and one outstanding read; responses are always OKAY.
module ctrl_regs #(
  parameter int unsigned AXIL_AW = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [AXIL_AW-1:0] s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic [3:0]         s_axil_wstrb,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [AXIL_AW-1:0] s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  output logic               start,
  output logic               mode,
  output logic [15:0]        iters,
  output logic [31:0]        src_addr,
  output logic [31:0]        dst_addr,
  output logic [31:0]        len,
  output logic [31:0]        out_addr,
  input  logic               busy,
  input  logic               done_evt,
  input  logic [31:0]        cycles
);
  logic done_flag;
  logic wr_fire;
  assign wr_fire        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_fire;
  assign s_axil_wready  = wr_fire;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw, input logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = nw[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; mode <= 1'b0; iters <= 16'd10;
      src_addr <= '0; dst_addr <= '0; len <= '0; out_addr <= '0;
      done_flag <= 1'b0; s_axil_bvalid <= 1'b0; s_axil_rvalid <= 1'b0; s_axil_rdata <= '0;
    end else begin
      start <= 1'b0;
      if (done_evt) done_flag <= 1'b1;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        case (s_axil_awaddr[AXIL_AW-1:2])
          4'h0: if (s_axil_wstrb[0] && s_axil_wdata[0] && !busy) begin start <= 1'b1; done_flag <= 1'b0; end
          4'h2: if (s_axil_wstrb[0]) mode <= s_axil_wdata[0];
          4'h3: iters    <= 16'(merge(32'(iters), s_axil_wdata, s_axil_wstrb));
          4'h4: src_addr <= merge(src_addr, s_axil_wdata, s_axil_wstrb);
          4'h5: dst_addr <= merge(dst_addr, s_axil_wdata, s_axil_wstrb);
          4'h6: len      <= merge(len, s_axil_wdata, s_axil_wstrb);
          4'h7: out_addr <= merge(out_addr, s_axil_wdata, s_axil_wstrb);
          default: ;
        endcase
      end
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        case (s_axil_araddr[AXIL_AW-1:2])
          4'h1:    s_axil_rdata <= {30'd0, done_flag, busy};
          4'h2:    s_axil_rdata <= {31'd0, mode};
          4'h3:    s_axil_rdata <= {16'd0, iters};
          4'h4:    s_axil_rdata <= src_addr;
          4'h5:    s_axil_rdata <= dst_addr;
          4'h6:    s_axil_rdata <= len;
          4'h7:    s_axil_rdata <= out_addr;
          4'h8:    s_axil_rdata <= cycles;
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end
endmodule
