// pcircuit_top: a p-circuit made into a memory-mapped AXI4-Lite peripheral.
//
// The p-circuit here is the Subset Sum solver (ssp_solver: two rows of invertible full-adder
// tiles, 155 weighted p-bits for 15-bit operands). A processor on the AXI4-Lite bus sets which
// bits are pinned and to what, then repeatedly takes coherent snapshots of the operands and the
// sum and reads them out; the histogram of A + B + C over many snapshots shows the solution.
// The paper wraps its p-circuits with AXI peripheral logic and reads them from a soft
// processor over a UART; it gives no register map, so the map below is this design's own.
//
// Register map (32-bit words, byte addresses; unused bits read 0):
//   0x00 A_SEL   RW  [NB-1:0]   pin enable per bit of A        0x04 A_CLAMP RW  pinned value
//   0x08 B_SEL   RW                                            0x0C B_CLAMP RW
//   0x10 C_SEL   RW                                            0x14 C_CLAMP RW
//   0x18 S_SEL   RW  [NB+1:0]   pin enable per bit of S        0x1C S_CLAMP RW
//   0x20 SNAP    W   any write captures A, B, C, S into the sample registers
//                R   number of snapshots taken
//   0x24 A_SMP   R   0x28 B_SMP R   0x2C C_SMP R   0x30 S_SMP R   (last snapshot)
//   0x34 SWEEPS  R   complete updates of the circuit since reset (one per 15 clocks)
// Reset clears every register, so the circuit starts fully floating.
//
// AXI4-Lite slave, 32-bit data: a write is accepted when address and data are both valid and
// no response is pending (awready and wready pulse together for one cycle), and answered with
// OKAY on the next cycle. A read is answered one cycle after it is accepted. Writes to
// read-only or unmapped addresses are ignored; reads of unmapped addresses return 0.
module pcircuit_top #(
  parameter int NB   = 15,
  parameter int I0_Q = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // write address
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [7:0]  s_axi_awaddr,
  // write data
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  // write response
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  output logic [1:0]  s_axi_bresp,
  // read address
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  input  logic [7:0]  s_axi_araddr,
  // read data
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp
);
  typedef enum logic [5:0] {
    A_SEL = 6'h00, A_CLAMP = 6'h01, B_SEL = 6'h02, B_CLAMP = 6'h03,
    C_SEL = 6'h04, C_CLAMP = 6'h05, S_SEL = 6'h06, S_CLAMP = 6'h07,
    SNAP  = 6'h08, A_SMP   = 6'h09, B_SMP = 6'h0A, C_SMP   = 6'h0B,
    S_SMP = 6'h0C, SWEEPS  = 6'h0D
  } reg_e;

  localparam int SB = NB + 2;

  logic [NB-1:0] a_sel, a_clamp, b_sel, b_clamp, c_sel, c_clamp;
  logic [SB-1:0] s_sel, s_clamp;
  logic [NB-1:0] a, b, c, a_smp, b_smp, c_smp;
  logic [SB-1:0] s, s_smp;
  logic [31:0]   n_snap, n_sweep;
  logic          sweep;

  ssp_solver #(.NB(NB), .I0_Q(I0_Q)) u_ssp (
    .clk(clk), .rst_n(rst_n),
    .a_sel(a_sel), .a_clamp(a_clamp), .b_sel(b_sel), .b_clamp(b_clamp),
    .c_sel(c_sel), .c_clamp(c_clamp), .s_sel(s_sel), .s_clamp(s_clamp),
    .a(a), .b(b), .c(c), .s(s), .sweep(sweep));

  // ---------------- write channel ----------------
  logic  wr_go;
  reg_e  wr_reg;
  logic [31:0] wd;

  assign wr_go  = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign wr_reg = reg_e'(s_axi_awaddr[7:2]);
  assign s_axi_awready = wr_go;
  assign s_axi_wready  = wr_go;
  assign s_axi_bresp   = 2'b00;

  // Byte strobes applied to the addressed register's current value.
  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [3:0] strb);
    for (int k = 0; k < 4; k++) if (strb[k]) old[8*k +: 8] = nw[8*k +: 8];
    return old;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      {a_sel, a_clamp, b_sel, b_clamp, c_sel, c_clamp} <= '0;
      {s_sel, s_clamp} <= '0;
      {a_smp, b_smp, c_smp, s_smp} <= '0;
      n_snap <= '0;
    end else begin
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_go) begin
        s_axi_bvalid <= 1'b1;
        unique case (wr_reg)
          A_SEL:   a_sel   <= NB'(merge(32'(a_sel),   s_axi_wdata, s_axi_wstrb));
          A_CLAMP: a_clamp <= NB'(merge(32'(a_clamp), s_axi_wdata, s_axi_wstrb));
          B_SEL:   b_sel   <= NB'(merge(32'(b_sel),   s_axi_wdata, s_axi_wstrb));
          B_CLAMP: b_clamp <= NB'(merge(32'(b_clamp), s_axi_wdata, s_axi_wstrb));
          C_SEL:   c_sel   <= NB'(merge(32'(c_sel),   s_axi_wdata, s_axi_wstrb));
          C_CLAMP: c_clamp <= NB'(merge(32'(c_clamp), s_axi_wdata, s_axi_wstrb));
          S_SEL:   s_sel   <= SB'(merge(32'(s_sel),   s_axi_wdata, s_axi_wstrb));
          S_CLAMP: s_clamp <= SB'(merge(32'(s_clamp), s_axi_wdata, s_axi_wstrb));
          SNAP: begin
            a_smp  <= a;
            b_smp  <= b;
            c_smp  <= c;
            s_smp  <= s;
            n_snap <= n_snap + 32'd1;
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------- complete-update counter ----------------
  always_ff @(posedge clk) begin
    if (!rst_n)     n_sweep <= '0;
    else if (sweep) n_sweep <= n_sweep + 32'd1;
  end

  // ---------------- read channel ----------------
  always_comb begin
    wd = '0;
    unique case (reg_e'(s_axi_araddr[7:2]))
      A_SEL:   wd = 32'(a_sel);
      A_CLAMP: wd = 32'(a_clamp);
      B_SEL:   wd = 32'(b_sel);
      B_CLAMP: wd = 32'(b_clamp);
      C_SEL:   wd = 32'(c_sel);
      C_CLAMP: wd = 32'(c_clamp);
      S_SEL:   wd = 32'(s_sel);
      S_CLAMP: wd = 32'(s_clamp);
      SNAP:    wd = n_snap;
      A_SMP:   wd = 32'(a_smp);
      B_SMP:   wd = 32'(b_smp);
      C_SMP:   wd = 32'(c_smp);
      S_SMP:   wd = 32'(s_smp);
      SWEEPS:  wd = n_sweep;
      default: wd = '0;
    endcase
  end

  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (s_axi_arvalid && s_axi_arready) begin
      s_axi_rvalid <= 1'b1;
      s_axi_rdata  <= wd;
    end else if (s_axi_rvalid && s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  // ---------------- bus rules ----------------
  // A response, once offered, is held until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid)
    else $error("pcircuit_top: write response dropped");
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata))
    else $error("pcircuit_top: read data changed before it was taken");

  initial assert (NB + 2 <= 32) else $error("pcircuit_top: operands wider than a bus word");
endmodule
