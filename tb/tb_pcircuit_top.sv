// tb_pcircuit_top: end-to-end test of the AXI4-Lite p-circuit peripheral at its default size
// (15-bit Subset Sum solver, 155 p-bits), driven the way a host processor would drive it.
//   1. every control register is written and read back through the bus (with byte strobes);
//   2. the paper's instance is programmed: A in {0,512}, B in {0,1024}, C in {0,2048},
//      S pinned to 3584;
//   3. snapshots are taken and read back over the bus, and A + B + C is histogrammed;
//      3584 must be the most frequent value and all sums must come from the sets;
//   4. the complete-update counter must advance once per 15 clock cycles.
// It also counts how often each mechanism of the design acted - bus writes and reads,
// snapshots, pinned p-bits, a carry handed from one tile to the next, the overflow clamp of the
// weighted sum - and counts a failure for any that never did.
module tb_pcircuit_top;
  import pbit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic        awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [7:0]  awaddr = '0, araddr = '0;
  logic [31:0] wdata = '0;
  logic [3:0]  wstrb = '0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;
  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0, n_snap = 0, n_carry = 0, n_ovf = 0, n_pinned = 0;

  pcircuit_top dut (
    .clk(clk), .rst_n(rst_n),
    .s_axi_awvalid(awvalid), .s_axi_awready(awready), .s_axi_awaddr(awaddr),
    .s_axi_wvalid(wvalid), .s_axi_wready(wready), .s_axi_wdata(wdata), .s_axi_wstrb(wstrb),
    .s_axi_bvalid(bvalid), .s_axi_bready(bready), .s_axi_bresp(bresp),
    .s_axi_arvalid(arvalid), .s_axi_arready(arready), .s_axi_araddr(araddr),
    .s_axi_rvalid(rvalid), .s_axi_rready(rready), .s_axi_rdata(rdata), .s_axi_rresp(rresp));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- bus master ----------------
  // Both bus tasks start and end on a falling clock edge.
  task automatic axi_write(input logic [7:0] addr, input logic [31:0] data,
                           input logic [3:0] strb = 4'hF);
    awaddr = addr; wdata = data; wstrb = strb;
    awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);   // accepted on the edge in between
    awvalid = 0; wvalid = 0;
    bready = 1;
    while (!bvalid) @(negedge clk);
    check(bresp == 2'b00, "write response OKAY");
    @(negedge clk);
    bready = 0;
    n_wr++;
  endtask

  task automatic axi_read(input logic [7:0] addr, output logic [31:0] data);
    araddr = addr; arvalid = 1;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk);   // accepted on the edge in between
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    data = rdata;
    check(rresp == 2'b00, "read response OKAY");
    rready = 1;
    @(negedge clk);
    rready = 0;
    n_rd++;
  endtask

  // ---------------- mechanism monitors ----------------
  // A carry of 1 handed from the first to the second tile of the upper row.
  always @(posedge clk) if (rst_n && dut.u_ssp.u_upper.g_fa[1].m[FA_CIN]) n_carry++;
  // The overflow clamp: weighted sums beyond the activation range, in any p-bit of the upper
  // row or of the lower row's first 15 tiles.
  for (genvar f = 0; f < 15; f++) begin : g_mon_fa
    for (genvar k = 0; k < FA_N; k++) begin : g_mon
      always @(posedge clk) if (rst_n) begin
        if (dut.u_ssp.u_upper.g_fa[f].u_fa.u_tile.g_pbit[k].u_pbit.sum > ACT_MAX ||
            dut.u_ssp.u_upper.g_fa[f].u_fa.u_tile.g_pbit[k].u_pbit.sum < ACT_MIN ||
            dut.u_ssp.u_lower.g_fa[f].u_fa.u_tile.g_pbit[k].u_pbit.sum > ACT_MAX ||
            dut.u_ssp.u_lower.g_fa[f].u_fa.u_tile.g_pbit[k].u_pbit.sum < ACT_MIN)
          n_ovf++;
      end
    end
  end

  localparam int A_EL = 512, B_EL = 1024, C_EL = 2048, TARGET = 3584;

  initial begin
    logic [31:0] d, sw0, sw1;
    int hist[8], other, best, nsamp, t0, t1;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    // 1. register access
    for (int r = 0; r < 8; r++) begin
      logic [31:0] v, mask;
      mask = (r >= 6) ? 32'h1_FFFF : 32'h7FFF;
      v = $urandom;
      axi_write(8'(4 * r), v);
      axi_read(8'(4 * r), d);
      check(d == (v & mask), $sformatf("register %0d read back %h, wrote %h", r, d, v));
      axi_write(8'(4 * r), 32'h0000_0000, 4'b0010);   // clear byte 1 only
      axi_read(8'(4 * r), d);
      check(d == (v & mask & 32'hFFFF_00FF), "byte strobe");
    end
    axi_read(8'h3C, d);
    check(d == 0, "unmapped address reads 0");

    // 2. the paper's instance
    axi_write(8'h00, ~32'(A_EL) & 32'h7FFF);  axi_write(8'h04, 0);
    axi_write(8'h08, ~32'(B_EL) & 32'h7FFF);  axi_write(8'h0C, 0);
    axi_write(8'h10, ~32'(C_EL) & 32'h7FFF);  axi_write(8'h14, 0);
    axi_write(8'h18, 32'h1_FFFF);             axi_write(8'h1C, TARGET);
    n_pinned = $countones(dut.a_sel) + $countones(dut.b_sel) + $countones(dut.c_sel) +
               $countones(dut.s_sel);
    repeat (3000) @(negedge clk);

    // 4. update rate
    axi_read(8'h34, sw0); t0 = $time;
    repeat (1500) @(negedge clk);
    axi_read(8'h34, sw1); t1 = $time;
    $display("complete updates: %0d in %0d cycles", sw1 - sw0, (t1 - t0) / 10);
    check((sw1 - sw0) >= (t1 - t0) / 10 / 15 - 1 && (sw1 - sw0) <= (t1 - t0) / 10 / 15 + 1,
          "one complete update per 15 cycles");

    // 3. sampling
    hist = '{default: 0};
    other = 0;
    nsamp = 20000;
    for (int n = 0; n < nsamp; n++) begin
      logic [31:0] a, b, c, s;
      int v;
      repeat (20) @(negedge clk);
      axi_write(8'h20, 0);
      n_snap++;
      axi_read(8'h24, a);
      axi_read(8'h28, b);
      axi_read(8'h2C, c);
      axi_read(8'h30, s);
      v = int'(a) + int'(b) + int'(c);
      if (v % 512 == 0 && v / 512 < 8) hist[v / 512]++;
      else other++;
      if (s != TARGET) other++;
    end
    axi_read(8'h20, d);
    check(d == 32'(nsamp), "snapshot counter");
    best = 0;
    for (int k = 0; k < 8; k++) begin
      $display("A+B+C = %4d : %.4f", k * 512, hist[k] / real'(nsamp));
      if (hist[k] > hist[best]) best = k;
    end
    check(other < nsamp / 500, $sformatf("samples outside the sets / off target: %0d", other));
    check(best * 512 == TARGET, "3584 is the most frequent sum");

    $display("mechanisms: writes %0d reads %0d snapshots %0d pinned p-bits %0d carries %0d overflow clamps %0d",
             n_wr, n_rd, n_snap, n_pinned, n_carry, n_ovf);
    check(n_wr > 0 && n_rd > 0, "bus writes and reads");
    check(n_snap > 0, "snapshots");
    check(n_pinned > 0, "pinning");
    check(n_carry > 0, "carry between tiles");
    check(n_ovf > 0, "overflow clamp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
