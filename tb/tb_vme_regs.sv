// tb_vme_regs: the host register map. Writes and reads back every plane
// register of both planes, checks the table-write strobes and addresses for the
// ramp, measurement and window tables, reads ID and the bucket/turn word, and
// reads both halves of spectrum and peak words from stand-in RAMs (one clock
// read latency, like the real ones). Every request must be answered exactly
// two clocks later.
module tb_vme_regs;
  import booster_pkg::*;
  logic clk = 0, rst = 1;
  logic bus_req = 0, bus_we = 0, bus_ack;
  logic [17:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic tm_enable [2];
  logic [BUNCH_W-1:0] sel_bunch [2];
  logic [MEAS_W:0] n_meas [2];
  logic [BIN_W-1:0] win_lo [2], win_hi [2];
  logic [NOISE_W-1:0] noise_amp [2];
  logic [HARMONIC-1:0] damp_mask [2];
  logic [SEG_W:0] n_seg [2];
  logic [31:0] wdata;
  logic ramp_we [2], meas_we [2], win_we [2];
  logic [SEG_W+2:0] ramp_waddr;
  logic [MEAS_W+1:0] meas_waddr;
  logic [FFT_LOG-1:0] win_waddr;
  logic [MEAS_W+BIN_W-1:0] spec_raddr;
  logic [MAG_W-1:0] spec_rdata [2];
  logic [MEAS_W-1:0] peak_raddr;
  logic [1:0] peak_rsel;
  peak_t peak_rdata [2];
  tag_t tag;
  logic [MEAS_W:0] meas_count [2], spec_count [2];
  logic [SEG_W-1:0] seg [2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vme_regs dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stand-in RAMs: contents are functions of the address
  function automatic logic [MAG_W-1:0] spec_f(input int p, input int a);
    return MAG_W'(longint'(a) * 1000003 + p * 77 + 42'h2_0000_0000);
  endfunction
  function automatic peak_t peak_f(input int p, input int m, input int r);
    return '{bin: 6'(m + r + p), mag: MAG_W'(longint'(m) * 5000011 + r * 13 + p + 42'h3_0000_0000)};
  endfunction
  always_ff @(posedge clk)
    for (int p = 0; p < 2; p++) begin
      spec_rdata[p] <= spec_f(p, int'(spec_raddr));
      peak_rdata[p] <= peak_f(p, int'(peak_raddr), int'(peak_rsel));
    end

  int n_ramp [2], n_meas_w [2], n_win [2];
  logic [31:0] last_wd;
  int last_wa;
  always @(posedge clk) for (int p = 0; p < 2; p++) begin
    if (ramp_we[p]) begin n_ramp[p]++;  last_wa = int'(ramp_waddr); last_wd = wdata; end
    if (meas_we[p]) begin n_meas_w[p]++; last_wa = int'(meas_waddr); last_wd = wdata; end
    if (win_we[p])  begin n_win[p]++;   last_wa = int'(win_waddr);  last_wd = wdata; end
  end

  task automatic bus_write(input int a, input logic [31:0] d);
    @(negedge clk); bus_req = 1; bus_we = 1; bus_addr = 18'(a); bus_wdata = d;
    @(negedge clk); bus_req = 0; bus_we = 0;
    @(posedge clk); #1;
    check(bus_ack, $sformatf("write ack at 0x%05h", a));
  endtask

  task automatic bus_read(input int a, output logic [31:0] d);
    @(negedge clk); bus_req = 1; bus_we = 0; bus_addr = 18'(a);
    @(negedge clk); bus_req = 0;
    check(!bus_ack, "early ack");
    @(posedge clk); #1;
    check(bus_ack, $sformatf("read ack at 0x%05h", a));
    d = bus_rdata;
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] v [11];
    tag = '{bunch: 7'd55, turn: 16'd12345};
    for (int p = 0; p < 2; p++) begin meas_count[p] = 7'(5 + p); spec_count[p] = 7'(3 + p); seg[p] = 4'(9 + p); end
    n_ramp = '{0, 0}; n_meas_w = '{0, 0}; n_win = '{0, 0};
    repeat (2) @(posedge clk);
    rst = 0;
    bus_read(0, d); check(d == 32'hB0057E12, "ID");
    bus_read(1, d); check(d == {16'd12345, 9'd0, 7'd55}, "bucket/turn");
    for (int p = 0; p < 2; p++) begin
      int base;
      base = (p + 1) << 16;
      v = '{32'd1, 32'(20 + p), 32'(40 + p), 32'(11 + p), 32'(33 + p), 32'(5000 + p),
            32'hDEAD_BEE0 + 32'(p), 32'h1234_5678, 32'h000F_ABCD, 32'(6 + p), 32'd0};
      for (int r = 0; r < 10; r++) bus_write(base + r, v[r]);
      check(tm_enable[p] && sel_bunch[p] == 7'(20 + p) && n_meas[p] == 7'(40 + p) &&
            win_lo[p] == 6'(11 + p) && win_hi[p] == 6'(33 + p) && noise_amp[p] == 16'(5000 + p) &&
            damp_mask[p] == {20'hFABCD, 32'h1234_5678, 32'hDEAD_BEE0 + 32'(p)} && n_seg[p] == 5'(6 + p),
            $sformatf("plane %0d registers", p));
      for (int r = 0; r < 10; r++) begin
        bus_read(base + r, d);
        check(d == ((r == 8) ? 32'hFABCD : v[r]), $sformatf("plane %0d reg %0d reads %h", p, r, d));
      end
      bus_read(base + 11, d); check(d == 32'(9 + p), "active segment");
      bus_read(base + 10, d); check(d == {16'd0, 1'b0, 7'(3 + p), 1'b0, 7'(5 + p)}, "status");
      bus_write(base + 16'h1000 + 8 * 3 + 5, 32'h1111); check(n_ramp[p] == 1 && last_wa == 29 && last_wd == 32'h1111, "ramp write");
      bus_write(base + 16'h2000 + 4 * 63 + 2, 32'h22);  check(n_meas_w[p] == 1 && last_wa == 254, "meas write");
      bus_write(base + 16'h3000 + 127, 32'hFFFF);      check(n_win[p] == 1 && last_wa == 127, "window write");
      for (int n = 0; n < 40; n++) begin
        int m, b, r;
        logic [MAG_W-1:0] e;
        peak_t pe;
        m = $urandom_range(0, 63); b = $urandom_range(0, 63); r = $urandom_range(0, 2);
        e = spec_f(p, m * 64 + b);
        pe = peak_f(p, m, r);
        bus_read(base + 16'h8000 + (m * 64 + b) * 2, d); check(d == e[31:0], "spectrum low half");
        bus_read(base + 16'h8000 + (m * 64 + b) * 2 + 1, d); check(d == 32'(e[MAG_W-1:32]), "spectrum high half");
        bus_read(base + 16'h4000 + m * 8 + r * 2, d); check(d == pe.mag[31:0], "peak low half");
        bus_read(base + 16'h4000 + m * 8 + r * 2 + 1, d);
        check(d == {10'd0, pe.bin, 16'(pe.mag[MAG_W-1:32])}, "peak bin / high half");
      end
    end
    check(n_ramp[0] == 1 && n_ramp[1] == 1 && n_win[0] == 1 && n_win[1] == 1, "no stray strobes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
