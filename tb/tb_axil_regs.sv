// tb_axil_regs: checks the AXI4-Lite register and table-write port.
//
// An AXI4-Lite master task performs single writes and reads with random
// delays before BREADY/RREADY and random gaps between AWVALID and WVALID.
// The test checks the reset values, read-back of NACC and CONTROL, the status
// inputs and the ID word, and that each table write yields exactly one write
// strobe on the right port with the decoded address and data. The snapshot
// controls (tap, one-clock arm pulse, done status) are checked, and reads of
// the snapshot window must return the I or Q half of the value the (modelled)
// buffer holds at the decoded index, with its one-clock read latency. Response
// codes must be OKAY and responses must be held until accepted.
module tb_axil_regs;
  import readout_pkg::*;
  localparam int AW = 24;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic [AW-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic [15:0] nacc;
  logic play_en;
  logic [31:0] dropped, pkt_count, vec_count;
  logic comb_we, beat_we, sel_we;
  logic [19:0] comb_addr, beat_addr;
  samp_t comb_data;
  beat_t beat_data;
  logic [9:0] sel_addr, sel_bin;
  logic snap_arm, snap_done;
  logic [1:0] snap_tap;
  logic [9:0] snap_addr;
  acc_t snap_data;
  int n_arm = 0;

  // snapshot buffer model: value i holds {re = 1000 + i, im = -i}, one-clock read
  always @(posedge clk) begin
    snap_data.re <= 32'(1000 + int'(snap_addr));
    snap_data.im <= 32'(-int'(snap_addr));
    if (!rst && snap_arm) n_arm++;
  end

  axil_regs #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  int n_comb = 0, n_beat = 0, n_sel = 0;
  logic [31:0] last_addr, last_data;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst) begin
      if (comb_we) begin n_comb++; last_addr = 32'(comb_addr); last_data = comb_data; end
      if (beat_we) begin n_beat++; last_addr = 32'(beat_addr); last_data = beat_data; end
      if (sel_we)  begin n_sel++;  last_addr = 32'(sel_addr);  last_data = 32'(sel_bin); end
    end
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic axi_write(logic [AW-1:0] a, logic [31:0] d);
    s_awaddr  <= a;
    s_awvalid <= 1;
    s_wdata   <= d;
    repeat ($urandom_range(0, 2)) @(posedge clk);
    s_wvalid  <= 1;
    @(posedge clk);
    while (!(s_awready && s_wready)) @(posedge clk);
    s_awvalid <= 0;
    s_wvalid  <= 0;
    @(posedge clk);
    repeat ($urandom_range(0, 3)) begin
      check("bvalid held", 32'(s_bvalid), 1);
      @(posedge clk);
    end
    s_bready <= 1;
    @(posedge clk);
    while (!s_bvalid) @(posedge clk);
    check("bresp", 32'(s_bresp), 0);
    s_bready <= 0;
  endtask

  task automatic axi_read(logic [AW-1:0] a, output logic [31:0] d);
    s_araddr  <= a;
    s_arvalid <= 1;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    s_arvalid <= 0;
    @(posedge clk);
    repeat ($urandom_range(0, 3)) @(posedge clk);
    s_rready <= 1;
    @(posedge clk);
    while (!s_rvalid) @(posedge clk);
    d = s_rdata;
    check("rresp", 32'(s_rresp), 0);
    s_rready <= 0;
  endtask

  initial begin
    logic [31:0] d;
    int nc, nb, ns;
    s_awaddr = '0; s_awvalid = 0; s_wdata = '0; s_wvalid = 0; s_bready = 0;
    s_araddr = '0; s_arvalid = 0; s_rready = 0;
    snap_done = 0;
    dropped = 32'd17; pkt_count = 32'd12345; vec_count = 32'hDEAD_0001;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    axi_read(24'h0, d);        check("NACC reset", d, 1024);
    axi_read(24'h4, d);        check("CONTROL reset", d, 0);
    axi_read(24'h8, d);        check("DROPPED", d, 17);
    axi_read(24'hC, d);        check("PKT_COUNT", d, 12345);
    axi_read(24'h10, d);       check("VEC_COUNT", d, 32'hDEAD_0001);
    axi_read(24'h14, d);       check("ID", d, 32'h4B49_4430);
    for (int k = 0; k < 20; k++) begin
      automatic logic [15:0] v = 16'($urandom);
      axi_write(24'h0, {16'hFFFF, v});
      axi_read(24'h0, d);
      check("NACC", d, 32'(v));
      check("nacc port", 32'(nacc), 32'(v));
    end
    axi_write(24'h4, 32'h1);
    check("play_en", 32'(play_en), 1);
    axi_read(24'h4, d);        check("CONTROL", d, 1);
    for (int k = 0; k < 60; k++) begin
      automatic int reg_sel = $urandom_range(1, 3);
      automatic logic [19:0] idx = 20'($urandom);
      automatic logic [31:0] v = $urandom;
      nc = n_comb; nb = n_beat; ns = n_sel;
      axi_write({2'(reg_sel), idx, 2'b00}, v);
      check("comb strobes", 32'(n_comb - nc), 32'(reg_sel == 1));
      check("beat strobes", 32'(n_beat - nb), 32'(reg_sel == 2));
      check("sel strobes",  32'(n_sel - ns),  32'(reg_sel == 3));
      check("table addr", last_addr, reg_sel == 3 ? 32'(idx[9:0]) : 32'(idx));
      check("table data", last_data, reg_sel == 3 ? 32'(v[9:0]) : v);
      axi_read({2'(reg_sel), idx, 2'b00}, d);
      check("table read", d, 0);
    end
    // snapshot control and read-back
    snap_done = 0;
    axi_write(24'h18, 32'b101);                  // tap 2, arm
    check("arm pulses", 32'(n_arm), 1);
    check("snap tap", 32'(snap_tap), 2);
    axi_read(24'h18, d);       check("SNAP_CTRL", d, 32'b100);
    axi_read(24'h1C, d);       check("SNAP_STAT idle", d, 0);
    snap_done = 1;
    axi_read(24'h1C, d);       check("SNAP_STAT done", d, 1);
    axi_write(24'h18, 32'b110);                  // tap 3, no arm
    check("no arm pulse", 32'(n_arm), 1);
    for (int k = 0; k < 40; k++) begin
      automatic int i = $urandom_range(0, 1023);
      automatic int h = $urandom_range(0, 1);
      axi_read(24'h8000 | 24'(i << 3) | 24'(h << 2), d);
      check("snapshot value", d, h ? 32'(-i) : 32'(1000 + i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
