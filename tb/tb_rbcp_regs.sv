// tb_rbcp_regs: checks the slow-control register map over the RBCP bus.
//
// The testbench plays SiTCP: one-cycle read and write requests, the answer
// expected exactly one cycle later. It checks write/read-back of the control,
// exposure and DAC registers; the read-only counters, count map and NMEA
// window against values it drives itself; the one-cycle meas_start pulse
// when run is set in light-curve mode; that a scaler start is accepted only
// in scaler mode; the SPI word and chip select for both DACs, and that a
// send is refused while the SPI master is busy; the sticky framing-error
// flag; and that addresses above 0xFF read as zero and ignore writes.
module tb_rbcp_regs;
  import imony_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0;
  logic [31:0] rbcp_addr = 0;
  logic [7:0] rbcp_wd = 0, rbcp_rd;
  logic rbcp_ack;
  acq_mode_e mode;
  logic run, meas_start, scaler_start, spi_start, spi_sel;
  logic [31:0] exposure;
  logic [23:0] spi_word;
  logic spi_busy = 0, scaler_busy = 0, scaler_done = 0;
  logic [31:0] scaler_counts [N];
  logic [23:0] pps_count = 24'h123456, subsec = 24'h98_7654;
  logic [31:0] drop_count = 32'hCAFE_0001;
  logic [15:0] fifo_level = 16'h0203;
  logic fifo_empty = 0, fifo_full = 1, uart_ferr = 0;
  logic [7:0] nmea_length = 8'd77, nmea_seq = 8'd9;
  logic [6:0] nmea_rd_addr;
  logic [7:0] nmea_rd_data;
  int checks = 0, failures = 0;
  int n_meas = 0, n_sstart = 0, n_spi = 0;
  logic [23:0] last_spi_word;
  logic last_spi_sel;

  rbcp_regs #(.N_CH(N), .NMEA_AW(7)) dut (.*);

  assign nmea_rd_data = {1'b0, nmea_rd_addr} ^ 8'h5A;

  always #2.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (meas_start) n_meas++;
    if (scaler_start) n_sstart++;
    if (spi_start) begin n_spi++; last_spi_word = spi_word; last_spi_sel = spi_sel; end
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%t %s: got %0h expected %0h", $time, what, got, exp);
    end
  endtask

  task automatic wr(logic [31:0] a, logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_we = 1; rbcp_addr = a; rbcp_wd = d; end
    @(negedge clk) begin rbcp_we = 0; rbcp_act = 0; end
    check("write ack", rbcp_ack, 1);
    @(negedge clk);   // command pulses are seen on the following edge
  endtask

  task automatic rd(logic [31:0] a, output logic [7:0] d);
    @(negedge clk) begin rbcp_act = 1; rbcp_re = 1; rbcp_addr = a; end
    @(negedge clk) begin rbcp_re = 0; rbcp_act = 0; end
    check("read ack", rbcp_ack, 1);
    d = rbcp_rd;
    @(negedge clk) check("ack is one cycle", rbcp_ack, 0);
  endtask

  task automatic expect_rd(logic [31:0] a, logic [7:0] e, string what);
    logic [7:0] d;
    rd(a, d);
    check(what, d, e);
  endtask

  initial begin
    logic [7:0] d;
    for (int c = 0; c < N; c++) scaler_counts[c] = {$urandom};
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    expect_rd(32'h00, 8'h00, "CTRL reset");
    // exposure and DAC registers
    for (int i = 0; i < 4; i++) wr(32'h04 + i, 8'h11 * (i + 1));
    check("exposure", exposure, 32'h44332211);
    for (int i = 0; i < 4; i++) expect_rd(32'h04 + i, 8'h11 * (i + 1), "exposure readback");
    wr(32'h08, 8'hCD); wr(32'h09, 8'hAB); wr(32'h0C, 8'h30);
    wr(32'h0A, 8'h34); wr(32'h0B, 8'h12); wr(32'h0D, 8'h31);
    expect_rd(32'h09, 8'hAB, "THR hi");
    expect_rd(32'h0D, 8'h31, "HV cmd");
    // SPI sends
    wr(32'h02, 8'h02);
    check("spi thr sent", n_spi, 1);
    check("spi thr word", last_spi_word, 24'h30ABCD);
    check("spi thr sel", last_spi_sel, 0);
    wr(32'h02, 8'h04);
    check("spi hv sent", n_spi, 2);
    check("spi hv word", last_spi_word, 24'h311234);
    check("spi hv sel", last_spi_sel, 1);
    spi_busy = 1;
    wr(32'h02, 8'h02);
    check("spi refused while busy", n_spi, 2);
    expect_rd(32'h01, 8'h49, "STATUS spi busy");
    spi_busy = 0;
    // light-curve start
    wr(32'h00, 8'h02);
    check("meas_start", n_meas, 1);
    check("run", run, 1);
    check("mode", mode, MODE_LIGHTCURVE);
    wr(32'h00, 8'h02);
    check("no second meas_start while running", n_meas, 1);
    wr(32'h02, 8'h01);
    check("scaler start refused in light-curve mode", n_sstart, 0);
    // scaler mode with run set, then back to light-curve: a new measurement
    wr(32'h00, 8'h03);
    check("no meas_start in scaler mode", n_meas, 1);
    wr(32'h00, 8'h02);
    check("meas_start on return to light-curve", n_meas, 2);
    // scaler mode
    wr(32'h00, 8'h01);
    check("mode scaler", mode, MODE_SCALER);
    wr(32'h02, 8'h01);
    check("scaler start", n_sstart, 1);
    scaler_busy = 1; scaler_done = 0;
    expect_rd(32'h01, 8'h4A, "STATUS scaler busy");
    scaler_busy = 0; scaler_done = 1; fifo_empty = 1; fifo_full = 0; drop_count = 0;
    expect_rd(32'h01, 8'h14, "STATUS scaler done");
    drop_count = 32'hCAFE_0001;
    // read-only values
    for (int i = 0; i < 3; i++) expect_rd(32'h10 + i, pps_count[8*i +: 8], "PPS");
    for (int i = 0; i < 3; i++) expect_rd(32'h14 + i, subsec[8*i +: 8], "SUBSEC");
    for (int i = 0; i < 4; i++) expect_rd(32'h18 + i, drop_count[8*i +: 8], "DROPS");
    expect_rd(32'h1D, 8'h02, "LEVEL hi");
    expect_rd(32'h20, 8'd77, "NMEA_LEN");
    expect_rd(32'h21, 8'd9, "NMEA_SEQ");
    for (int c = 0; c < N; c++)
      for (int b = 0; b < 4; b++)
        expect_rd(32'h40 + 4 * c + b, scaler_counts[c][8*b +: 8], $sformatf("count %0d byte %0d", c, b));
    for (int i = 0; i < 128; i += 7) expect_rd(32'h80 + i, 8'(i) ^ 8'h5A, "NMEA byte");
    // framing error flag
    @(negedge clk) uart_ferr = 1;
    @(negedge clk) uart_ferr = 0;
    rd(32'h01, d);
    check("ferr flag set", d[5], 1);
    wr(32'h02, 8'h08);
    rd(32'h01, d);
    check("ferr flag cleared", d[5], 0);
    // other pages
    wr(32'h100, 8'hFF);
    check("page 1 write ignored", mode, MODE_SCALER);
    expect_rd(32'h1_0000, 8'h00, "page read zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
