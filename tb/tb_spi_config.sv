// tb_spi_config: self-checking test of the SPI slave and register file.
//
// Bit-bangs 24-bit SPI frames (mode 0, sclk = clk/16). Checks the reset
// values (the acquisition settings: thresholds 15, 320 nA ramp current code 7,
// 900 mV threshold levels, 1 mV step, 80 ns FPGA time-out), writes every
// global register and a random set of channel registers, and checks both the
// decoded configuration outputs and the values read back on miso.
module tb_spi_config;
  import mizar_pkg::*;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       sclk = 1'b0, csn = 1'b1, mosi = 1'b0, miso;
  mizar_cfg_t cfg;
  int         checks = 0, failures = 0;

  always #2.5 clk = ~clk;

  spi_config dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  task automatic half();
    repeat (8) @(posedge clk);
  endtask

  task automatic xfer(input bit wr, input logic [6:0] addr, input logic [15:0] wdata,
                      output logic [15:0] rdata);
    logic [23:0] f;
    f = {wr, addr, wdata};
    rdata = '0;
    csn = 1'b0; half();
    for (int i = 23; i >= 0; i--) begin
      mosi = f[i]; half();
      sclk = 1'b1;
      if (i < 16) rdata[i] = miso;
      half();
      sclk = 1'b0;
    end
    half(); csn = 1'b1; half(); half();
  endtask

  function automatic logic [15:0] rd_expect(mizar_cfg_t c, int a);
    if (a < 64) return 16'({c.cal_mode[a], c.vth_lo[a], c.vth_hi[a]});
    case (a)
      'h40: return 16'({c.adc_bits, 2'(c.seg), c.dc_coupling, c.gain});
      'h41: return 16'(c.tp_vb);
      'h42: return 16'(c.mir_vb);
      'h43: return 16'(c.lo_vth_gbl);
      'h44: return 16'(c.hi_vth_gbl);
      'h45: return 16'(c.vth_lsb);
      'h46: return 16'(c.tp_len);
      'h47: return 16'(c.win_len);
      'h48: return 16'(c.fpga_tmo);
      'h49: return 16'(c.chip_id);
      default: return 16'h0;
    endcase
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] rd;
    mizar_cfg_t  model;
    repeat (4) @(posedge clk); rst_n = 1'b1; repeat (4) @(posedge clk);

    // reset values
    check(cfg.vth_hi[0] == 5'd15 && cfg.vth_lo[63] == 5'd15, "thresholds reset to 15");
    check(cfg.mir_vb == 4'd7, "ramp current reset to 320 nA (code 7)");
    check(cfg.lo_vth_gbl == 10'd900 && cfg.hi_vth_gbl == 10'd900, "threshold levels 900 mV");
    check(cfg.vth_lsb == 4'd1 && cfg.dc_coupling, "1 mV step, DC coupling");
    check(cfg.tp_len == 8'd4 && cfg.fpga_tmo == 8'd16, "20 ns test pulse, 80 ns time-out");
    xfer(1'b0, 7'h05, 16'h0, rd);
    check(rd == 16'h01EF, $sformatf("read channel 5 PCR: %h", rd));
    xfer(1'b0, 7'h43, 16'h0, rd);
    check(rd == 16'd900, $sformatf("read CTR_LO_VTH_GBL: %0d", rd));

    // writes
    model = cfg;
    for (int it = 0; it < 40; it++) begin
      int a;
      logic [15:0] d;
      a = (it < 10) ? ('h40 + it) : ($urandom % 64);
      d = 16'($urandom);
      if (a == 'h40) d[6:5] = 2'($urandom % 3);
      xfer(1'b1, 7'(a), d, rd);
      if (a < 64) begin
        model.vth_hi[a] = d[4:0]; model.vth_lo[a] = d[9:5]; model.cal_mode[a] = d[10];
      end else case (a)
        'h40: begin model.gain = d[3:0]; model.dc_coupling = d[4];
                    model.seg = seg_mode_e'(d[6:5]); model.adc_bits = d[10:7]; end
        'h41: model.tp_vb = d[7:0];
        'h42: model.mir_vb = d[3:0];
        'h43: model.lo_vth_gbl = d[9:0];
        'h44: model.hi_vth_gbl = d[9:0];
        'h45: model.vth_lsb = d[3:0];
        'h46: model.tp_len = d[7:0];
        'h47: model.win_len = d[7:0];
        'h48: model.fpga_tmo = d[7:0];
        'h49: model.chip_id = d[7:0];
        default: ;
      endcase
      check(cfg == model, $sformatf("write %h to register %h decoded", d, a));
      xfer(1'b0, 7'(a), 16'h0, rd);
      check(rd == rd_expect(model, a), $sformatf("read back register %h: %h", a, rd));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
