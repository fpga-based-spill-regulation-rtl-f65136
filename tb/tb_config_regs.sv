// tb_config_regs: self-checking test of the host register file.
//
// Acts as the Avalon-MM master. Checks the reset values (10 kHz tick =
// 12500 clocks, 32-sample window, feedback off), writes and reads back every
// register, checks that each write lands in the right field of the settings
// structure, that writes to the playback region appear on the playback
// write port with the right address and data, that status and intensity
// inputs read back, that log reads come from the log port (modelled here as
// a memory with a one-clock read), and that readdatavalid comes exactly two
// clocks after read. Also the read-only PID error register.
module tb_config_regs;
  import srs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] avs_address = '0;
  logic avs_write = 0, avs_read = 0;
  logic [31:0] avs_writedata = '0, avs_readdata;
  logic avs_readdatavalid;
  srs_cfg_t cfg;
  logic pb_wr_en, log_rd_en;
  logic [13:0] pb_wr_addr;
  logic [15:0] pb_wr_data;
  logic [10:0] log_rd_addr;
  logic [23:0] log_int_data;
  logic [15:0] log_corr_data;
  logic [31:0] status = 32'hCAFE_0123, int_extr = 32'd777, int_circ = 32'hFFFF_FFF0, pid_err = 32'h8000_0042;
  int checks = 0, failures = 0;
  int pb_writes = 0;
  logic [13:0] last_pb_addr;
  logic [15:0] last_pb_data;

  config_regs dut (.clk, .rst_n, .avs_address, .avs_write, .avs_writedata, .avs_read, .avs_readdata,
    .avs_readdatavalid, .cfg, .pb_wr_en, .pb_wr_addr, .pb_wr_data, .log_rd_en, .log_rd_addr,
    .log_int_data, .log_corr_data, .status, .int_extr, .int_circ, .pid_err);

  always #4 clk = ~clk;

  // log memory model: int = addr*3 - 5000 (signed), corr = addr ^ 16'h8001
  always_ff @(posedge clk) if (log_rd_en) begin
    log_int_data  <= 24'(int'(log_rd_addr) * 3 - 5000);
    log_corr_data <= 16'(log_rd_addr) ^ 16'h8001;
  end
  always @(posedge clk) if (pb_wr_en) begin pb_writes++; last_pb_addr = pb_wr_addr; last_pb_data = pb_wr_data; end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); avs_address = a; avs_writedata = d; avs_write = 1;
    @(negedge clk); avs_write = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); avs_address = a; avs_read = 1;
    @(negedge clk); avs_read = 0;
    chk(avs_readdatavalid === 1'b0, "readdatavalid too early");
    @(negedge clk);
    chk(avs_readdatavalid === 1'b1, "readdatavalid not two clocks after read");
    d = avs_readdata;
    @(negedge clk);
    chk(avs_readdatavalid === 1'b0, "readdatavalid longer than one clock");
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] vals [17];
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd({2'b00, 6'd0, REG_TICK_PER}, d);   chk(d == 32'd12500, "reset tick period");
    rd({2'b00, 6'd0, REG_WIN_LEN}, d);    chk(d == 32'd32, "reset window");
    rd({2'b00, 6'd0, REG_CTRL}, d);       chk(d == 32'd0, "reset ctrl");
    chk(cfg.fb_enable == 1'b0 && cfg.tick_period == 16'd12500 && cfg.timeout == 16'd2048, "reset cfg struct");
    // write every register with a random value, read it back
    for (int r = 0; r <= 13; r++) begin
      vals[r] = (r == 0) ? 32'($urandom_range(7)) : (r == 5) ? 32'($urandom) & 32'h00FF_FFFF : 32'($urandom) & 32'h0000_FFFF;
      wr({2'b00, 6'd0, 8'(r)}, vals[r] | ((r == 0 || r == 5) ? 32'h0 : 32'hABCD_0000));
    end
    for (int r = 0; r <= 13; r++) begin
      rd({2'b00, 6'd0, 8'(r)}, d);
      chk(d == vals[r], $sformatf("reg %0d read %h expected %h", r, d, vals[r]));
    end
    chk({cfg.soft_abort, cfg.fb_src_circ, cfg.fb_enable} == vals[0][2:0], "ctrl fields");
    chk(cfg.tick_period == vals[1][15:0] && cfg.trig_delay == vals[2][15:0] && cfg.win_len == vals[3][15:0], "timing fields");
    chk(cfg.base_delay == vals[4][15:0] && cfg.setpoint == vals[5][23:0], "baseline/setpoint fields");
    chk(cfg.kp == vals[6][15:0] && cfg.ki == vals[7][15:0] && cfg.kd == vals[8][15:0], "gain fields");
    chk(cfg.slew_max == vals[9][15:0] && cfg.ramp_step == vals[10][15:0] && cfg.rate_div == vals[11][15:0], "conditioning fields");
    chk(cfg.timeout == vals[12][15:0] && cfg.spill_len == vals[13][15:0], "spill fields");
    rd({2'b00, 6'd0, REG_STATUS}, d);   chk(d == status, "status");
    rd({2'b00, 6'd0, REG_INT_EXTR}, d); chk(d == int_extr, "extracted intensity");
    rd({2'b00, 6'd0, REG_INT_CIRC}, d); chk(d == int_circ, "circulating intensity");
    rd({2'b00, 6'd0, REG_PID_ERR}, d);  chk(d == pid_err, "PID error");
    // playback writes
    for (int i = 0; i < 20; i++) begin
      logic [13:0] a;
      logic [15:0] v;
      a = 14'($urandom); v = 16'($urandom);
      wr({2'b01, a}, {16'h5555, v});
      chk(pb_writes == i + 1 && last_pb_addr == a && last_pb_data == v, "playback write port");
    end
    wr({2'b00, 6'd0, REG_KP}, 32'h1234);  // register write must not touch the playback memory
    chk(pb_writes == 20, "register write reached playback port");
    // log reads
    for (int i = 0; i < 20; i++) begin
      logic [10:0] a;
      a = 11'($urandom);
      rd({2'b10, 3'b000, a}, d);
      chk(d == 32'(int'(a) * 3 - 5000), $sformatf("intensity log read %h", d));
      rd({2'b11, 3'b000, a}, d);
      chk(d == 32'($signed(16'(a) ^ 16'h8001)), $sformatf("correction log read %h", d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
