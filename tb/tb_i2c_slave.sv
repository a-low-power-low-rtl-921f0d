// tb_i2c_slave: checks the configuration I2C slave with a bit-banged master.
//
// SCL runs at 400 kHz, the slave's clock at 40 MHz; SDA is an open-drain wire
// pulled high. The master writes the registers (with pointer auto-increment),
// reads them back in one burst including the read-only status register,
// checks that a write to the status register and a transfer to another
// device address change nothing and get no acknowledge, and that the address
// pins select the device address. Last, thirty random write bursts and
// burst reads, at random pointers including past the last register, are
// checked against a register model kept here.
module tb_i2c_slave;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic scl = 1'b1, m_sda_oe = 1'b0;
  logic s_sda_oe, sda;
  logic [2:0] addr_pins = 3'd5;
  logic [7:0] status = 8'h01;
  logic [1:0] cal_mode;
  logic [7:0] pll_cfg, drv_cfg;

  assign sda = ~(m_sda_oe | s_sda_oe);

  always #12500 clk = ~clk;   // 40 MHz

  i2c_slave dut (
    .clk(clk), .rst_n(rst_n), .addr_i(addr_pins), .scl_i(scl), .sda_i(sda),
    .sda_oe_o(s_sda_oe), .status_i(status), .cal_mode_o(cal_mode),
    .pll_cfg_o(pll_cfg), .drv_cfg_o(drv_cfg));

  localparam realtime TQ = 625_000;   // quarter of a 400 kHz SCL period

  task automatic i2c_start();
    m_sda_oe = 1'b0; #(TQ);
    scl = 1'b1;      #(TQ);
    m_sda_oe = 1'b1; #(TQ);   // SDA falls while SCL high
    scl = 1'b0;      #(TQ);
  endtask

  task automatic i2c_stop();
    m_sda_oe = 1'b1; #(TQ);
    scl = 1'b1;      #(TQ);
    m_sda_oe = 1'b0; #(TQ);   // SDA rises while SCL high
  endtask

  task automatic i2c_bit_out(input logic b);
    m_sda_oe = ~b; #(TQ);
    scl = 1'b1;    #(2 * TQ);
    scl = 1'b0;    #(TQ);
  endtask

  task automatic i2c_bit_in(output logic b);
    m_sda_oe = 1'b0; #(TQ);
    scl = 1'b1;      #(TQ);
    b = sda;         #(TQ);
    scl = 1'b0;      #(TQ);
  endtask

  task automatic i2c_write(input logic [7:0] d, output logic ack);
    logic b;
    for (int i = 7; i >= 0; i--) i2c_bit_out(d[i]);
    i2c_bit_in(b);
    ack = ~b;
  endtask

  task automatic i2c_read(output logic [7:0] d, input logic ack);
    for (int i = 7; i >= 0; i--) i2c_bit_in(d[i]);
    i2c_bit_out(~ack);
  endtask

  task automatic check_eq(input string what, input logic [7:0] got, input logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic write_regs(input logic [6:0] dev, input logic [7:0] ptr,
                            input logic [7:0] d0, input logic [7:0] d1, input int n,
                            input logic exp_ack);
    logic ack;
    i2c_start();
    i2c_write({dev, 1'b0}, ack); check_eq("ack address (write)", 8'(ack), 8'(exp_ack));
    if (ack) begin
      i2c_write(ptr, ack); check_eq("ack pointer", 8'(ack), 8'd1);
      i2c_write(d0, ack);  check_eq("ack data 0", 8'(ack), 8'd1);
      if (n > 1) begin
        i2c_write(d1, ack); check_eq("ack data 1", 8'(ack), 8'd1);
      end
    end
    i2c_stop();
  endtask

  logic [6:0] dev;
  logic [7:0] rd [4];
  logic       ack;
  logic [7:0] ref_regs [3];

  initial begin
    #(100_000);
    rst_n = 1'b1;
    #(1_000_000);
    dev = {4'b0000, addr_pins};

    // reset values
    check_eq("reset mode", 8'(cal_mode), 8'h00);
    check_eq("reset pll", pll_cfg, 8'h00);
    check_eq("reset drv", drv_cfg, 8'h00);

    // writes
    write_regs(dev, 8'h00, 8'h02, 8'h00, 1, 1'b1);
    check_eq("mode after write", 8'(cal_mode), 8'h02);
    write_regs(dev, 8'h01, 8'hA5, 8'h3C, 2, 1'b1);
    check_eq("pll after write", pll_cfg, 8'hA5);
    check_eq("drv after auto-increment", drv_cfg, 8'h3C);

    // burst read of all four registers
    i2c_start();
    i2c_write({dev, 1'b0}, ack); check_eq("ack address", 8'(ack), 8'd1);
    i2c_write(8'h00, ack);       check_eq("ack pointer", 8'(ack), 8'd1);
    i2c_start();                 // repeated start
    i2c_write({dev, 1'b1}, ack); check_eq("ack address (read)", 8'(ack), 8'd1);
    for (int i = 0; i < 4; i++) i2c_read(rd[i], i < 3);
    i2c_stop();
    check_eq("read mode", rd[0], 8'h02);
    check_eq("read pll", rd[1], 8'hA5);
    check_eq("read drv", rd[2], 8'h3C);
    check_eq("read status", rd[3], 8'h01);

    // the status register is read only
    write_regs(dev, 8'h03, 8'hFF, 8'h00, 1, 1'b1);
    status = 8'h00;
    i2c_start();
    i2c_write({dev, 1'b0}, ack);
    i2c_write(8'h02, ack);
    i2c_start();
    i2c_write({dev, 1'b1}, ack);
    i2c_read(rd[0], 1'b1);
    i2c_read(rd[1], 1'b0);
    i2c_stop();
    check_eq("read drv again", rd[0], 8'h3C);
    check_eq("status follows input", rd[1], 8'h00);

    // another device address: no acknowledge, nothing changes
    write_regs(dev ^ 7'h01, 8'h00, 8'h01, 8'h00, 1, 1'b0);
    check_eq("mode unchanged", 8'(cal_mode), 8'h02);

    // address pins select the device address
    addr_pins = 3'd2;
    #(1_000_000);
    write_regs(7'h02, 8'h00, 8'h01, 8'h00, 1, 1'b1);
    check_eq("mode via new address", 8'(cal_mode), 8'h01);

    // random bursts against a register model: writes of one to three bytes
    // at pointers 0-5, then a burst read from a random pointer; past the
    // status register writes are ignored and reads give 0
    ref_regs = '{8'h01, 8'hA5, 8'h3C};
    status   = 8'h5A;
    for (int it = 0; it < 30; it++) begin
      int unsigned p0, n;
      p0 = $urandom_range(0, 5);
      n  = $urandom_range(1, 3);
      i2c_start();
      i2c_write({7'h02, 1'b0}, ack); check_eq("ack address (random write)", 8'(ack), 8'd1);
      i2c_write(8'(p0), ack);        check_eq("ack pointer (random write)", 8'(ack), 8'd1);
      for (int k = 0; k < int'(n); k++) begin
        logic [7:0] d;
        d = 8'($urandom);
        i2c_write(d, ack);
        if (p0 + k < 3) ref_regs[p0 + k] = d;
      end
      i2c_stop();
      check_eq("mode output", 8'(cal_mode), 8'(ref_regs[0][1:0]));
      check_eq("pll output", pll_cfg, ref_regs[1]);
      check_eq("drv output", drv_cfg, ref_regs[2]);
      p0 = $urandom_range(0, 4);
      n  = $urandom_range(1, 4);
      i2c_start();
      i2c_write({7'h02, 1'b0}, ack);
      i2c_write(8'(p0), ack);
      i2c_start();
      i2c_write({7'h02, 1'b1}, ack);
      for (int k = 0; k < int'(n); k++) begin
        logic [7:0] e;
        i2c_read(rd[0], k < int'(n) - 1);
        e = (p0 + k < 3) ? ref_regs[p0 + k] : (p0 + k == 3) ? status : 8'h00;
        check_eq($sformatf("random read of register %0d", p0 + k), rd[0], e);
      end
      i2c_stop();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(40_000_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
