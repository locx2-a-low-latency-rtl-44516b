// tb_i2c_slave: an I2C master (open-drain bus with pull-up, 1 MHz SCL) talks
// to the slave clocked at 40 MHz. Checks: ACK of its own address and NACK
// (no response) of another address, a 4-byte write with auto-increment that
// must appear on the cfg output, a read-back of all 4 registers with a
// repeated START, a single-register write, reset values, and that SDA is only
// driven by the slave while SCL is low or during its ACK/data bits.
module tb_i2c_slave;
  import locx2_pkg::*;
  logic clk = 0, rst_n = 1, scl = 1, sda_m = 1;
  logic sda_oe, sda_in;
  logic [2:0] addr_pins = 3'b101;
  cfg_t cfg;
  int checks = 0, failures = 0;

  localparam logic [6:0] DEV = {4'b1100, 3'b101};

  i2c_slave dut (.clk, .rst_n, .scl, .sda_in, .addr_pins, .sda_oe, .cfg);

  assign sda_in = sda_m & ~sda_oe;   // wired-AND with pull-up

  always #12.5 clk = ~clk;

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endtask

  localparam time Q = 250ns;   // quarter SCL period

  task automatic i2c_start();
    sda_m = 1; #Q; scl = 1; #Q; sda_m = 0; #Q; scl = 0; #Q;
  endtask
  task automatic i2c_stop();
    sda_m = 0; #Q; scl = 1; #Q; sda_m = 1; #(2*Q);
  endtask
  task automatic i2c_bit(input logic b, output logic r);
    sda_m = b; #Q; scl = 1; #Q; r = sda_in; #Q; scl = 0; #Q;
  endtask
  task automatic i2c_write_byte(input logic [7:0] v, output logic ack);
    logic r;
    for (int i = 7; i >= 0; i--) i2c_bit(v[i], r);
    i2c_bit(1'b1, r);
    ack = ~r;
  endtask
  task automatic i2c_read_byte(input logic ack, output logic [7:0] v);
    logic r;
    for (int i = 7; i >= 0; i--) begin i2c_bit(1'b1, r); v[i] = r; end
    i2c_bit(~ack, r);
  endtask

  initial begin
    logic ack;
    logic [7:0] v;
    logic [7:0] wr [4];
    #1 rst_n = 0;
    #200ns;
    rst_n = 1;
    #1us;
    check(cfg == CFG_RESET, "reset values");
    // wrong address: no ACK
    i2c_start();
    i2c_write_byte({7'b1100_001, 1'b0}, ack);
    check(!ack, "foreign address not acknowledged");
    i2c_stop();
    // write 4 registers from pointer 0
    for (int i = 0; i < 4; i++) wr[i] = 8'($urandom);
    i2c_start();
    i2c_write_byte({DEV, 1'b0}, ack); check(ack, "address ack (write)");
    i2c_write_byte(8'h00, ack);       check(ack, "pointer ack");
    for (int i = 0; i < 4; i++) begin
      i2c_write_byte(wr[i], ack); check(ack, "data ack");
    end
    i2c_stop();
    #1us;
    check(cfg == cfg_t'({wr[3], wr[2], wr[1], wr[0]}), $sformatf("cfg after write: %h", cfg));
    // read back: pointer write, repeated start, 4 reads
    i2c_start();
    i2c_write_byte({DEV, 1'b0}, ack); check(ack, "address ack");
    i2c_write_byte(8'h00, ack);       check(ack, "pointer ack");
    i2c_start();
    i2c_write_byte({DEV, 1'b1}, ack); check(ack, "address ack (read)");
    for (int i = 0; i < 4; i++) begin
      i2c_read_byte(i < 3, v);
      check(v == wr[i], $sformatf("read reg %0d: %h expected %h", i, v, wr[i]));
    end
    i2c_stop();
    // single register write to reg 2
    i2c_start();
    i2c_write_byte({DEV, 1'b0}, ack);
    i2c_write_byte(8'h02, ack);
    i2c_write_byte(8'h5A, ack); check(ack, "data ack");
    i2c_stop();
    #1us;
    check(cfg.cml_amp1 == 4'h5 && cfg.cml_amp0 == 4'hA, "reg 2 fields");
    check(cfg.vco_band == wr[0][1:0] && cfg.lpf_3rd == wr[0][2], "reg 0 unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the slave may only change SDA while SCL is low
  always @(sda_oe) if (rst_n && $time > 1us) check(scl == 1'b0, "slave changed SDA while SCL high");
endmodule
