// Testbench of register_bank: reset values, random writes to every register
// checked against a model kept here, read-back requests returning the model's
// value, coefficient writes forwarded as one-cycle pulses with the right address,
// and the sticky overflow bit (set by an event, cleared by writing 1).
module tb_register_bank;
  import nr_pkg::*;
  logic clk = 0, rst_n = 1, frame_valid = 0, overflow_evt = 0;
  initial #1 rst_n = 0;   // power-on reset edge: asynchronous resets act at once
  logic [31:0] frame;
  cfg_t cfg;
  logic w_we, rd_valid;
  logic [7:0] w_addr, rd_addr;
  logic [8:0] w_data;
  logic [15:0] rd_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  register_bank dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(input logic [7:0] op, input logic [7:0] a, input logic [15:0] d);
    @(negedge clk) frame_valid = 1; frame = {op, a, d};
    @(negedge clk) frame_valid = 0;
  endtask

  logic [15:0] model [16];
  logic [63:0] pix;

  function automatic logic [15:0] expect_read(input logic [7:0] a);
    if (a < 16) return model[a];
    return 16'd0;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg.run === 0 && cfg.event_mode === 1 && cfg.compressed === 1, "control reset");
    check(cfg.pre_n === 3 && cfg.post_m === 19, "N=3, M=19 at reset");
    check(cfg.period === 800, "period 800 at reset");
    check(cfg.pix_en === '1, "all pixels enabled at reset");
    for (int i = 0; i < 16; i++) model[i] = 0;
    model[0] = 16'h6; model[1] = 140; model[2] = 170; model[3] = 3; model[4] = 19;
    model[5] = 800; model[8] = 16'hFFFF; model[9] = 16'hFFFF; model[10] = 16'hFFFF; model[11] = 16'h0001;
    for (int n = 0; n < 600; n++) begin
      logic [7:0] a;
      logic [15:0] d;
      int kind;
      kind = $urandom_range(0, 3);
      if (kind == 0) begin
        // coefficient write
        a = 8'(REG_WEIGHT0 + $urandom_range(0, 87));
        d = 16'($urandom);
        @(negedge clk) frame_valid = 1; frame = {OP_WRITE, a, d};
        @(posedge clk); #1;
        check(w_we && w_addr === a - REG_WEIGHT0 && w_data === d[8:0], "coefficient write forwarded");
        @(negedge clk) frame_valid = 0;
        @(posedge clk); #1;
        check(!w_we, "coefficient write is one pulse");
      end else if (kind == 1) begin
        a = 8'($urandom_range(0, 11));
        if (a == 7) continue;
        d = 16'($urandom);
        cmd(OP_WRITE, a, d);
        case (a)
          0: model[0] = {13'd0, d[2:0]};
          1, 2: model[a] = {8'd0, d[7:0]};
          3, 4: model[a] = {11'd0, d[4:0]};
          5: model[5] = d;
          6: model[6] = {14'd0, d[1:0]};
          11: model[11] = {15'd0, d[0]};
          8, 9, 10: model[a] = d;
          default: ;
        endcase
      end else begin
        a = 8'($urandom_range(0, 15));
        if ($urandom_range(0, 1)) begin
          @(negedge clk) overflow_evt = 1; @(negedge clk) overflow_evt = 0;
          model[7] = 1;
        end
        if (a == 7 && $urandom_range(0, 1)) begin
          cmd(OP_WRITE, 8'd7, 16'd1); model[7] = 0;
        end
        @(negedge clk) frame_valid = 1; frame = {OP_READ, a, 16'h0};
        @(posedge clk); #1;
        check(rd_valid && rd_addr === a, "read request");
        check(rd_data === expect_read(a), $sformatf("read %0h: %h expected %h", a, rd_data, expect_read(a)));
        @(negedge clk) frame_valid = 0;
      end
      // configuration outputs follow the model
      pix = {model[11], model[10], model[9], model[8]};
      check({cfg.compressed, cfg.event_mode, cfg.run} === model[0][2:0], "ctrl bits");
      check(cfg.thr1 === model[1][7:0] && cfg.thr2 === model[2][7:0], "thresholds");
      check(cfg.pre_n === model[3][4:0] && cfg.post_m === model[4][4:0], "N and M");
      check(cfg.period === model[5] && cfg.asic_addr === model[6][1:0], "period, ASIC address");
      check(cfg.pix_en === pix[NCH-1:0], "pixel enables");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
