// tb_cfg_regs: self-checking test of the AXI4-Lite register file.
//
// Checks the reset values of the trigger and queue-pair registers, then writes every
// read/write register with a random value (AW and W presented in the same clock, B
// accepted after a random delay) and checks both the read-back value and the decoded
// output field. CTRL bit 0 must give a one-clock apply pulse and read as zero. Random
// pulses on the stat_inc inputs are counted here and must match the event counters;
// STATUS must mirror the idle and QP-error inputs; unmapped addresses read zero.
module tb_cfg_regs;
  import be_pkg::*;

  localparam int NSTAT = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid = 0, s_awready, s_wvalid = 0, s_wready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0]  s_bresp, s_rresp;
  logic        s_bvalid, s_bready = 0, s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [SAMPLE_W-1:0] threshold;
  logic [LANES-1:0]    ch_enable;
  qp_cfg_t     qp;
  net_cfg_t    net_src;
  target_t     staged;
  logic        apply;
  logic [NSTAT-1:0] stat_inc = '0;
  logic        st_idle = 0, st_qp_error = 0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  cfg_regs #(.NSTAT(NSTAT)) dut (
    .clk, .rst_n, .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .threshold, .ch_enable, .qp, .net_src, .staged, .apply,
    .stat_inc, .st_idle, .st_qp_error
  );

  int n_apply = 0;
  int unsigned cnt_model [NSTAT];
  bit stat_on = 0;
  always @(posedge clk) if (rst_n) begin
    if (apply) n_apply++;
    for (int i = 0; i < NSTAT; i++) if (stat_inc[i]) cnt_model[i]++;
  end
  always @(negedge clk) stat_inc = stat_on ? NSTAT'({$urandom, $urandom}) : '0;

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  typedef struct { logic [7:0] a; logic [31:0] m; } reg_t;

  function automatic logic [31:0] field(input logic [7:0] a);
    case (a)
      8'h04: return 32'(threshold);
      8'h08: return 32'(ch_enable);
      8'h0C: return 32'(qp.sqpn);
      8'h10: return {9'h0, qp.retry_max, 1'b0, qp.pmtu_log2, qp.pkey};
      8'h14: return qp.timeout;
      8'h18: return net_src.src_mac[31:0];
      8'h1C: return 32'(net_src.src_mac[47:32]);
      8'h20: return net_src.src_ip;
      8'h24: return 32'(net_src.src_port);
      8'h28: return staged.dst_mac[31:0];
      8'h2C: return 32'(staged.dst_mac[47:32]);
      8'h30: return staged.dst_ip;
      8'h34: return 32'(staged.dqpn);
      8'h38: return 32'(staged.start_psn);
      8'h3C: return staged.rkey;
      8'h40: return staged.base[31:0];
      8'h44: return staged.base[63:32];
      8'h48: return staged.size;
      default: return 32'hDEAD_BEEF;
    endcase
  endfunction

  initial begin
    reg_t regs[$];
    logic [31:0] v, d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(threshold == 12'd256 && ch_enable == 12'hFFF, "trigger reset values");
    check(qp.sqpn == 24'd1 && qp.pkey == 16'hFFFF && qp.pmtu_log2 == 3'd4 &&
          qp.timeout == 32'd65536 && qp.retry_max == 3'd7, "queue-pair reset values");

    regs = '{'{8'h04, 32'h0000_0FFF}, '{8'h08, 32'h0000_0FFF}, '{8'h0C, 32'h00FF_FFFF},
             '{8'h10, 32'h0077_FFFF}, '{8'h14, 32'hFFFF_FFFF}, '{8'h18, 32'hFFFF_FFFF},
             '{8'h1C, 32'h0000_FFFF}, '{8'h20, 32'hFFFF_FFFF}, '{8'h24, 32'h0000_FFFF},
             '{8'h28, 32'hFFFF_FFFF}, '{8'h2C, 32'h0000_FFFF}, '{8'h30, 32'hFFFF_FFFF},
             '{8'h34, 32'h00FF_FFFF}, '{8'h38, 32'h00FF_FFFF}, '{8'h3C, 32'hFFFF_FFFF},
             '{8'h40, 32'hFFFF_FFFF}, '{8'h44, 32'hFFFF_FFFF}, '{8'h48, 32'hFFFF_FFFF}};
    for (int pass = 0; pass < 2; pass++)
      foreach (regs[i]) begin
        v = $urandom;
        wr(regs[i].a, v);
        rd(regs[i].a, d);
        check(d == (v & regs[i].m), $sformatf("reg %02x read %08x exp %08x", regs[i].a, d, v & regs[i].m));
        check(field(regs[i].a) == (v & regs[i].m), $sformatf("reg %02x output field", regs[i].a));
      end

    check(n_apply == 0, "no apply without a CTRL write");
    wr(8'h00, 32'h1);
    check(n_apply == 1, "apply pulse on CTRL bit 0");
    rd(8'h00, d);
    check(d == 0, "CTRL reads zero");
    wr(8'h00, 32'h0);
    check(n_apply == 1, "writing CTRL with bit 0 clear does not apply");

    st_idle = 1; st_qp_error = 0; rd(8'h7C, d); check(d == 32'h1, "STATUS idle");
    st_idle = 0; st_qp_error = 1; rd(8'h7C, d); check(d == 32'h2, "STATUS QP error");
    rd(8'h60, d); check(d == 0, "unmapped address reads zero");

    stat_on = 1;
    repeat (500) @(posedge clk);
    @(negedge clk); stat_on = 0;
    @(negedge clk);
    repeat (2) @(posedge clk);
    for (int i = 0; i < NSTAT; i++) begin
      rd(8'(8'h80 + 4 * i), d);
      check(d == cnt_model[i], $sformatf("counter %0d = %0d exp %0d", i, d, cnt_model[i]));
    end
    rd(8'(8'h80 + 4 * NSTAT), d);
    check(d == 0, "counter beyond NSTAT reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
