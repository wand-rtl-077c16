// Testbench for system_controller: checks the reset configuration, then sends
// 5-byte records with idle zero bytes between them and checks each decoded
// field, the forwarded NMIC command words and the count of bad addresses.
module tb_system_controller;
  import wand_pkg::*;
  logic clk = 0, rst_n = 0, rx_valid = 0, cmd_ready = 1;
  logic [7:0] rx_byte = 0;
  host_cfg_t cfg;
  logic sel_we, cmd_valid, cmd_nmic;
  logic [6:0] sel_idx, sel_ch;
  logic [31:0] cmd_word;
  logic [15:0] bad_cnt;
  int checks = 0, failures = 0;
  system_controller dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic send(input logic [7:0] b);
    @(negedge clk); rx_valid = 1; rx_byte = b;
    @(negedge clk); rx_valid = 0;
  endtask
  task automatic rec(input logic [7:0] a, input logic [31:0] v);
    send(8'h00);
    send(a); send(v[31:24]); send(v[23:16]); send(v[15:8]); send(v[7:0]);
  endtask
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  int ncmd = 0; logic [31:0] lastcmd; logic lastn;
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin ncmd++; lastcmd = cmd_word; lastn = cmd_nmic; end
  int nsel = 0;
  always @(posedge clk) if (rst_n && sel_we) begin nsel++; chk(sel_idx == 95 && sel_ch == 127, $sformatf("sel %0d %0d at %0t", sel_idx, sel_ch, $time)); end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    chk(cfg.cancel_en && cfg.n_cancel == 2 && cfg.log2n == 9 && cfg.cl_mode == CL_OFF && cfg.dead_calcs == 3
        && cfg.k_lo[0] == 7 && cfg.k_hi[0] == 15 && !cfg.stream_closed, "reset values");
    // 0x10: closed-loop streaming, cancel on, n=3, log2n=4, ctrl 97, stim 52, threshold mode,
    // use 11, deriv 10, OR, trig_nmic 1
    rec(8'h10, {1'b0, 1'b1, 1'b1, 2'b10, 2'b11, 2'b01, 7'd52, 7'd97, 4'd4, 3'd3, 1'b1, 1'b1});
    repeat (2) @(negedge clk);
    chk(cfg.stream_closed && cfg.n_cancel == 3 && cfg.log2n == 4 && cfg.ctrl_ch == 97 && cfg.stim_ch == 52
        && cfg.cl_mode == CL_THRESHOLD && cfg.sig_deriv == 2'b10 && cfg.combine_or && cfg.trig_nmic, "ctrl reg");
    rec(8'h11, 32'h0000_0A5C);
    rec(8'h13, {5'd0, 11'd300, 5'd0, 11'd200});
    rec(8'h15, 32'hFFFF_FF00);
    rec(8'h16, {16'd900, 16'd100});
    repeat (2) @(negedge clk);
    chk(cfg.trig_mask == 4'hC && cfg.dead_calcs == 8'hA5, "trig/dead");
    chk(cfg.k_lo[1] == 200 && cfg.k_hi[1] == 300 && cfg.k_lo[0] == 7, "band 1");
    chk(cfg.thresh[1] == 32'hFFFF_FF00 && cfg.thresh[0] == 0, "threshold");
    chk(cfg.rand_min_ms == 100 && cfg.rand_max_ms == 900, "random");
    rec(8'h02, 32'h3000_000F);
    repeat (3) @(negedge clk);
    chk(ncmd == 1 && lastcmd == 32'h3000_000F && lastn == 1, "nmic cmd");
    rec(8'h20, {17'd0, 7'd95, 1'b0, 7'd127});
    rec(8'h7E, 32'd1);
    repeat (3) @(negedge clk);
    chk(nsel == 1 && bad_cnt == 1, $sformatf("sel/bad %0d %0d", nsel, bad_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
