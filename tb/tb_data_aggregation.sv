// Testbench for data_aggregation (8 channels, 4 streamed). Frames of random
// samples are fed; every packet is parsed and compared with the frame it
// belongs to: open-loop packets carry the selected channels (after one table
// entry is rewritten), closed-loop packets the control and stimulation
// channel and both control values. A long stall of the byte sink must drop
// frames and count them.
module tb_data_aggregation;
  import wand_pkg::*;
  localparam int NCH = 8, NS = 4;
  logic clk = 0, rst_n = 0, stream_closed = 0, sel_we = 0, in_valid = 0, tx_ready = 1;
  logic [2:0] ctrl_ch = 5, stim_ch = 2, sel_ch = 0, in_ch = 0;
  logic [1:0] sel_idx = 0;
  logic signed [1:0][PWR_W:0] ctrl_val;
  sample_t in_smp = '0;
  logic tx_valid;
  logic [7:0] tx_byte;
  logic [15:0] pkt_cnt, drop_cnt;
  int checks = 0, failures = 0;
  data_aggregation #(.NCH(NCH), .NSELN(NS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [15:0] frames [64][NCH];
  logic [7:0] pkt [$];
  int npk = 0, sel [NS];
  bit closed_at [64];
  // byte sink and parser
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    pkt.push_back(tx_byte);
    if (pkt.size() >= 3 && pkt.size() == ((pkt[2] == 1) ? 15 : 3 + 2 * NS)) begin
      automatic int f = pkt[1];
      checks++;
      if (pkt[0] != 8'hA5) failures++;
      if (pkt[2] == 0) begin
        for (int k = 0; k < NS; k++) begin
          checks++;
          if ({pkt[3+2*k], pkt[4+2*k]} != frames[f][sel[k]]) begin
            failures++; $display("pkt frame %0d slot %0d got %h exp %h", f, k, {pkt[3+2*k], pkt[4+2*k]}, frames[f][sel[k]]);
          end
        end
      end else begin
        checks++;
        if ({pkt[3], pkt[4]} != frames[f][5] || {pkt[5], pkt[6]} != frames[f][2] ||
            {pkt[7], pkt[8], pkt[9], pkt[10]} != 32'h1234_5678 ||
            {pkt[11], pkt[12], pkt[13], pkt[14]} != 32'hFFFF_FFFE) begin
          failures++; $display("closed pkt frame %0d wrong", f);
        end
      end
      npk++;
      pkt.delete();
    end
  end
  task automatic frame(int f);
    for (int c = 0; c < NCH; c++) begin
      frames[f][c] = 16'($urandom);
      @(negedge clk); in_valid = 1; in_ch = 3'(c); in_smp = sample_t'(frames[f][c]);
    end
    @(negedge clk); in_valid = 0;
    repeat (60) @(negedge clk);
  endtask
  initial begin
    ctrl_val[0] = (PWR_W+1)'(64'h1234_5678) << 16;
    ctrl_val[1] = -((PWR_W+1)'(2) << 16);
    for (int k = 0; k < NS; k++) sel[k] = k;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 4; f++) frame(f);
    @(negedge clk); sel_we = 1; sel_idx = 2; sel_ch = 7; sel[2] = 7;
    @(negedge clk); sel_we = 0;
    for (int f = 4; f < 8; f++) frame(f);
    stream_closed = 1;
    for (int f = 8; f < 12; f++) frame(f);
    stream_closed = 0;
    tx_ready = 0;
    for (int f = 12; f < 16; f++) frame(f);
    tx_ready = 1;
    repeat (100) @(negedge clk);
    checks++;
    if (npk != 13 || pkt_cnt != 13 || drop_cnt != 3) begin failures++; $display("packets %0d/%0d drops %0d", npk, pkt_cnt, drop_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
