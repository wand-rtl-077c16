// Testbench for stim_command: host words pass through in order with their
// target NMIC; a trigger becomes a START word with the trigger mask, goes
// ahead of waiting host traffic, and is held while the link is not ready.
module tb_stim_command;
  import wand_pkg::*;
  logic clk = 0, rst_n = 0, trigger = 0, trig_nmic = 1, host_valid = 0, host_nmic = 0, cmd_ready = 1;
  logic [3:0] trig_mask = 4'b0101;
  logic [31:0] host_word = 0, cmd_word;
  logic host_ready, cmd_valid, cmd_nmic;
  logic [15:0] start_cnt, merged_cnt;
  int checks = 0, failures = 0;
  stim_command dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  nmic_cmd_t c;
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // pass-through
    host_valid = 1; host_nmic = 0; host_word = 32'h1234_5678;
    #1; checks++;
    if (!cmd_valid || cmd_word != 32'h1234_5678 || cmd_nmic != 0 || !host_ready) failures++;
    // trigger while host is waiting and link busy
    @(negedge clk); cmd_ready = 0; trigger = 1;
    @(negedge clk); trigger = 0;
    #1; checks++;
    c = nmic_cmd_t'(cmd_word);
    if (!cmd_valid || c.op != OP_START || c.data[3:0] != 4'b0101 || cmd_nmic != 1 || host_ready) begin
      failures++; $display("start word %h nmic %0b", cmd_word, cmd_nmic);
    end
    repeat (3) @(negedge clk);
    checks++;
    c = nmic_cmd_t'(cmd_word);
    if (c.op != OP_START) failures++;
    cmd_ready = 1;
    @(negedge clk); #1;
    checks++;
    if (cmd_word != 32'h1234_5678 || start_cnt != 1 || !host_ready) begin failures++; $display("after start %h %0d", cmd_word, start_cnt); end
    host_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
