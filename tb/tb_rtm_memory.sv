// tb_rtm_memory -- self-checking test of the racetrack memory model.
// Small configuration: 8 subarrays of 16 rows x 32 columns, 8-domain track
// groups, two-port circular tracks. Checks read data of loaded and unloaded
// rows, the response tag, the response latency T_SH*S + T_RCD + T_CAS for
// several shift distances S (including the circular order where row 7 of a
// group needs no shift from row 0), the preshift that makes the next access
// shift-free, the shift and port-B counters, and that a command to a busy
// subarray and an out-of-order response slot are reported as violations.
`timescale 1ns/1ps
module tb_rtm_memory;
  import firm_pkg::*;
  localparam int unsigned SAS = 8, R = 16, C = 32, D = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  logic cmd_valid = 1'b0, cmd_pre_en = 1'b0, ld_valid = 1'b0;
  logic [2:0] cmd_sa = '0, ld_sa = '0;
  logic [3:0] cmd_row = '0, cmd_pre_row = '0, ld_row = '0;
  logic [7:0] cmd_tag = '0;
  logic [C-1:0] ld_data = '0;
  logic rsp_valid;
  logic [C-1:0] rsp_data;
  logic [7:0] rsp_tag;
  logic [63:0] shift_count, portb_reads;
  logic [31:0] viol_count;
  int checks = 0, failures = 0;
  int cycle = 0;
  logic [C-1:0] image [SAS][R];

  rtm_memory #(.SUBARRAYS(SAS), .ROWS(R), .COLS(C), .DOMAINS(D), .US_BUF(1'b1), .TAG_W(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // issue a read, wait for the response, check data, tag and latency
  task automatic read(input int sa, input int row, input bit pre, input int pre_row,
                      input int exp_shift);
    int t0, lat;
    cmd_valid = 1'b1; cmd_sa = 3'(sa); cmd_row = 4'(row); cmd_pre_en = pre;
    cmd_pre_row = 4'(pre_row); cmd_tag = 8'(sa * 16 + row);
    @(posedge clk); #1;
    t0 = cycle;
    cmd_valid = 1'b0;
    while (!rsp_valid && cycle < t0 + 400) begin @(posedge clk); #1; end
    lat = cycle - t0;
    check(rsp_data == image[sa][row], $sformatf("data sa %0d row %0d", sa, row));
    check(rsp_tag == 8'(sa * 16 + row), "tag");
    check(lat == int'(T_SH) * exp_shift + int'(T_RCD + T_CAS),
          $sformatf("latency %0d for shift %0d (sa %0d row %0d)", lat, exp_shift, sa, row));
  endtask

  initial begin
    longint unsigned sh0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    foreach (image[s, r]) image[s][r] = '0;
    // load some rows
    for (int s = 0; s < SAS; s++)
      for (int r = 0; r < R; r += 1 + s % 3) begin
        image[s][r] = $urandom;
        ld_valid = 1'b1; ld_sa = 3'(s); ld_row = 4'(r); ld_data = image[s][r];
        @(posedge clk); #1;
      end
    ld_valid = 1'b0;
    // fresh group: row 0 needs no shift, row 3 needs 3 (port A)
    read(1, 0, 1'b0, 0, 0);
    repeat (30) @(posedge clk); #1;
    read(1, 3, 1'b0, 0, 3);
    repeat (30) @(posedge clk); #1;
    // row 7 (port B, reversed half) needs offset 0: 3 shifts back
    read(1, 7, 1'b0, 0, 3);
    repeat (30) @(posedge clk); #1;
    // row 5 of the same group: offset 2
    read(1, 5, 1'b0, 0, 2);
    repeat (30) @(posedge clk); #1;
    // second track group (rows 8..15) of subarray 1 is independent: row 9, shift 1
    read(1, 9, 1'b0, 0, 1);
    repeat (30) @(posedge clk); #1;
    // preshift: read row 2 of subarray 2 and preshift to row 3 -> next read free
    read(2, 2, 1'b1, 3, 2);
    repeat (40) @(posedge clk); #1;
    // row 3 -> row 4 crosses to port B: offset 3 both, no preshift needed
    read(2, 3, 1'b1, 4, 0);
    repeat (40) @(posedge clk); #1;
    check(shift_count == 64'(3 + 3 + 2 + 1 + 2 + 1 + 0), $sformatf("shift count %0d", shift_count));
    check(portb_reads == 64'(2), $sformatf("port B reads %0d", portb_reads));
    check(viol_count == 0, "no violation yet");
    // unloaded row reads as zero
    read(5, 1, 1'b0, 0, 1);
    repeat (30) @(posedge clk); #1;
    // a whole circular pass over a group ends back at offset 0
    sh0 = shift_count;
    for (int r = 0; r < D; r++) begin
      read(6, r, 1'b1, (r == D - 1) ? 0 : r + 1, 0);
      repeat (30) @(posedge clk); #1;
    end
    check(shift_count - sh0 == 64'(D - 2), $sformatf("circular pass shifts %0d", shift_count - sh0));
    // pipelined reads to different subarrays, one per cycle
    for (int k = 0; k < 4; k++) begin
      automatic int s = (k == 0) ? 0 : (k == 1) ? 3 : (k == 2) ? 4 : 7;
      cmd_valid = 1'b1; cmd_sa = 3'(s); cmd_row = 4'd8; cmd_pre_en = 1'b0; cmd_tag = 8'(s);
      @(posedge clk); #1;
    end
    cmd_valid = 1'b0;
    repeat (60) @(posedge clk); #1;
    check(viol_count == 0, $sformatf("pipelined reads: violations %0d", viol_count));
    // violation: same subarray twice in consecutive cycles
    cmd_valid = 1'b1; cmd_sa = 3'd7; cmd_row = 4'd9; cmd_tag = 8'd0;
    @(posedge clk); #1;
    cmd_row = 4'd10;
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    repeat (40) @(posedge clk); #1;
    check(viol_count >= 1, "busy subarray reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
