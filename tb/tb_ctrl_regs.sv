// tb_ctrl_regs: checks the register file and the frame-buffer sequencing.
//
// Registers are written through the host port and read back on the
// outputs.  Then a sequence of frame events is played: frame 1 is written
// (to input buffer 0) while processing is disabled, so the reader starts
// only once enable is set; a second frame goes to the other buffer, a
// third frame overwrites that unread frame (one drop counted), the reader
// finishes and is restarted on the newest frame, and two output frames
// complete so the display and write bases swap.
module tb_ctrl_regs;
  import edof_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  logic [31:0] cfg_addr, cfg_wdata;
  logic [15:0] width, height, h_total, v_total;
  logic [1:0] stride_log2;
  logic enable, fs = 0, fd = 0, ra0_start, ra0_done = 0, wa1_fd = 0;
  addr_t wa0_base, ra0_base, wa1_base, ra1_base;
  logic [31:0] frames_in, frames_processed, frames_dropped;
  int n_start = 0;

  ctrl_regs dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
                 .width, .height, .stride_log2, .h_total, .v_total, .enable,
                 .wa0_frame_start(fs), .wa0_frame_done(fd), .wa0_base,
                 .ra0_start, .ra0_base, .ra0_done, .wa1_frame_done(wa1_fd), .wa1_base, .ra1_base,
                 .frames_in, .frames_processed, .frames_dropped);
  always @(posedge clk) if (rst_n && ra0_start) n_start++;

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 32'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic pulse_fs(output addr_t b);
    @(negedge clk); b = wa0_base; fs = 1; @(negedge clk); fs = 0;
  endtask
  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  addr_t b1, b2, b3;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk(width == 1920 && height == 1080, "reset frame size");
    wr(0, 64); wr(1, 32); wr(2, 1); wr(3, 100); wr(4, 40);
    wr(5, 'h1000); wr(6, 'h2000); wr(7, 'h3000); wr(8, 'h4000);
    chk(width == 64 && height == 32 && stride_log2 == 1 && h_total == 100 && v_total == 40, "registers");
    chk(!enable, "enable off");
    // frame 1 written while disabled: no reader start
    pulse_fs(b1); pulse(fd);
    repeat (3) @(negedge clk);
    chk(n_start == 0, "no start while disabled");
    wr(9, 1);
    repeat (3) @(negedge clk);
    chk(n_start == 1 && ra0_base == b1, "reader started on frame 1");
    chk(b1 == addr_t'('h1000), "frame 1 in buffer 0");
    // frame 2 goes to the other buffer
    pulse_fs(b2); pulse(fd);
    chk(b2 == addr_t'('h2000), "frame 2 in buffer 1");
    // frame 3 overwrites the unread frame 2
    pulse_fs(b3);
    chk(b3 == addr_t'('h2000) && frames_dropped == 1, "frame 3 overwrites unread frame 2");
    pulse(fd);
    chk(n_start == 1, "reader still busy");
    pulse(ra0_done);
    repeat (3) @(negedge clk);
    chk(n_start == 2 && ra0_base == addr_t'('h2000), "reader restarted on newest frame");
    chk(frames_in == 3, "frames_in");
    chk(wa1_base == addr_t'('h3000) && ra1_base == addr_t'('h4000), "output bases initial");
    pulse(wa1_fd);
    chk(wa1_base == addr_t'('h4000) && ra1_base == addr_t'('h3000), "output bases swap");
    pulse(wa1_fd);
    chk(frames_processed == 2 && wa1_base == addr_t'('h3000), "output bases swap back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
