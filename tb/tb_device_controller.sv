// tb_device_controller: checks the per-synapse device controller.
// Directed cases mirror the three read/write interactions the chip was measured
// with: (1) a read requested during a write raises the interrupt flag, the write
// is suspended for the read and then applied with its full width; (2) a write
// followed by a read: no interrupt; (3) a read followed by a write: no interrupt.
// Pulse widths are checked in clock cycles. Then continuous-read and pre-charge
// modes, and a long random run compared every cycle with a reference model
// written here, plus the rule that READ never overlaps POT/DEP.
module tb_device_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic dev_en = 1, cont_read = 0, prechg = 0;
  logic [22:0] read_pw = 5, write_pw = 9;
  logic pre_spike = 0, w_update = 0, w_new = 0;
  logic read, pot, dep, idle, intr, read_end;
  logic [1:0] state;
  int checks = 0, failures = 0, n_int = 0;

  device_controller #(.PW_W(23)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // count consecutive high cycles of a signal, sampled at negedges
  task automatic measure(input int which, output int len);
    len = 0;
    while (1) begin
      @(negedge clk);
      case (which)
        0: if (read) len++; else if (len > 0) break;
        1: if (pot)  len++; else if (len > 0) break;
        2: if (dep)  len++; else if (len > 0) break;
        default: break;
      endcase
      if (len > 1000) break;
    end
  endtask

  task automatic pulse_pre;  @(negedge clk) pre_spike = 1; @(posedge clk) #1 pre_spike = 0; endtask
  task automatic pulse_upd(input bit v); @(negedge clk) begin w_update = 1; w_new = v; end
                                         @(posedge clk) #1 w_update = 0; endtask

  // ---------------- reference model ----------------
  typedef enum {R_IDLE, R_READ, R_WRITE, R_RINT} rst_e;
  rst_e rs;
  int   rc;
  bit   rpend, rval, rvalp;
  bit   rread, rpot, rdep, ridle, rint;
  bit   use_ref = 0;
  bit   int_prev = 0;

  always @(posedge clk) if (use_ref) begin
    int rp, wp;
    rp = (read_pw == 0) ? 1 : int'(read_pw);
    wp = (write_pw == 0) ? 1 : int'(write_pw);
    case (rs)
      R_IDLE:
        if (dev_en && pre_spike) begin
          rs = R_READ; rc = rp;
          if (w_update) begin rpend = 1; rvalp = w_new; end
        end else if (dev_en && (rpend || w_update)) begin
          rs = R_WRITE; rc = wp; rval = w_update ? w_new : rvalp; rpend = 0;
        end
      R_READ: begin
        if (dev_en && w_update) begin rpend = 1; rvalp = w_new; end
        if (rc <= 1) rs = R_IDLE; else rc--;
      end
      R_WRITE: begin
        if (dev_en && w_update) begin rpend = 1; rvalp = w_new; end
        if (dev_en && pre_spike) begin rs = R_RINT; rc = rp; end
        else if (rc <= 1) rs = R_IDLE; else rc--;
      end
      R_RINT: begin
        if (dev_en && w_update) begin rpend = 1; rvalp = w_new; end
        if (rc <= 1) begin rs = R_WRITE; rc = wp; end else rc--;
      end
    endcase
  end

  always @(negedge clk) if (use_ref) begin
    rread = (rs == R_READ) || (rs == R_RINT) || (cont_read && rs != R_WRITE);
    rpot  = (rs == R_WRITE) && rval;
    rdep  = (rs == R_WRITE) && !rval;
    ridle = prechg && !cont_read && rs == R_IDLE;
    rint  = (rs == R_RINT);
    chk(read == rread && pot == rpot && dep == rdep && idle == ridle && intr == rint,
        $sformatf("ref mismatch r%0d p%0d d%0d i%0d int%0d", read, pot, dep, idle, intr));
    chk(!(read && (pot || dep)), "read/write exclusive");
    if (intr && !int_prev) n_int++;
    int_prev = intr;
  end

  initial begin
    int len;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // (3) read then write: no interrupt
    fork pulse_pre(); join
    measure(0, len);
    chk(len == 5, $sformatf("read width %0d", len));
    pulse_upd(1);
    measure(1, len);
    chk(len == 9, $sformatf("POT width %0d", len));
    chk(!intr, "no interrupt (read first)");

    // (2) write then read: no interrupt
    pulse_upd(0);
    measure(2, len);
    chk(len == 9, $sformatf("DEP width %0d", len));
    pulse_pre();
    measure(0, len);
    chk(len == 5, "read after write");

    // (1) read during write: interrupt, write suspended then full width
    pulse_upd(1);
    repeat (3) @(negedge clk);
    chk(pot, "write in progress");
    @(negedge clk) pre_spike = 1;
    @(negedge clk) pre_spike = 0;
    chk(intr && read && !pot, "interrupt: read takes the terminals");
    len = 1;
    while (intr) begin @(negedge clk); if (intr) len++; end
    chk(len == 5, $sformatf("interrupt lasts one read (%0d)", len));
    chk(pot, "write resumes right after the read");
    measure(1, len);
    chk(len + 1 == 9, $sformatf("write re-applied with full width (%0d)", len + 1));

    // weight update during a read is held and served afterwards
    @(negedge clk) begin pre_spike = 1; end
    @(negedge clk) begin pre_spike = 0; w_update = 1; w_new = 0; end
    @(negedge clk) w_update = 0;
    measure(2, len);
    chk(len == 9, "pending write served after read");

    // continuous read and pre-charge
    cont_read = 1;
    @(negedge clk);
    chk(read && !idle, "continuous read holds READ, IDLE low");
    pulse_upd(1);
    @(negedge clk);
    chk(pot && !read, "READ drops during write in continuous mode");
    repeat (10) @(negedge clk);
    chk(read, "READ back after write");
    cont_read = 0; prechg = 1;
    @(negedge clk);
    chk(idle && !read, "pre-charge in idle");
    // disabled
    dev_en = 0;
    pulse_pre();
    @(negedge clk);
    chk(!read && state == 2'd0, "ignored when device mode off");
    dev_en = 1;

    // random run against reference
    repeat (20) @(negedge clk);
    rs = R_IDLE; rpend = 0; rval = 0; rvalp = 0; rc = 0;
    @(posedge clk);
    use_ref = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      pre_spike = ($urandom_range(0, 11) == 0);
      w_update  = ($urandom_range(0, 13) == 0);
      w_new     = 1'($urandom);
      if (t % 1000 == 999) begin
        cont_read = 1'($urandom); prechg = 1'($urandom);
        read_pw = 23'($urandom_range(0, 6)); write_pw = 23'($urandom_range(1, 12));
      end
    end
    @(negedge clk) begin pre_spike = 0; w_update = 0; end
    use_ref = 0;
    chk(n_int > 0, "interrupts occurred in random run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
