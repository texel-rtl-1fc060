// device_controller: per-synapse controller ("CTL" with its pulse timers "PX")
// that drives the gate signals of the differential memristive device interface.
//
// A presynaptic spike requests a READ pulse (both devices are read and the
// normalizer compares their currents); a flip of the synapse's binary weight
// requests a write: POT (weight 1: positive device set, negative reset) or DEP
// (weight 0, the complement). Reads and writes share the device terminals, so they
// are mutually exclusive and reads win. States and transitions are those of the
// chip's controller state diagram:
//   IDLE  --pre spike-->            READ      --read ends-->  IDLE
//   IDLE  --weight update-->        WRITE     --write ends--> IDLE
//   WRITE --pre spike (intr)-> READ_INT  --read ends-->  WRITE
// In READ_INT the intr flag (DEV_INT) is high and the write pulse is
// suspended; the write then restarts with its full width, so it is applied only
// after the read has completed. Choices of this design where the chip's
// description is silent: a weight update arriving during a READ is held pending
// and served from IDLE afterwards, a pre spike arriving during a READ is absorbed
// by it, a second weight flip during a write replaces the pending value, and pulse
// widths are clock-cycle counts (read_pw, write_pw; 0 counts as 1) instead of the
// chip's bias-controlled pulse extenders.
// Modes: dev_en=0 ignores all requests. cont_read holds READ high except during a
// write and keeps IDLE low (continuous-read mode). prechg enables the IDLE
// (pre-charge) signal while no pulse is applied.
// read_end pulses in the last cycle of every read pulse, for sampling the
// normalizer output.
module device_controller #(
  parameter int unsigned PW_W = 23
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            dev_en,
  input  logic            cont_read,
  input  logic            prechg,
  input  logic [PW_W-1:0] read_pw,
  input  logic [PW_W-1:0] write_pw,
  input  logic            pre_spike,
  input  logic            w_update,
  input  logic            w_new,
  output logic            read,
  output logic            pot,
  output logic            dep,
  output logic            idle,
  output logic            intr,
  output logic            read_end,
  output logic [1:0]      state
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE, S_READ_INT} st_e;
  st_e             st;
  logic [PW_W-1:0] cnt;
  logic            wr_pend, wval, wval_pend;
  logic [PW_W-1:0] rpw, wpw;

  assign rpw = (read_pw  == '0) ? PW_W'(1) : read_pw;
  assign wpw = (write_pw == '0) ? PW_W'(1) : write_pw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      cnt       <= '0;
      wr_pend   <= 1'b0;
      wval      <= 1'b0;
      wval_pend <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (dev_en && pre_spike) begin
            st  <= S_READ;
            cnt <= rpw;
            if (w_update) begin
              wr_pend   <= 1'b1;
              wval_pend <= w_new;
            end
          end else if (dev_en && (wr_pend || w_update)) begin
            st      <= S_WRITE;
            cnt     <= wpw;
            wval    <= w_update ? w_new : wval_pend;
            wr_pend <= 1'b0;
          end
        end
        S_READ: begin
          if (dev_en && w_update) begin
            wr_pend   <= 1'b1;
            wval_pend <= w_new;
          end
          if (cnt <= PW_W'(1)) st <= S_IDLE;
          else cnt <= cnt - PW_W'(1);
        end
        S_WRITE: begin
          if (dev_en && w_update) begin
            wr_pend   <= 1'b1;
            wval_pend <= w_new;
          end
          if (dev_en && pre_spike) begin
            st  <= S_READ_INT;
            cnt <= rpw;
          end else if (cnt <= PW_W'(1)) st <= S_IDLE;
          else cnt <= cnt - PW_W'(1);
        end
        S_READ_INT: begin
          if (dev_en && w_update) begin
            wr_pend   <= 1'b1;
            wval_pend <= w_new;
          end
          if (cnt <= PW_W'(1)) begin
            st  <= S_WRITE;
            cnt <= wpw;
          end else cnt <= cnt - PW_W'(1);
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    read      = (st == S_READ) || (st == S_READ_INT) || (cont_read && (st != S_WRITE));
    pot       = (st == S_WRITE) && wval;
    dep       = (st == S_WRITE) && !wval;
    idle      = prechg && !cont_read && (st == S_IDLE);
    intr = (st == S_READ_INT);
    read_end  = ((st == S_READ) || (st == S_READ_INT)) && (cnt <= PW_W'(1));
    state     = st;
  end

  // Reads and writes never overlap on the device terminals.
  assert property (@(posedge clk) disable iff (!rst_n) !(read && (pot || dep)));
  assert property (@(posedge clk) disable iff (!rst_n) !(pot && dep));

endmodule
