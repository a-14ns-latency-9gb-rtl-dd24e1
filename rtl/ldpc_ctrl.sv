// ldpc_ctrl: decoder control - interleaving phase, iteration counters and
// early-termination freezing.
//
// Two codewords, in slots 0 and 1, share the datapath. A phase bit toggles
// every cycle; in phase p the slot p codeword may use the CN stage (R1 ->
// CN -> R2) while the other slot's codeword uses the VN stage (R2 -> adder
// -> R1). A decoding iteration of one codeword is therefore one CN-stage
// cycle followed by one VN-stage cycle, and IMAX iterations take 2*IMAX
// cycles (20 at IMAX = 10), with the two slots offset by one cycle.
//
// Per slot the controller keeps busy/started flags and an iteration counter
// ("cnt" in the paper's figure, held here once for all PUs). start_i loads
// a slot that is free (free_o: idle, or terminating in this very cycle, so
// that back-to-back codewords keep the pipeline full and one codeword leaves
// every IMAX cycles); its first CN stage happens in the next cycle of its
// own phase, with MUX1 on the channel LLR (sel_llr_o). At the VN stage of
// each iteration the codeword terminates when the iteration limit is
// reached or when ET is enabled and the ET unit reports a codeword; the
// controller then writes the output memory and frees the slot.
//
// Register freezing: en_r2_o is high only when the CN-stage slot is busy,
// en_r1_o only when the VN-stage slot is busy, started and not terminating.
// A lone codeword whose partner has terminated thus sees its registers hold
// for one extra cycle instead of capturing the terminated codeword's data,
// and with both slots idle nothing switches, as the paper describes.
//
// done_o pulses one cycle after termination, when the output memory holds
// the result, with the slot, the iterations used and whether ET ended it.
//
// The assertion a_start_idle checks that a start only hits a free slot.
// Its "disable iff" on the asynchronous reset makes lint report rst_ni as
// used both synchronously and asynchronously; that is only the assertion's
// sampling and does not change the logic.
module ldpc_ctrl
  import ldpc_pkg::*;
#(
  parameter int unsigned IMAX = IMAX_DEFAULT,
  localparam int unsigned IT_W = $clog2(IMAX + 1)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            start_i,       // load accepted for start_slot_i
  input  logic            start_slot_i,
  input  logic            et_en_i,       // early termination enabled
  input  logic            et_valid_i,    // ET: VN-stage word is a codeword
  output logic            cn_slot_o,     // slot in the CN stage (phase)
  output logic            vn_slot_o,     // slot in the VN stage
  output logic            sel_llr_o,     // MUX1: first iteration
  output logic            en_r1_o,
  output logic            en_r2_o,
  output logic            om_we_o,       // write OM[vn_slot_o]
  output logic [1:0]      busy_o,
  output logic [1:0]      free_o,        // slot may be loaded this cycle
  output logic            done_o,
  output logic            done_slot_o,
  output logic [IT_W-1:0] done_iters_o,
  output logic            done_et_o
);

  logic            ph;
  logic [1:0]      busy, started;
  logic [IT_W-1:0] iter [2];
  logic            vn_act, last_iter, et_hit, finish;

  always_comb begin
    cn_slot_o = ph;
    vn_slot_o = ~ph;
    sel_llr_o = (iter[ph] == '0);
    en_r2_o   = busy[ph];
    vn_act    = busy[~ph] & started[~ph];
    last_iter = (iter[~ph] == IT_W'(IMAX - 1));
    et_hit    = et_en_i & et_valid_i;
    finish    = vn_act & (last_iter | et_hit);
    en_r1_o   = vn_act & ~finish;
    om_we_o   = finish;
  end

  assign busy_o = busy;

  // A slot is free when it is idle or when its codeword terminates in this
  // cycle: the new codeword's channel LLRs are written at the same clock
  // edge and its first CN stage follows directly, without a bubble.
  always_comb
    for (int s = 0; s < 2; s++)
      free_o[s] = ~busy[s] | (finish & (vn_slot_o == 1'(s)));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ph           <= 1'b0;
      busy         <= '0;
      started      <= '0;
      iter         <= '{default: '0};
      done_o       <= 1'b0;
      done_slot_o  <= 1'b0;
      done_iters_o <= '0;
      done_et_o    <= 1'b0;
    end else begin
      ph     <= ~ph;
      done_o <= finish;
      // CN stage of the phase slot
      if (busy[ph]) started[ph] <= 1'b1;
      // VN stage of the other slot
      if (vn_act) begin
        if (finish) begin
          busy[~ph]    <= 1'b0;
          started[~ph] <= 1'b0;
          iter[~ph]    <= '0;
          done_slot_o  <= ~ph;
          done_iters_o <= iter[~ph] + 1'b1;
          done_et_o    <= ~last_iter;
        end else begin
          iter[~ph] <= iter[~ph] + 1'b1;
        end
      end
      if (start_i) begin
        busy[start_slot_i]    <= 1'b1;
        started[start_slot_i] <= 1'b0;
        iter[start_slot_i]    <= '0;
      end
    end
  end

  // A slot may only be loaded while it is free.
  a_start_idle: assert property (@(posedge clk_i) disable iff (!rst_ni)
    start_i |-> free_o[start_slot_i]);

endmodule
