// fetch_control_fsm: the Fetch Control FSM that manages the Depack_Q.
//
// The Depack_Q is two 32-bit registers, A and B, used in turn as a two-entry
// queue of chunks. The FSM remembers which register is written next and which
// ones hold unread bytes. It requests a chunk (Fetch Enable) when the next
// register is free; the chunk is written (Write Enable 1 for A, 2 for B) when
// the cache hits, and fetch stalls on a miss. The depack stage reports where
// its read pointer is through the Write Bit (the pointer's MSB: 0 = in A,
// 1 = in B); when that bit changes, the register the pointer has left is
// freed. On reset and on Branch Control both registers are emptied and A is
// selected, as the paper describes; the chunk arriving in a branch cycle is
// dropped. The state encoding, the one-cycle delay in freeing a register and
// the q_full outputs (which tell the depack stage which registers hold data)
// are this design's choices.
// Timing: fetch_en, we1, we2 and q_full are combinational from the state and
// the inputs of the current cycle.
module fetch_control_fsm (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       write_bit,    // read pointer MSB from register C
  input  logic       branch_ctrl,  // Branch Control
  input  logic       ic_ready,     // cache hit, chunk valid
  output logic       fetch_en,     // Fetch Enable (chunk request)
  output logic       we1,          // Write Enable 1: register A
  output logic       we2,          // Write Enable 2: register B
  output logic [1:0] q_full        // [0]: A holds unread bytes, [1]: B does
);
  typedef enum logic {SEL_A = 1'b0, SEL_B = 1'b1} sel_e;

  sel_e       next_q;      // register written next
  logic [1:0] full_q;      // registers holding unread data
  logic       wbit_q;      // Write Bit seen in the previous cycle
  logic [1:0] release_c;   // register left by the read pointer
  logic [1:0] avail_c;     // full after this cycle's release
  logic       write_c;

  // Occupancy does not depend on Branch Control; keeping it apart from the
  // write enables keeps the Branch Control -> q_full path visibly absent.
  always_comb begin
    release_c = 2'b00;
    if (write_bit != wbit_q) release_c[wbit_q] = 1'b1;
    avail_c = full_q & ~release_c;
    q_full  = avail_c;
  end

  always_comb begin
    fetch_en = !branch_ctrl && !avail_c[next_q];
    write_c  = fetch_en && ic_ready;
    we1      = write_c && (next_q == SEL_A);
    we2      = write_c && (next_q == SEL_B);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_q <= SEL_A;
      full_q <= 2'b00;
      wbit_q <= 1'b0;
    end else if (branch_ctrl) begin
      next_q <= SEL_A;
      full_q <= 2'b00;
      wbit_q <= 1'b0;        // the read pointer restarts in A
    end else begin
      wbit_q <= write_bit;
      full_q <= avail_c | {we2, we1};
      if (write_c) next_q <= (next_q == SEL_A) ? SEL_B : SEL_A;
    end
  end

  // A chunk is only ever written into a free register, and into one at a time.
  assert property (@(posedge clk) disable iff (!rst_n) !(we1 && we2));
  assert property (@(posedge clk) disable iff (!rst_n) we1 |-> !avail_c[0]);
  assert property (@(posedge clk) disable iff (!rst_n) we2 |-> !avail_c[1]);
endmodule
