// bspace_lru: least-recently-used order of the b-space block slots.
//
// C-lash flushes b-space blocks to the flash in LRU order. Each slot keeps an
// age; ages are always a permutation of 0..N_SLOTS-1, 0 being the most
// recently used. Touching a slot makes it age 0 and ages by one every slot
// that was younger than it. The slot of age N_SLOTS-1 is the LRU victim.
// Which accesses count as a use (hits, and blocks receiving p-space pages)
// is decided by the controller.
//
// Interface and timing: touch_en/touch_slot take effect at the clock edge;
// lru_slot is combinational on the ages. After reset slot 0 is the most
// recently used and slot N_SLOTS-1 the least.
module bspace_lru #(
  parameter int unsigned N_SLOTS = clash_pkg::B_SLOTS,
  localparam int unsigned SLOT_W = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              touch_en,
  input  logic [SLOT_W-1:0] touch_slot,
  output logic [SLOT_W-1:0] lru_slot
);

  logic [N_SLOTS-1:0][SLOT_W-1:0] age;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N_SLOTS; s++) age[s] <= SLOT_W'(s);
    end else if (touch_en) begin
      for (int s = 0; s < N_SLOTS; s++) begin
        if (SLOT_W'(s) == touch_slot) age[s] <= '0;
        else if (age[s] < age[touch_slot]) age[s] <= age[s] + 1'b1;
      end
    end
  end

  always_comb begin
    lru_slot = '0;
    for (int s = 0; s < N_SLOTS; s++)
      if (age[s] == SLOT_W'(N_SLOTS - 1)) lru_slot = SLOT_W'(s);
  end

endmodule
