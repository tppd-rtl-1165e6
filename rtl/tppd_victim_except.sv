// tppd_victim_except: oldest way of a set not owned by a given process.
//
// This is the alternative victim V_x(s, p) of the dual victim policy
// (findVictimExcept): scan the ways for the first one whose owner differs from
// omit_pid_i, then keep scanning and move to any later way that is both older
// and not owned by omit_pid_i.  With omit_en_i low no way is excluded and the
// result is the plain LRU victim V(s) (getLRUVictim), so the same block serves
// both victim choices.  All ways are assumed valid: the cache fills an
// invalid way, when there is one, without calling the victim search.
//
// found_o is low when every way belongs to omit_pid_i; way_o is then 0.
// Purely combinational.
module tppd_victim_except #(
  parameter int unsigned WAYS  = tppd_pkg::LLC_WAYS,
  parameter int unsigned PID_W = tppd_pkg::PID_W,
  parameter int unsigned AGE_W = $clog2(WAYS)
) (
  input  logic [WAYS-1:0][AGE_W-1:0] ages_i,
  input  logic [WAYS-1:0][PID_W-1:0] owner_i,
  input  logic                       omit_en_i,
  input  logic [PID_W-1:0]           omit_pid_i,
  output logic [$clog2(WAYS)-1:0]    way_o,
  output logic                       found_o
);

  logic [AGE_W-1:0] max_age;
  logic             eligible;

  always_comb begin
    way_o   = '0;
    found_o = 1'b0;
    max_age = '0;
    for (int k = 0; k < WAYS; k++) begin
      eligible = !(omit_en_i && owner_i[k] == omit_pid_i);
      if (eligible && (!found_o || ages_i[k] > max_age)) begin
        way_o   = k[$clog2(WAYS)-1:0];
        max_age = ages_i[k];
        found_o = 1'b1;
      end
    end
  end

endmodule
