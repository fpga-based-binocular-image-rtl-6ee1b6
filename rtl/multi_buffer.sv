// Multi buffer: ring of five storage sections holding extracted features, so
// that matching of frame n can read while frame n+1 is being written.
//
// At any time two sections are written (WL: current left, WR: current right)
// and three are read (RL: left of the frame being matched, RR: its right
// image, RP: the left image of the frame before). With ring base p the roles
// are WL = p, RP = p+1, RR = p+2, RL = p+3, WR = p+4 (mod 5). Each `advance`
// moves all five roles two sections on: the sections just written become RL
// and RR, the old RL becomes RP, and the old RP and RR sections are reused
// for writing. This reproduces the pointer positions drawn for T1..T4 in the
// paper's ring diagram (base 0, 2, 4, 1, ...).
//
// Write side: wr_en appends wr_data to WL (wr_right = 0) or WR (wr_right = 1)
// at that section's fill count; a feature arriving at a full section is
// dropped and sets the sticky `overflow`. `advance` empties the two sections
// that become the new write sections. Read side: three independent ports,
// each with a one-cycle registered read, and the fill count of each read
// section. Section size DEPTH is this design's choice (the paper gives none);
// 1024 features x 148 bits x 5 sections is about the 22.5 BRAM the paper
// reports for the matcher.
module multi_buffer
  import feat_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          advance,
  // write side
  input  logic          wr_en,
  input  logic          wr_right,
  input  feature_t      wr_data,
  output logic          overflow,
  // read side
  input  logic [AW-1:0] rl_addr,
  input  logic [AW-1:0] rr_addr,
  input  logic [AW-1:0] rp_addr,
  output feature_t      rl_data,
  output feature_t      rr_data,
  output feature_t      rp_data,
  output logic [AW:0]   rl_count,
  output logic [AW:0]   rr_count,
  output logic [AW:0]   rp_count,
  output logic [2:0]    base       // ring base p, for observation
);
  typedef logic [2:0] sec_t;

  function automatic sec_t add5(input sec_t a, input int unsigned b);
    return sec_t'((int'(a) + b) % 5);
  endfunction

  sec_t p, wl, wr, rl, rr, rp;
  assign wl = p;
  assign rp = add5(p, 1);
  assign rr = add5(p, 2);
  assign rl = add5(p, 3);
  assign wr = add5(p, 4);
  assign base = p;

  logic [AW:0] cnt [5];
  feature_t    q   [5];
  sec_t        rl_q, rr_q, rp_q;
  sec_t        wsec;
  assign wsec = wr_right ? wr : wl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p        <= '0;
      overflow <= 1'b0;
      for (int s = 0; s < 5; s++) cnt[s] <= '0;
    end else if (advance) begin
      p             <= add5(p, 2);
      cnt[add5(p, 2)] <= '0;    // next WL
      cnt[add5(p, 1)] <= '0;    // next WR
    end else if (wr_en) begin
      if (cnt[wsec] == (AW+1)'(DEPTH)) overflow <= 1'b1;
      else                             cnt[wsec] <= cnt[wsec] + 1'b1;
    end
  end

  for (genvar s = 0; s < 5; s++) begin : g_sec
    feature_t      mem [DEPTH];
    logic [AW-1:0] raddr;
    always_comb
      raddr = (sec_t'(s) == rl) ? rl_addr : (sec_t'(s) == rr) ? rr_addr : rp_addr;
    always_ff @(posedge clk) begin
      if (wr_en && !advance && wsec == sec_t'(s) && cnt[s] != (AW+1)'(DEPTH))
        mem[cnt[s][AW-1:0]] <= wr_data;
      q[s] <= mem[raddr];
    end
  end

  always_ff @(posedge clk) begin
    rl_q <= rl;
    rr_q <= rr;
    rp_q <= rp;
  end

  assign rl_data  = q[rl_q];
  assign rr_data  = q[rr_q];
  assign rp_data  = q[rp_q];
  assign rl_count = cnt[rl];
  assign rr_count = cnt[rr];
  assign rp_count = cnt[rp];

  a_no_write_on_advance: assert property (@(posedge clk) disable iff (!rst_n)
    !(advance && wr_en));
endmodule
