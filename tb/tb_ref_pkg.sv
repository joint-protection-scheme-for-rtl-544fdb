// tb_ref_pkg: reference model of the compressed word formats, written
// independently of the RTL for the testbenches. encode() turns one group of
// lane values and keep flags into the expected stream of 32-bit words:
//   BitMap: ceil(n/32) bitmap words, then {16'b0, value} per kept lane;
//   RLC:    {run of dropped lanes, value} per kept lane, plus a closing
//           {run, value of lane n-1} if the group ends in dropped lanes;
//   CSC:    {16'b0, count}, then {lane index, value} per kept lane.
// Format codes: 0 = BitMap, 1 = RLC, 2 = CSC.
package tb_ref_pkg;

  function automatic void encode(input int fmt, input int n,
                                 input logic [15:0] vals [],
                                 input bit keep [],
                                 ref logic [31:0] q [$]);
    int pos, cnt;
    logic [31:0] w;
    if (fmt == 0) begin
      for (int b = 0; b < (n + 31) / 32; b++) begin
        w = '0;
        for (int k = 0; k < 32; k++)
          if (b * 32 + k < n) w[k] = keep[b * 32 + k];
        q.push_back(w);
      end
      for (int i = 0; i < n; i++)
        if (keep[i]) q.push_back({16'h0, vals[i]});
    end else if (fmt == 1) begin
      pos = 0;
      for (int i = 0; i < n; i++)
        if (keep[i]) begin
          q.push_back({16'(i - pos), vals[i]});
          pos = i + 1;
        end
      if (pos < n) q.push_back({16'(n - 1 - pos), vals[n - 1]});
    end else begin
      cnt = 0;
      for (int i = 0; i < n; i++) cnt += int'(keep[i]);
      q.push_back(32'(cnt));
      for (int i = 0; i < n; i++)
        if (keep[i]) q.push_back({16'(i), vals[i]});
    end
  endfunction

  // Number of words encode() produces for a group with `kept` kept lanes
  // (RLC: `trail` tells whether the group ends in a dropped lane).
  function automatic int words_for(input int fmt, input int n, input int kept, input bit trail);
    if (fmt == 0) return (n + 31) / 32 + kept;
    if (fmt == 1) return kept + int'(trail);
    return 1 + kept;
  endfunction

endpackage
