// Reference HDLC model for the testbenches: bit-serial encoder and decoder
// written as plain queue code, separate from the RTL. Bytes go LSB first,
// a zero follows five ones, the FCS is ISO FCS-16 (CRC-CCITT, reflected,
// init 0xFFFF, sent complemented), and frames are delimited by 0x7E.
package hdlc_model_pkg;

  typedef bit bitq_t[$];
  typedef byte unsigned byteq_t[$];

  function automatic bit [15:0] ref_fcs(byteq_t data);
    bit [15:0] c = 16'hFFFF;
    foreach (data[i]) begin
      for (int k = 0; k < 8; k++) begin
        bit fb = c[0] ^ data[i][k];
        c = {1'b0, c[15:1]};
        if (fb) c = c ^ 16'h8408;
      end
    end
    return ~c;
  endfunction

  function automatic void push_flag(ref bitq_t q);
    for (int k = 0; k < 8; k++) q.push_back(k != 0 && k != 7);
  endfunction

  // Encode one frame (no flags); append stuffed bits to q
  function automatic void encode_frame(ref bitq_t q, input byteq_t data, input bit corrupt_fcs = 0);
    bit [15:0] f = ref_fcs(data);
    byteq_t all = data;
    int ones = 0;
    if (corrupt_fcs) f = f ^ 16'h0001;
    all.push_back(f[7:0]);
    all.push_back(f[15:8]);
    foreach (all[i]) begin
      for (int k = 0; k < 8; k++) begin
        q.push_back(all[i][k]);
        if (all[i][k]) begin
          ones++;
          if (ones == 5) begin q.push_back(1'b0); ones = 0; end
        end else ones = 0;
      end
    end
  endfunction

  // Decode a bit stream into frames (FCS checked and removed). ok[i] tells
  // whether frame i had a good FCS.
  function automatic void decode(input bitq_t q, ref byteq_t frames[$], ref bit ok[$]);
    bit [7:0] win = 0;
    bitq_t cur;
    int ones = 0;
    bit in_frame = 0;
    for (int i = 0; i < q.size(); i++) begin
      win = {q[i], win[7:1]};
      if (win == 8'h7E) begin
        // drop the 7 flag bits already in cur
        if (in_frame && cur.size() > 7) begin
          byteq_t fr;
          bit [15:0] fcs_rx;
          repeat (7) void'(cur.pop_back());
          if (cur.size() % 8 == 0 && cur.size() >= 24) begin
            for (int b = 0; b < cur.size() / 8; b++) begin
              byte unsigned v = 0;
              for (int k = 0; k < 8; k++) v[k] = cur[b*8+k];
              fr.push_back(v);
            end
            fcs_rx = {fr[fr.size()-1], fr[fr.size()-2]};
            void'(fr.pop_back()); void'(fr.pop_back());
            frames.push_back(fr);
            ok.push_back(fcs_rx == ref_fcs(fr));
          end
        end
        cur.delete();
        in_frame = 1;
        ones = 0;
        continue;
      end
      if (q[i]) begin
        ones++;
        cur.push_back(1'b1);
      end else begin
        if (ones != 5) cur.push_back(1'b0);
        ones = 0;
      end
    end
  endfunction

endpackage
