// deparser_pkg: protocol configuration and elaboration-time graph functions of the deparser.
//
// The deparser is tailored to one deparser graph (a DAG whose start-to-end paths are the
// header sequences that may be emitted). Here the graph is held as its list of paths, each
// path written as the PHV_valid value that selects it. Headers are always emitted in their
// index order (the fixed order of the P4 emit statements), so a path is fully described by
// which headers it contains.
//
// Two graphs over the same five headers (Ethernet, IPv4, IPv6, TCP, UDP) are provided:
//   CFG_T1_PARSER_DAG   - the simplified graph with 7 paths (Ethernet; Ethernet->IPv4; ...),
//                         the running example of the design and its default.
//   CFG_T1_DEPARSER_DAG - the non-optimized graph where each emit may or may not happen,
//                         2^5 = 32 paths, including the empty one.
//
// PHV layout (this design's choice): header h occupies PHV bytes PHV_OFF(h) .. +HDR_BYTES[h]-1,
// headers packed in index order; PHV byte i is phv_data[8*i +: 8]; byte 0 of a header is its
// first byte on the wire. phv_valid[h] is the validity bit of header h.
//
// The functions below are evaluated at elaboration only. They compute, for an output bus of
// W bytes, which PHV bytes can appear on each output byte lane (the nodes of that lane's
// sub-DAG), the node that follows a node on a given path, and the payload offset of a path.
// Node and state encoding used by the header shifters: 0 = no node (end), b+1 = PHV byte b.
package deparser_pkg;

  localparam int unsigned N_HDRS = 5;

  typedef enum logic [N_HDRS-1:0] {
    HDR_ETHERNET = 5'b00001,
    HDR_IPV4     = 5'b00010,
    HDR_IPV6     = 5'b00100,
    HDR_TCP      = 5'b01000,
    HDR_UDP      = 5'b10000
  } hdr_bit_e;

  // Header sizes in bytes, index order Ethernet, IPv4, IPv6, TCP, UDP.
  localparam int unsigned HDR_BYTES [N_HDRS] = '{14, 20, 40, 20, 8};
  localparam int unsigned PHV_BYTES = 102;  // sum of HDR_BYTES
  localparam int unsigned PHV_BITS  = PHV_BYTES * 8;

  // State / node width of a header shifter: 0 plus one code per PHV byte.
  localparam int unsigned NODE_W = $clog2(PHV_BYTES + 1);

  typedef enum int unsigned {
    CFG_T1_PARSER_DAG   = 0,
    CFG_T1_DEPARSER_DAG = 1
  } cfg_e;


  // Paths of the simplified T1 graph, as PHV_valid values.
  localparam int unsigned PARSER_DAG_PATHS = 7;
  localparam logic [N_HDRS-1:0] PARSER_DAG_MASK [PARSER_DAG_PATHS] = '{
    5'b00001,   // Ethernet                14 B
    5'b00011,   // Ethernet->IPv4          34 B
    5'b01011,   // Ethernet->IPv4->TCP     54 B
    5'b10011,   // Ethernet->IPv4->UDP     42 B
    5'b00101,   // Ethernet->IPv6          54 B
    5'b01101,   // Ethernet->IPv6->TCP     74 B
    5'b10101    // Ethernet->IPv6->UDP     62 B
  };

  function automatic int unsigned n_paths(cfg_e cfg);
    return (cfg == CFG_T1_PARSER_DAG) ? PARSER_DAG_PATHS : 32;
  endfunction

  function automatic logic [N_HDRS-1:0] path_mask(cfg_e cfg, int unsigned p);
    if (cfg == CFG_T1_PARSER_DAG) return PARSER_DAG_MASK[p];
    return N_HDRS'(p);
  endfunction

  // First PHV byte of header h.
  function automatic int unsigned phv_off(int unsigned h);
    int unsigned s = 0;
    for (int unsigned i = 0; i < h; i++) s += HDR_BYTES[i];
    return s;
  endfunction

  // Header that holds PHV byte b.
  function automatic int unsigned hdr_of_byte(int unsigned b);
    for (int unsigned h = 0; h < N_HDRS; h++)
      if (b < phv_off(h) + HDR_BYTES[h]) return h;
    return N_HDRS;
  endfunction

  // Packet byte position of the first byte of header h on the path given by mask m.
  function automatic int unsigned hdr_pos(logic [N_HDRS-1:0] m, int unsigned h);
    int unsigned s = 0;
    for (int unsigned i = 0; i < h; i++) if (m[i]) s += HDR_BYTES[i];
    return s;
  endfunction

  // Total header length of a path, in bytes.
  function automatic int unsigned path_len(logic [N_HDRS-1:0] m);
    return hdr_pos(m, N_HDRS);
  endfunction

  // Node code (0 = none, b+1 = PHV byte b) found at packet byte position pos on path m.
  function automatic int unsigned node_at(logic [N_HDRS-1:0] m, int unsigned pos);
    for (int unsigned h = 0; h < N_HDRS; h++) begin
      if (m[h]) begin
        int unsigned p0 = hdr_pos(m, h);
        if (pos >= p0 && pos < p0 + HDR_BYTES[h]) return phv_off(h) + (pos - p0) + 1;
      end
    end
    return 0;
  endfunction

  // True when PHV byte b belongs to the sub-DAG of output lane `lane` for a W-byte bus.
  function automatic bit is_node(cfg_e cfg, int unsigned w, int unsigned lane, int unsigned b);
    int unsigned h  = hdr_of_byte(b);
    int unsigned bb = b - phv_off(h);
    for (int unsigned p = 0; p < n_paths(cfg); p++) begin
      logic [N_HDRS-1:0] m = path_mask(cfg, p);
      if (m[h] && ((hdr_pos(m, h) + bb) % w) == lane) return 1'b1;
    end
    return 1'b0;
  endfunction

  // Number of nodes (multiplexer inputs) of the sub-DAG of one lane.
  function automatic int unsigned n_nodes(cfg_e cfg, int unsigned w, int unsigned lane);
    int unsigned n = 0;
    for (int unsigned b = 0; b < PHV_BYTES; b++) if (is_node(cfg, w, lane, b)) n++;
    return n;
  endfunction

  // Node following PHV byte b on lane of a W-byte bus, on path m (0 = end).
  function automatic int unsigned next_node(logic [N_HDRS-1:0] m, int unsigned w, int unsigned b);
    int unsigned h = hdr_of_byte(b);
    if (!m[h]) return 0;
    return node_at(m, hdr_pos(m, h) + (b - phv_off(h)) + w);
  endfunction

  // Payload offsets. Entry 0 is offset 0 (a packet sent without headers, e.g. for a valid
  // vector on no path); entry p+1 is path p's header length mod W.
  function automatic int unsigned cand_offset(cfg_e cfg, int unsigned w, int unsigned p);
    return (p == 0) ? 0 : path_len(path_mask(cfg, p - 1)) % w;
  endfunction

  function automatic bit cand_is_new(cfg_e cfg, int unsigned w, int unsigned p);
    for (int unsigned q = 0; q < p; q++)
      if (cand_offset(cfg, w, q) == cand_offset(cfg, w, p)) return 1'b0;
    return 1'b1;
  endfunction

  // Number of distinct payload offsets (inputs of payload multiplexers 1 and 3).
  function automatic int unsigned n_offsets(cfg_e cfg, int unsigned w);
    int unsigned n = 0;
    for (int unsigned p = 0; p <= n_paths(cfg); p++) if (cand_is_new(cfg, w, p)) n++;
    return n;
  endfunction

  // Index (in the distinct-offset list) of offset value `off`.
  function automatic int unsigned offset_index(cfg_e cfg, int unsigned w, int unsigned off);
    int unsigned n = 0;
    for (int unsigned p = 0; p <= n_paths(cfg); p++) begin
      if (cand_is_new(cfg, w, p)) begin
        if (cand_offset(cfg, w, p) == off) return n;
        n++;
      end
    end
    return 0;
  endfunction

  // Offset value of entry i of the distinct-offset list.
  function automatic int unsigned offset_value(cfg_e cfg, int unsigned w, int unsigned i);
    int unsigned n = 0;
    for (int unsigned p = 0; p <= n_paths(cfg); p++) begin
      if (cand_is_new(cfg, w, p)) begin
        if (n == i) return cand_offset(cfg, w, p);
        n++;
      end
    end
    return 0;
  endfunction

endpackage
