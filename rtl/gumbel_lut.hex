fe2b
fe5d
fe78
fe8b
fe9a
fea8
feb3
febd
fec6
fecf
fed7
fede
fee5
feec
fef2
fef8
fefe
ff03
ff09
ff0e
ff13
ff18
ff1d
ff21
ff26
ff2a
ff2e
ff33
ff37
ff3b
ff3f
ff43
ff46
ff4a
ff4e
ff52
ff55
ff59
ff5c
ff60
ff63
ff67
ff6a
ff6d
ff71
ff74
ff77
ff7b
ff7e
ff81
ff84
ff87
ff8a
ff8d
ff90
ff93
ff96
ff99
ff9c
ff9f
ffa2
ffa5
ffa8
ffab
ffae
ffb1
ffb4
ffb6
ffb9
ffbc
ffbf
ffc2
ffc5
ffc7
ffca
ffcd
ffd0
ffd2
ffd5
ffd8
ffdb
ffdd
ffe0
ffe3
ffe6
ffe8
ffeb
ffee
fff1
fff3
fff6
fff9
fffb
fffe
0001
0004
0006
0009
000c
000e
0011
0014
0017
0019
001c
001f
0022
0024
0027
002a
002d
002f
0032
0035
0038
003a
003d
0040
0043
0046
0048
004b
004e
0051
0054
0057
005a
005c
005f
0062
0065
0068
006b
006e
0071
0074
0077
007a
007d
0080
0083
0086
0089
008c
008f
0092
0095
0098
009c
009f
00a2
00a5
00a8
00ac
00af
00b2
00b6
00b9
00bc
00c0
00c3
00c6
00ca
00cd
00d1
00d4
00d8
00dc
00df
00e3
00e6
00ea
00ee
00f2
00f6
00f9
00fd
0101
0105
0109
010d
0111
0115
011a
011e
0122
0126
012b
012f
0134
0138
013d
0141
0146
014b
0150
0154
0159
015e
0164
0169
016e
0173
0179
017e
0184
018a
018f
0195
019b
01a2
01a8
01ae
01b5
01bb
01c2
01c9
01d0
01d8
01df
01e7
01ef
01f7
01ff
0208
0211
021a
0223
022d
0237
0241
024c
0257
0263
026f
027c
0289
0297
02a6
02b5
02c6
02d8
02ea
02ff
0314
032c
0346
0363
0384
03a9
03d4
0408
0449
04a0
0523
063d
