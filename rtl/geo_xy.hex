01a90000
01a50037
019b006e
018900a3
017000d4
01510103
012d012d
01030151
00d50170
00a30189
006e019b
003701a5
000001a9
ffc901a5
ff92019b
ff5d0189
ff2c0170
fefd0151
fed3012d
feaf0103
fe9000d4
fe7700a3
fe65006e
fe5b0037
fe570000
fe5bffc9
fe65ff92
fe77ff5d
fe90ff2b
feaffefd
fed3fed3
fefdfeaf
ff2bfe90
ff5dfe77
ff92fe65
ffc9fe5b
0000fe57
0037fe5b
006efe65
00a3fe77
00d5fe90
0103feaf
012dfed3
0151fefd
0170ff2b
0189ff5d
019bff92
01a5ffc9
01d2001f
01cb005b
01bb0096
01a300cf
01850104
015f0134
0134015f
01040185
00cf01a3
009601bb
005b01cb
001f01d2
ffe101d2
ffa501cb
ff6a01bb
ff3101a3
fefc0185
fecc015f
fea10134
fe7b0104
fe5d00cf
fe450096
fe35005b
fe2e001f
fe2effe1
fe35ffa5
fe45ff6a
fe5dff31
fe7bfefc
fea1fecc
feccfea1
fefcfe7b
ff31fe5d
ff6afe45
ffa5fe35
ffe1fe2e
001ffe2e
005bfe35
0096fe45
00cffe5d
0104fe7b
0134fea1
015ffecc
0185fefc
01a3ff31
01bbff6a
01cbffa5
01d2ffe1
023f0013
023c0038
0237005e
02300083
022600a7
021a00cb
020c00ed
01fb010f
01e80130
01d3014f
01bc016d
01a40189
018901a4
016d01bc
014f01d3
013001e8
010f01fb
00ed020c
00cb021a
00a70226
00830230
005e0237
0038023c
0013023f
ffed023f
ffc8023c
ffa20237
ff7d0230
ff590226
ff35021a
ff13020c
fef101fb
fed001e8
feb101d3
fe9301bc
fe7701a4
fe5c0189
fe44016d
fe2d014f
fe180130
fe05010f
fdf400ed
fde600cb
fdda00a7
fdd00083
fdc9005e
fdc40038
fdc10013
fdc1ffed
fdc4ffc8
fdc9ffa2
fdd0ff7d
fddaff59
fde6ff35
fdf4ff13
fe05fef1
fe18fed0
fe2dfeb1
fe44fe93
fe5cfe77
fe77fe5c
fe93fe44
feb1fe2d
fed0fe18
fef1fe05
ff13fdf4
ff35fde6
ff59fdda
ff7dfdd0
ffa2fdc9
ffc8fdc4
ffedfdc1
0013fdc1
0038fdc4
005efdc9
0083fdd0
00a7fdda
00cbfde6
00edfdf4
010ffe05
0130fe18
014ffe2d
016dfe44
0189fe5c
01a4fe77
01bcfe93
01d3feb1
01e8fed0
01fbfef1
020cff13
021aff35
0226ff59
0230ff7d
0237ffa2
023cffc8
023fffed
