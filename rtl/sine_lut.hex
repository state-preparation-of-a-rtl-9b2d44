0000
00c9
0192
025b
0324
03ed
04b6
057f
0648
0711
07d9
08a2
096a
0a33
0afb
0bc4
0c8c
0d54
0e1c
0ee3
0fab
1072
113a
1201
12c8
138f
1455
151c
15e2
16a8
176e
1833
18f9
19be
1a82
1b47
1c0b
1ccf
1d93
1e57
1f1a
1fdd
209f
2161
2223
22e5
23a6
2467
2528
25e8
26a8
2767
2826
28e5
29a3
2a61
2b1f
2bdc
2c99
2d55
2e11
2ecc
2f87
3041
30fb
31b5
326e
3326
33df
3496
354d
3604
36ba
376f
3824
38d9
398c
3a40
3af2
3ba5
3c56
3d07
3db8
3e68
3f17
3fc5
4073
4121
41ce
427a
4325
43d0
447a
4524
45cd
4675
471c
47c3
4869
490f
49b4
4a58
4afb
4b9d
4c3f
4ce0
4d81
4e20
4ebf
4f5d
4ffb
5097
5133
51ce
5268
5302
539b
5432
54c9
5560
55f5
568a
571d
57b0
5842
58d3
5964
59f3
5a82
5b0f
5b9c
5c28
5cb3
5d3e
5dc7
5e4f
5ed7
5f5d
5fe3
6068
60eb
616e
61f0
6271
62f1
6370
63ee
646c
64e8
6563
65dd
6656
66cf
6746
67bc
6832
68a6
6919
698b
69fd
6a6d
6adc
6b4a
6bb7
6c23
6c8e
6cf8
6d61
6dc9
6e30
6e96
6efb
6f5e
6fc1
7022
7083
70e2
7140
719d
71f9
7254
72ae
7307
735e
73b5
740a
745f
74b2
7504
7555
75a5
75f3
7641
768d
76d8
7722
776b
77b3
77fa
783f
7884
78c7
7909
794a
7989
79c8
7a05
7a41
7a7c
7ab6
7aee
7b26
7b5c
7b91
7bc5
7bf8
7c29
7c59
7c88
7cb6
7ce3
7d0e
7d39
7d62
7d89
7db0
7dd5
7dfa
7e1d
7e3e
7e5f
7e7e
7e9c
7eb9
7ed5
7eef
7f09
7f21
7f37
7f4d
7f61
7f74
7f86
7f97
7fa6
7fb4
7fc1
7fcd
7fd8
7fe1
7fe9
7ff0
7ff5
7ff9
7ffd
7ffe
7fff
7ffe
7ffd
7ff9
7ff5
7ff0
7fe9
7fe1
7fd8
7fcd
7fc1
7fb4
7fa6
7f97
7f86
7f74
7f61
7f4d
7f37
7f21
7f09
7eef
7ed5
7eb9
7e9c
7e7e
7e5f
7e3e
7e1d
7dfa
7dd5
7db0
7d89
7d62
7d39
7d0e
7ce3
7cb6
7c88
7c59
7c29
7bf8
7bc5
7b91
7b5c
7b26
7aee
7ab6
7a7c
7a41
7a05
79c8
7989
794a
7909
78c7
7884
783f
77fa
77b3
776b
7722
76d8
768d
7641
75f3
75a5
7555
7504
74b2
745f
740a
73b5
735e
7307
72ae
7254
71f9
719d
7140
70e2
7083
7022
6fc1
6f5e
6efb
6e96
6e30
6dc9
6d61
6cf8
6c8e
6c23
6bb7
6b4a
6adc
6a6d
69fd
698b
6919
68a6
6832
67bc
6746
66cf
6656
65dd
6563
64e8
646c
63ee
6370
62f1
6271
61f0
616e
60eb
6068
5fe3
5f5d
5ed7
5e4f
5dc7
5d3e
5cb3
5c28
5b9c
5b0f
5a82
59f3
5964
58d3
5842
57b0
571d
568a
55f5
5560
54c9
5432
539b
5302
5268
51ce
5133
5097
4ffb
4f5d
4ebf
4e20
4d81
4ce0
4c3f
4b9d
4afb
4a58
49b4
490f
4869
47c3
471c
4675
45cd
4524
447a
43d0
4325
427a
41ce
4121
4073
3fc5
3f17
3e68
3db8
3d07
3c56
3ba5
3af2
3a40
398c
38d9
3824
376f
36ba
3604
354d
3496
33df
3326
326e
31b5
30fb
3041
2f87
2ecc
2e11
2d55
2c99
2bdc
2b1f
2a61
29a3
28e5
2826
2767
26a8
25e8
2528
2467
23a6
22e5
2223
2161
209f
1fdd
1f1a
1e57
1d93
1ccf
1c0b
1b47
1a82
19be
18f9
1833
176e
16a8
15e2
151c
1455
138f
12c8
1201
113a
1072
0fab
0ee3
0e1c
0d54
0c8c
0bc4
0afb
0a33
096a
08a2
07d9
0711
0648
057f
04b6
03ed
0324
025b
0192
00c9
0000
ff37
fe6e
fda5
fcdc
fc13
fb4a
fa81
f9b8
f8ef
f827
f75e
f696
f5cd
f505
f43c
f374
f2ac
f1e4
f11d
f055
ef8e
eec6
edff
ed38
ec71
ebab
eae4
ea1e
e958
e892
e7cd
e707
e642
e57e
e4b9
e3f5
e331
e26d
e1a9
e0e6
e023
df61
de9f
dddd
dd1b
dc5a
db99
dad8
da18
d958
d899
d7da
d71b
d65d
d59f
d4e1
d424
d367
d2ab
d1ef
d134
d079
cfbf
cf05
ce4b
cd92
ccda
cc21
cb6a
cab3
c9fc
c946
c891
c7dc
c727
c674
c5c0
c50e
c45b
c3aa
c2f9
c248
c198
c0e9
c03b
bf8d
bedf
be32
bd86
bcdb
bc30
bb86
badc
ba33
b98b
b8e4
b83d
b797
b6f1
b64c
b5a8
b505
b463
b3c1
b320
b27f
b1e0
b141
b0a3
b005
af69
aecd
ae32
ad98
acfe
ac65
abce
ab37
aaa0
aa0b
a976
a8e3
a850
a7be
a72d
a69c
a60d
a57e
a4f1
a464
a3d8
a34d
a2c2
a239
a1b1
a129
a0a3
a01d
9f98
9f15
9e92
9e10
9d8f
9d0f
9c90
9c12
9b94
9b18
9a9d
9a23
99aa
9931
98ba
9844
97ce
975a
96e7
9675
9603
9593
9524
94b6
9449
93dd
9372
9308
929f
9237
91d0
916a
9105
90a2
903f
8fde
8f7d
8f1e
8ec0
8e63
8e07
8dac
8d52
8cf9
8ca2
8c4b
8bf6
8ba1
8b4e
8afc
8aab
8a5b
8a0d
89bf
8973
8928
88de
8895
884d
8806
87c1
877c
8739
86f7
86b6
8677
8638
85fb
85bf
8584
854a
8512
84da
84a4
846f
843b
8408
83d7
83a7
8378
834a
831d
82f2
82c7
829e
8277
8250
822b
8206
81e3
81c2
81a1
8182
8164
8147
812b
8111
80f7
80df
80c9
80b3
809f
808c
807a
8069
805a
804c
803f
8033
8028
801f
8017
8010
800b
8007
8003
8002
8001
8002
8003
8007
800b
8010
8017
801f
8028
8033
803f
804c
805a
8069
807a
808c
809f
80b3
80c9
80df
80f7
8111
812b
8147
8164
8182
81a1
81c2
81e3
8206
822b
8250
8277
829e
82c7
82f2
831d
834a
8378
83a7
83d7
8408
843b
846f
84a4
84da
8512
854a
8584
85bf
85fb
8638
8677
86b6
86f7
8739
877c
87c1
8806
884d
8895
88de
8928
8973
89bf
8a0d
8a5b
8aab
8afc
8b4e
8ba1
8bf6
8c4b
8ca2
8cf9
8d52
8dac
8e07
8e63
8ec0
8f1e
8f7d
8fde
903f
90a2
9105
916a
91d0
9237
929f
9308
9372
93dd
9449
94b6
9524
9593
9603
9675
96e7
975a
97ce
9844
98ba
9931
99aa
9a23
9a9d
9b18
9b94
9c12
9c90
9d0f
9d8f
9e10
9e92
9f15
9f98
a01d
a0a3
a129
a1b1
a239
a2c2
a34d
a3d8
a464
a4f1
a57e
a60d
a69c
a72d
a7be
a850
a8e3
a976
aa0b
aaa0
ab37
abce
ac65
acfe
ad98
ae32
aecd
af69
b005
b0a3
b141
b1e0
b27f
b320
b3c1
b463
b505
b5a8
b64c
b6f1
b797
b83d
b8e4
b98b
ba33
badc
bb86
bc30
bcdb
bd86
be32
bedf
bf8d
c03b
c0e9
c198
c248
c2f9
c3aa
c45b
c50e
c5c0
c674
c727
c7dc
c891
c946
c9fc
cab3
cb6a
cc21
ccda
cd92
ce4b
cf05
cfbf
d079
d134
d1ef
d2ab
d367
d424
d4e1
d59f
d65d
d71b
d7da
d899
d958
da18
dad8
db99
dc5a
dd1b
dddd
de9f
df61
e023
e0e6
e1a9
e26d
e331
e3f5
e4b9
e57e
e642
e707
e7cd
e892
e958
ea1e
eae4
ebab
ec71
ed38
edff
eec6
ef8e
f055
f11d
f1e4
f2ac
f374
f43c
f505
f5cd
f696
f75e
f827
f8ef
f9b8
fa81
fb4a
fc13
fcdc
fda5
fe6e
ff37
