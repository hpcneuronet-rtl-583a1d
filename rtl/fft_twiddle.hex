7fff0000
7ffdfe6e
7ff5fcdc
7fe9fb4a
7fd8f9b8
7fc1f827
7fa6f696
7f86f505
7f61f374
7f37f1e4
7f09f055
7ed5eec6
7e9ced38
7e5febab
7e1dea1e
7dd5e892
7d89e707
7d39e57e
7ce3e3f5
7c88e26d
7c29e0e6
7bc5df61
7b5cdddd
7aeedc5a
7a7cdad8
7a05d958
7989d7da
7909d65d
7884d4e1
77fad367
776bd1ef
76d8d079
7641cf05
75a5cd92
7504cc21
745fcab3
73b5c946
7307c7dc
7254c674
719dc50e
70e2c3aa
7022c248
6f5ec0e9
6e96bf8d
6dc9be32
6cf8bcdb
6c23bb86
6b4aba33
6a6db8e4
698bb797
68a6b64c
67bcb505
66cfb3c1
65ddb27f
64e8b141
63eeb005
62f1aecd
61f0ad98
60ebac65
5fe3ab37
5ed7aa0b
5dc7a8e3
5cb3a7be
5b9ca69c
5a82a57e
5964a464
5842a34d
571da239
55f5a129
54c9a01d
539b9f15
52689e10
51339d0f
4ffb9c12
4ebf9b18
4d819a23
4c3f9931
4afb9844
49b4975a
48699675
471c9593
45cd94b6
447a93dd
43259308
41ce9237
4073916a
3f1790a2
3db88fde
3c568f1e
3af28e63
398c8dac
38248cf9
36ba8c4b
354d8ba1
33df8afc
326e8a5b
30fb89bf
2f878928
2e118895
2c998806
2b1f877c
29a386f7
28268677
26a885fb
25288584
23a68512
222384a4
209f843b
1f1a83d7
1d938378
1c0b831d
1a8282c7
18f98277
176e822b
15e281e3
145581a1
12c88164
113a812b
0fab80f7
0e1c80c9
0c8c809f
0afb807a
096a805a
07d9803f
06488028
04b68017
0324800b
01928003
00008001
fe6e8003
fcdc800b
fb4a8017
f9b88028
f827803f
f696805a
f505807a
f374809f
f1e480c9
f05580f7
eec6812b
ed388164
ebab81a1
ea1e81e3
e892822b
e7078277
e57e82c7
e3f5831d
e26d8378
e0e683d7
df61843b
dddd84a4
dc5a8512
dad88584
d95885fb
d7da8677
d65d86f7
d4e1877c
d3678806
d1ef8895
d0798928
cf0589bf
cd928a5b
cc218afc
cab38ba1
c9468c4b
c7dc8cf9
c6748dac
c50e8e63
c3aa8f1e
c2488fde
c0e990a2
bf8d916a
be329237
bcdb9308
bb8693dd
ba3394b6
b8e49593
b7979675
b64c975a
b5059844
b3c19931
b27f9a23
b1419b18
b0059c12
aecd9d0f
ad989e10
ac659f15
ab37a01d
aa0ba129
a8e3a239
a7bea34d
a69ca464
a57ea57e
a464a69c
a34da7be
a239a8e3
a129aa0b
a01dab37
9f15ac65
9e10ad98
9d0faecd
9c12b005
9b18b141
9a23b27f
9931b3c1
9844b505
975ab64c
9675b797
9593b8e4
94b6ba33
93ddbb86
9308bcdb
9237be32
916abf8d
90a2c0e9
8fdec248
8f1ec3aa
8e63c50e
8dacc674
8cf9c7dc
8c4bc946
8ba1cab3
8afccc21
8a5bcd92
89bfcf05
8928d079
8895d1ef
8806d367
877cd4e1
86f7d65d
8677d7da
85fbd958
8584dad8
8512dc5a
84a4dddd
843bdf61
83d7e0e6
8378e26d
831de3f5
82c7e57e
8277e707
822be892
81e3ea1e
81a1ebab
8164ed38
812beec6
80f7f055
80c9f1e4
809ff374
807af505
805af696
803ff827
8028f9b8
8017fb4a
800bfcdc
8003fe6e
